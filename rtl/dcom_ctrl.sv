// dcom_ctrl: sequencer of the decomposer array.
//
// Turns host commands into the cluster command stream (one ccmd_t per cycle,
// the same for every cluster) and drives the broadcast memory and the bank
// transfers. The central command is OP_REORTH, the re-orthogonalisation
// z <- z - sum_j (V_j . z) V_j that dominates Lanczos bidiagonalisation
// (Alg. 1 lines 4 and 5), run with the paper's partial computation
// expansion. For each basis vector V_j:
//   1. dot phase: every cluster forms the dot product of its slice of V_j
//      and z (per tile: LOAD z_t into the PE accumulators, DOT with
//      V_j,t), the EXPANSION group trees reduce their clusters' partials and
//      write EXPANSION values c_j,g into the broadcast memory. There is no
//      array-wide reduction.
//   2. update phase: per tile, LOAD z_t, then EXPANSION multiply-subtract
//      passes acc <- acc - V_j,t * c_j,g, one per broadcast value (the
//      duplicated element-wise work of computation expansion), STORE z_t
//      and one idle cycle so the next read sees the stored word.
// The split into these two phases follows the paper; the tile loop order,
// the idle cycle and the command encodings are this design's.
// Other commands: OP_NORM2 (z . z, the group partials summed here in order
// g = 0..EXPANSION-1, result on result/result_valid), OP_SCALE (V_dst <- s*z,
// with s = 1/beta or 1/alpha supplied by the host: the paper gives the
// array no divider or square root), OP_LOAD / OP_STORE (copy slots
// [0, nslots) of every cluster from / to its column's memory bank, one word
// per bank per cycle, row after row). Buffer slot of tile t of vector v is
// v*tiles + t.
// Handshake: a command is taken when cmd_valid && cmd_ready; cmd_ready is
// high only in IDLE; done pulses for one cycle when the command has ended
// (for OP_REORTH and OP_SCALE, after the last STORE has been written).
module dcom_ctrl
  import dcom_pkg::*;
#(
  parameter int unsigned NR        = 16,
  parameter int unsigned EXPANSION = 8,
  parameter int unsigned BUF_DEPTH = 64,
  localparam int unsigned BAW = $clog2(NR * BUF_DEPTH),
  localparam int unsigned CAW = $clog2(BUF_DEPTH),
  localparam int unsigned RW  = (NR > 1) ? $clog2(NR) : 1,
  localparam int unsigned GW  = (EXPANSION > 1) ? $clog2(EXPANSION) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           cmd_valid,
  input  hcmd_t          cmd,
  output logic           cmd_ready,
  output logic           done,
  output fp16_t          result,
  output logic           result_valid,
  // to the clusters
  output ccmd_t          ccmd,
  // broadcast memory
  output logic           gbm_clear,
  output logic [GW-1:0]  gbm_raddr,
  input  fp16_t          gbm_rdata,
  input  logic           gbm_full,
  // bank transfers
  output logic           bank_en,
  output logic           bank_we,
  output logic [BAW-1:0] bank_addr,
  output logic           fill_en,
  output logic [RW-1:0]  fill_row,
  output logic [CAW-1:0] fill_addr,
  output logic           drain_en,
  output logic [CAW-1:0] drain_addr,
  output logic [RW-1:0]  drain_row_q  // row whose drain data the banks write now
);
  typedef enum logic [3:0] {
    S_IDLE, S_RDOT, S_RWAIT, S_RUPD, S_NDOT, S_NWAIT, S_NSUM,
    S_SCALE, S_LOAD, S_STORE, S_DONE
  } state_e;

  typedef enum logic [1:0] { P_LOAD, P_MAC, P_STORE, P_BUBBLE } uphase_e;

  state_e  st;
  hcmd_t   c;
  logic [7:0]  j, t;
  logic [GW-1:0] g;
  uphase_e ph;
  logic        dphase;          // dot phase: 0 = LOAD z_t, 1 = DOT
  logic [15:0] n, ntot;         // bank transfer counter
  logic        xfer_q;          // second cycle of a bank transfer
  logic [RW-1:0]  xr_q;
  logic [CAW-1:0] xs_q;
  fp16_t       nacc, nsum;

  fp16_add u_nadd (.a(nacc), .b(gbm_rdata), .y(nsum));

  function automatic logic [15:0] slot(input logic [7:0] v, input logic [7:0] tt, input logic [7:0] tiles);
    return 16'(v) * 16'(tiles) + 16'(tt);
  endfunction

  logic [RW-1:0]  xr;
  logic [CAW-1:0] xs;
  assign xr = RW'(n % 16'(NR));
  assign xs = CAW'(n / 16'(NR));

  // ---------------- command stream (combinational) ----------------
  always_comb begin
    ccmd      = '0;
    ccmd.op   = C_NOP;
    gbm_raddr = g;
    bank_en   = 1'b0;
    bank_we   = 1'b0;
    bank_addr = '0;
    fill_en   = 1'b0;
    fill_row  = xr_q;
    fill_addr = xs_q;
    drain_en  = 1'b0;
    drain_addr = xs;
    unique case (st)
      S_RDOT: begin
        if (!dphase) begin
          ccmd.op   = C_LOAD;
          ccmd.addr = slot(c.zvec, t, c.tiles);
        end else begin
          ccmd.op        = C_DOT;
          ccmd.addr      = slot(j, t, c.tiles);
          ccmd.scat      = SC_ACC;
          ccmd.red       = RED_ALL;
          ccmd.dot_first = (t == 8'd0);
          ccmd.dot_last  = (t == c.tiles - 8'd1);
        end
      end
      S_RUPD: begin
        unique case (ph)
          P_LOAD:  begin ccmd.op = C_LOAD;  ccmd.addr = slot(c.zvec, t, c.tiles); end
          P_MAC:   begin
            ccmd.op     = C_MAC;
            ccmd.addr   = slot(j, t, c.tiles);
            ccmd.scat   = SC_SCALAR;
            ccmd.scalar = gbm_rdata;
            ccmd.neg    = 1'b1;
          end
          P_STORE: begin ccmd.op = C_STORE; ccmd.addr = slot(c.zvec, t, c.tiles); end
          default: ;
        endcase
      end
      S_NDOT: begin
        ccmd.op        = C_DOT;
        ccmd.addr      = slot(c.zvec, t, c.tiles);
        ccmd.scat      = SC_SELF;
        ccmd.red       = RED_ALL;
        ccmd.dot_first = (t == 8'd0);
        ccmd.dot_last  = (t == c.tiles - 8'd1);
      end
      S_SCALE: begin
        unique case (ph)
          P_LOAD:  begin   // multiply phase
            ccmd.op     = C_MUL;
            ccmd.addr   = slot(c.zvec, t, c.tiles);
            ccmd.scat   = SC_SCALAR;
            ccmd.scalar = c.scalar;
          end
          P_STORE: begin ccmd.op = C_STORE; ccmd.addr = slot(c.dstvec, t, c.tiles); end
          default: ;
        endcase
      end
      S_LOAD: begin
        // read bank word (row xr, slot xs); written into the buffers next cycle
        bank_en   = (n < ntot);
        bank_addr = BAW'(32'(xr) * BUF_DEPTH + 32'(xs));
        fill_en   = xfer_q;
      end
      S_STORE: begin
        // read slot xs of every cluster; row xr_q's word is written next cycle
        drain_en  = (n < ntot);
        bank_en   = xfer_q;
        bank_we   = xfer_q;
        bank_addr = BAW'(32'(xr_q) * BUF_DEPTH + 32'(xs_q));
      end
      default: ;
    endcase
  end
  assign drain_row_q = xr_q;
  assign cmd_ready   = (st == S_IDLE);

  // ---------------- state machine ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; c <= '0; j <= '0; t <= '0; g <= '0; ph <= P_LOAD; dphase <= 1'b0;
      n <= '0; ntot <= '0; xfer_q <= 1'b0; xr_q <= '0; xs_q <= '0;
      nacc <= FP16_ZERO; result <= FP16_ZERO; result_valid <= 1'b0;
      done <= 1'b0; gbm_clear <= 1'b0;
    end else begin
      done      <= 1'b0;
      gbm_clear <= 1'b0;
      unique case (st)
        S_IDLE: begin
          if (cmd_valid) begin
            c <= cmd; j <= '0; t <= '0; g <= '0; ph <= P_LOAD; dphase <= 1'b0;
            n <= '0; xfer_q <= 1'b0;
            ntot <= 16'(cmd.nslots) * 16'(NR);
            unique case (cmd.op)
              OP_REORTH: begin
                st <= (cmd.k == 0 || cmd.tiles == 0) ? S_DONE : S_RDOT;
                gbm_clear <= 1'b1;
              end
              OP_NORM2: begin
                st <= (cmd.tiles == 0) ? S_DONE : S_NDOT;
                gbm_clear <= 1'b1;
                result_valid <= 1'b0;
              end
              OP_SCALE: st <= (cmd.tiles == 0) ? S_DONE : S_SCALE;
              OP_LOAD:  st <= S_LOAD;
              OP_STORE: st <= S_STORE;
              default:  st <= S_DONE;
            endcase
          end
        end
        S_RDOT: begin
          dphase <= ~dphase;
          if (dphase) begin
            if (t == c.tiles - 8'd1) begin
              st <= S_RWAIT;
              t  <= '0;
            end else begin
              t <= t + 8'd1;
            end
          end
        end
        S_RWAIT: begin
          if (gbm_full) begin
            st <= S_RUPD; ph <= P_LOAD; g <= '0;
          end
        end
        S_RUPD: begin
          unique case (ph)
            P_LOAD: ph <= P_MAC;
            P_MAC: begin
              if (32'(g) == EXPANSION - 1) begin
                g  <= '0;
                ph <= P_STORE;
              end else begin
                g <= g + GW'(1);
              end
            end
            P_STORE: ph <= P_BUBBLE;
            default: begin  // P_BUBBLE
              ph <= P_LOAD;
              if (t == c.tiles - 8'd1) begin
                t <= '0;
                if (j == c.k - 8'd1) begin
                  st <= S_DONE;
                end else begin
                  j <= j + 8'd1;
                  st <= S_RDOT;
                  dphase <= 1'b0;
                  gbm_clear <= 1'b1;
                end
              end else begin
                t <= t + 8'd1;
              end
            end
          endcase
        end
        S_NDOT: begin
          if (t == c.tiles - 8'd1) begin
            st <= S_NWAIT;
            t  <= '0;
          end else begin
            t <= t + 8'd1;
          end
        end
        S_NWAIT: begin
          if (gbm_full) begin
            st <= S_NSUM; g <= '0; nacc <= FP16_ZERO;
          end
        end
        S_NSUM: begin
          nacc <= (g == '0) ? gbm_rdata : nsum;
          if (32'(g) == EXPANSION - 1) begin
            result       <= (g == '0) ? gbm_rdata : nsum;
            result_valid <= 1'b1;
            st <= S_DONE;
          end else begin
            g <= g + GW'(1);
          end
        end
        S_SCALE: begin
          unique case (ph)
            P_LOAD:  ph <= P_STORE;
            P_STORE: ph <= P_BUBBLE;
            default: begin
              ph <= P_LOAD;
              if (t == c.tiles - 8'd1) st <= S_DONE;
              else t <= t + 8'd1;
            end
          endcase
        end
        S_LOAD, S_STORE: begin
          xfer_q <= (n < ntot);
          xr_q   <= xr;
          xs_q   <= xs;
          if (n < ntot) n <= n + 16'd1;
          else st <= S_DONE;
        end
        default: begin  // S_DONE
          done <= 1'b1;
          st   <= S_IDLE;
        end
      endcase
    end
  end

  // host commands must fit the buffer
  assert property (@(posedge clk) disable iff (!rst_n)
    (cmd_valid && cmd_ready && (cmd.op == OP_LOAD || cmd.op == OP_STORE)) |-> (32'(cmd.nslots) <= BUF_DEPTH));
endmodule
