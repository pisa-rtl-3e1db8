// pns_ctrl: controller of the near-sensor processing-in-DRAM unit. On 'start'
// it runs one bit-wise convolution job (descriptor 'job') on all NSUB
// sub-arrays in lock-step: every sub-array holds its own weight bit-planes
// C_n(W) at rows w_row+n and input bit-planes C_m(I) at rows i_row+m, each a
// COLS-element vector, and produces one output element
//   out = act(BN( sum_{n<w_bits} sum_{m<i_bits} 2^(m+n) bitcount(C_n(W) & C_m(I)) )).
//
// Sequence (one clock per step):
//   CLR                      clear the DPU accumulators
//   for n, for m:
//     CPW   COPY  w_row+n -> compute row X1          (all sub-arrays)
//     CPI   COPY  i_row+m -> compute row X2          (all sub-arrays)
//     DRA   DRA   X1, X2  -> AND row in the SAs       (all sub-arrays)
//     for s: LD  load the LRB of sub-array s with its SA row
//            ACC DPU: acc[s] += bitcount(row) << (m+n)
//   for s, for b < out_bits:
//     WB    WBIT  bit b of act(acc[s]) -> sub-array s, row out_row+b, col out_col
//   DONE  one-clock 'done'
// Total: 2 + w_bits*i_bits*(3 + 2*NSUB) + NSUB*out_bits clocks.
// Follows the paper: operands copied to compute rows before DRA, AND by DRA,
// DPU bit-counter, shift by m+n, adder, activation, result saved back to
// memory. Own choices: the step order, one sub-array per two clocks through
// the shared DPU, and the write-back layout (output bit-planes).
module pns_ctrl
  import pisa_pkg::*;
#(
  parameter int unsigned NSUB  = 4096,
  parameter int unsigned DROWS = DATA_ROWS,
  localparam int unsigned SW   = (NSUB > 1) ? $clog2(NSUB) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  pns_job_t          job,
  // sub-array command
  output dram_op_e          c_op,
  output logic              c_all,     // 1: every sub-array, 0: only c_sub
  output logic [SW-1:0]     c_sub,
  output logic [ROW_AW-1:0] c_row_a,
  output logic [ROW_AW-1:0] c_row_b,
  output logic [7:0]        c_col,
  output logic              c_wbit,
  // LRB / DPU
  output logic              lrb_load,  // load the LRB serving c_sub from c_sub
  output logic              acc_clr,
  output logic              acc_en,
  output logic [6:0]        shift,
  input  logic [7:0]        act_out,   // activation of accumulator c_sub
  output pns_job_t          job_q,     // the descriptor of the running job
  output logic              busy,
  output logic              done
);
  typedef enum logic [2:0] {IDLE, CLR, CPW, CPI, DRA, LD, ACC, WB} state_e;

  state_e          st;
  pns_job_t        jb;
  logic [BITS_W-1:0] n, m;
  logic [SW-1:0]   s;
  logic [3:0]      b;
  logic            last_s;

  assign last_s = (s == SW'(NSUB - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= IDLE; jb <= '0; n <= '0; m <= '0; s <= '0; b <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        IDLE: if (start) begin jb <= job; st <= CLR; end
        CLR:  begin n <= '0; m <= '0; st <= CPW; end
        CPW:  st <= CPI;
        CPI:  st <= DRA;
        DRA:  begin s <= '0; st <= LD; end
        LD:   st <= ACC;
        ACC:  begin
          if (!last_s) begin
            s <= s + 1'b1; st <= LD;
          end else if (m + 1'b1 < jb.i_bits) begin
            m <= m + 1'b1; st <= CPW;
          end else if (n + 1'b1 < jb.w_bits) begin
            m <= '0; n <= n + 1'b1; st <= CPW;
          end else begin
            s <= '0; b <= '0; st <= WB;
          end
        end
        WB: begin
          if (b + 1'b1 < jb.out_bits) b <= b + 1'b1;
          else begin
            b <= '0;
            if (last_s) begin st <= IDLE; done <= 1'b1; end
            else s <= s + 1'b1;
          end
        end
        default: st <= IDLE;
      endcase
    end
  end

  always_comb begin
    c_op     = OP_NOP;
    c_all    = 1'b1;
    c_sub    = s;
    c_row_a  = '0;
    c_row_b  = '0;
    c_col    = jb.out_col;
    c_wbit   = 1'b0;
    lrb_load = 1'b0;
    acc_clr  = (st == CLR);
    acc_en   = (st == ACC);
    shift    = 7'(m) + 7'(n);
    unique case (st)
      CPW: begin c_op = OP_COPY; c_row_a = jb.w_row + ROW_AW'(n); c_row_b = ROW_AW'(DROWS + X1); end
      CPI: begin c_op = OP_COPY; c_row_a = jb.i_row + ROW_AW'(m); c_row_b = ROW_AW'(DROWS + X2); end
      DRA: begin c_op = OP_DRA;  c_row_a = ROW_AW'(DROWS + X1);   c_row_b = ROW_AW'(DROWS + X2); end
      LD:  lrb_load = 1'b1;
      WB:  begin
        c_op = OP_WBIT; c_all = 1'b0; c_row_a = jb.out_row + ROW_AW'(b);
        c_wbit = act_out[b[2:0]];
      end
      default: ;
    endcase
  end

  assign busy  = (st != IDLE);
  assign job_q = jb;

  a_job_ok: assert property (@(posedge clk) disable iff (!rst_n)
    (start && st == IDLE) |-> (job.w_bits != 0 && job.i_bits != 0 && job.out_bits != 0
                               && job.w_bits <= BITS_W'(MAX_BITS) && job.i_bits <= BITS_W'(MAX_BITS)
                               && job.out_bits <= 4'd8));
endmodule
