// dpu: the digital processing unit shared by the whole PNS array.
//
//  * Quantiser (pre-processing, combinational): reduces a PIX_W-bit pixel code
//    to q_bits bits by keeping its q_bits most significant bits
//    (q_out = q_in >> (PIX_W - q_bits)); for q_bits >= PIX_W the code passes
//    unchanged. This is how raw sensing-mode pixels become M-bit inputs.
//  * Bit-counter, shifter and adder (registered): with acc_en, accumulator
//    acc_sel gains bitcount(row) << shift, i.e. one term
//    2^(m+n) * bitcount(AND(C_n(W), C_m(I))) of the bit-wise convolution.
//    acc_clr zeroes every accumulator. There is one accumulator per sub-array
//    because all sub-arrays compute in lock-step and the DPU serves them in turn.
//  * Batch normalisation and activation (combinational, on accumulator out_sel):
//    y = (acc * bn_scale + bn_bias) >>> bn_shift (arithmetic), then
//    ACT_SIGN: act_out = (y > 0), or ACT_QREL: act_out = clamp(y, 0, 2^out_bits-1).
// Follows the paper: quantisation before, bit-counter -> shifter -> adder, and
// "linear batch normalization and activation" after. Own choices: the MSB
// quantiser, the BN arithmetic and widths, and the two activation functions.
module dpu
  import pisa_pkg::*;
#(
  parameter int unsigned COLS  = 256,
  parameter int unsigned NACC  = 4096,
  parameter int unsigned ACC_W = 48,
  localparam int unsigned AW   = (NACC > 1) ? $clog2(NACC) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // quantiser
  input  logic [PIX_W-1:0]     q_in,
  input  logic [BITS_W-1:0]    q_bits,
  output logic [MAX_BITS-1:0]  q_out,
  // bit-count / shift / accumulate
  input  logic [COLS-1:0]      row,
  input  logic [6:0]           shift,
  input  logic [AW-1:0]        acc_sel,
  input  logic                 acc_en,
  input  logic                 acc_clr,
  // batch-norm / activation
  input  logic [AW-1:0]        out_sel,
  input  logic signed [15:0]   bn_scale,
  input  logic signed [31:0]   bn_bias,
  input  logic [5:0]           bn_shift,
  input  act_mode_e            act,
  input  logic [3:0]           out_bits,
  output logic [ACC_W-1:0]     acc_out,
  output logic [7:0]           act_out
);
  localparam int unsigned CW = $clog2(COLS + 1);

  logic [CW-1:0]    cnt;
  logic [ACC_W-1:0] acc [NACC];

  // Quantiser
  always_comb begin
    if (q_bits >= BITS_W'(PIX_W)) q_out = MAX_BITS'(q_in);
    else                          q_out = MAX_BITS'(q_in >> (BITS_W'(PIX_W) - q_bits));
  end

  bit_counter #(.COLS(COLS)) u_bc (.row(row), .count(cnt));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NACC; i++) acc[i] <= '0;
    end else if (acc_clr) begin
      for (int i = 0; i < NACC; i++) acc[i] <= '0;
    end else if (acc_en) begin
      acc[acc_sel] <= acc[acc_sel] + (ACC_W'(cnt) << shift);
    end
  end

  // Batch normalisation and activation
  logic signed [ACC_W+16:0] y;
  logic [7:0]               qmax;
  always_comb begin
    acc_out = acc[out_sel];
    y = ($signed({1'b0, acc_out}) * bn_scale + (ACC_W+17)'(bn_bias)) >>> bn_shift;
    qmax = 8'((9'd1 << out_bits) - 9'd1);
    if (act == ACT_SIGN)      act_out = {7'd0, (y > 0)};
    else if (y <= 0)          act_out = '0;
    else if (y >= (ACC_W+17)'(qmax)) act_out = qmax;
    else                      act_out = 8'(y);
  end

  a_one_op: assert property (@(posedge clk) disable iff (!rst_n) !(acc_en && acc_clr));
endmodule
