// tb_dpu: the DPU's three functions. Quantiser: MSB truncation to q_bits.
// Bit-count/shift/accumulate: random rows and shifts into random accumulators
// against a reference, including the paper's example (count 1 shifted by
// 2+1 gives 8). Batch norm and both activations against a reference.
module tb_dpu;
  import pisa_pkg::*;
  localparam int COLS = 64, NACC = 4, ACC_W = 48;
  logic clk = 0, rst_n = 0;
  logic [PIX_W-1:0] q_in = 0;
  logic [BITS_W-1:0] q_bits = 1;
  logic [MAX_BITS-1:0] q_out;
  logic [COLS-1:0] row = 0;
  logic [6:0] shift = 0;
  logic [1:0] acc_sel = 0, out_sel = 0;
  logic acc_en = 0, acc_clr = 0;
  logic signed [15:0] bn_scale = 1;
  logic signed [31:0] bn_bias = 0;
  logic [5:0] bn_shift = 0;
  act_mode_e act = ACT_SIGN;
  logic [3:0] out_bits = 1;
  logic [ACC_W-1:0] acc_out;
  logic [7:0] act_out;
  longint ref_acc [NACC];
  int checks = 0, failures = 0;

  dpu #(.COLS(COLS), .NACC(NACC), .ACC_W(ACC_W)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input logic ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    // quantiser
    for (int t = 0; t < 40; t++) begin
      q_in = 8'($urandom); q_bits = 6'($urandom_range(1, 10)); #1;
      chk(q_out == ((q_bits >= 8) ? 32'(q_in) : 32'(q_in >> (8 - q_bits))), "quantise");
    end
    // paper example
    acc_clr = 1; @(negedge clk); acc_clr = 0;
    row = 64'b1; shift = 7'd3; acc_sel = 0; acc_en = 1; @(negedge clk); acc_en = 0;
    out_sel = 0; #1; chk(acc_out == 8, "0001 << (2+1) = 1000");
    // random accumulation
    acc_clr = 1; @(negedge clk); acc_clr = 0;
    foreach (ref_acc[i]) ref_acc[i] = 0;
    for (int t = 0; t < 200; t++) begin
      row = {$urandom, $urandom}; shift = 7'($urandom_range(0, 40)); acc_sel = 2'($urandom);
      acc_en = 1; @(negedge clk); acc_en = 0;
      ref_acc[acc_sel] += longint'($countones(row)) << shift;
    end
    for (int i = 0; i < NACC; i++) begin
      out_sel = 2'(i); #1; chk(acc_out == ACC_W'(ref_acc[i]), $sformatf("acc %0d", i));
    end
    // batch norm + activation on small accumulators
    for (int t = 0; t < 200; t++) begin
      automatic longint y;
      automatic int e;
      acc_clr = 1; @(negedge clk); acc_clr = 0;
      row = {$urandom, $urandom}; shift = 7'($urandom_range(0, 3)); acc_sel = 1;
      acc_en = 1; @(negedge clk); acc_en = 0;
      out_sel = 1;
      bn_scale = 16'($urandom_range(0, 40) - 20); bn_bias = 32'($urandom_range(0, 4000) - 2000);
      bn_shift = 6'($urandom_range(0, 4)); out_bits = 4'($urandom_range(1, 8));
      act = act_mode_e'($urandom_range(0, 1)); #1;
      y = (longint'($countones(row)) << shift) * longint'(bn_scale) + longint'(bn_bias);
      y = y >>> bn_shift;
      if (act == ACT_SIGN) e = (y > 0);
      else e = (y <= 0) ? 0 : ((y >= (1 << out_bits) - 1) ? (1 << out_bits) - 1 : int'(y));
      chk(act_out == 8'(e), $sformatf("act %0d exp %0d (y=%0d)", act_out, e, y));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
