// tb_lrb: the local row buffer loads from either of its two sub-arrays and
// holds its value otherwise.
module tb_lrb;
  localparam int COLS = 64;
  logic clk = 0, rst_n = 0, load_a = 0, load_b = 0;
  logic [COLS-1:0] din_a = 0, din_b = 0, q, exp_q;
  int checks = 0, failures = 0;
  lrb #(.COLS(COLS)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input logic ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (2) @(negedge clk); rst_n = 1; exp_q = '0;
    for (int t = 0; t < 50; t++) begin
      automatic int k = $urandom_range(0, 2);
      din_a = {$urandom, $urandom}; din_b = {$urandom, $urandom};
      load_a = (k == 0); load_b = (k == 1);
      if (k == 0) exp_q = din_a; else if (k == 1) exp_q = din_b;
      @(negedge clk); load_a = 0; load_b = 0;
      chk(q == exp_q, $sformatf("step %0d kind %0d", t, k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
