// tb_col_ctrl: starts a column scan and checks that every column's value comes
// out once, in order, one per clock, that done marks the last one and that the
// scan takes exactly N clocks.
module tb_col_ctrl;
  import pisa_pkg::*;
  localparam int N = 10;
  logic clk = 0, rst_n = 0, start = 0;
  logic [PIX_W-1:0] pix [N], pix_out;
  logic pix_valid, busy, done;
  logic [3:0] col_idx;
  int checks = 0, failures = 0;

  col_ctrl #(.N(N)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input logic ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    foreach (pix[c]) pix[c] = 8'($urandom);
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 3; t++) begin
      automatic int k = 0, cyc = 0;
      foreach (pix[c]) pix[c] = 8'($urandom);
      chk(!pix_valid, "idle");
      start = 1; @(negedge clk); start = 0;
      while (pix_valid) begin
        chk(col_idx == 4'(k) && pix_out == pix[k], $sformatf("column %0d", k));
        chk(done == (k == N - 1), "done on last");
        k++; cyc++;
        @(negedge clk);
      end
      chk(cyc == N, $sformatf("scan length %0d", cyc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
