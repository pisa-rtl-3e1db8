// tb_sensor_io: correlated double sampling. Samples V1 with k1 and V2 with k2
// on every column and checks the output V1 - V2, its saturation, and that a
// column's capacitors hold while k1/k2 are low.
module tb_sensor_io;
  import pisa_pkg::*;
  localparam int N = 6;
  logic clk = 0, rst_n = 0, k1 = 0, k2 = 0;
  logic [PIX_W-1:0] sbl [N], pix [N];
  int checks = 0, failures = 0;
  int v1 [N], v2 [N];

  sensor_io #(.N(N)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input logic ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    foreach (sbl[c]) sbl[c] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 5; t++) begin
      foreach (v1[c]) begin v1[c] = $urandom_range(0, 255); v2[c] = $urandom_range(0, 255); end
      foreach (sbl[c]) sbl[c] = 8'(v1[c]);
      k1 = 1; @(negedge clk); k1 = 0;
      foreach (sbl[c]) sbl[c] = 8'($urandom);     // bus moves on, C1 holds
      @(negedge clk);
      foreach (sbl[c]) sbl[c] = 8'(v2[c]);
      k2 = 1; @(negedge clk); k2 = 0;
      foreach (sbl[c]) sbl[c] = 8'($urandom);
      @(negedge clk);
      foreach (pix[c])
        chk(pix[c] == ((v1[c] > v2[c]) ? 8'(v1[c] - v2[c]) : 8'd0),
            $sformatf("col %0d: %0d - %0d -> %0d", c, v1[c], v2[c], pix[c]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
