// tb_cbl_sense_amp: checks that the sense amplifier decides only at the
// precharge->sense transition of sa_clk, gives 1 for isum > iref and 0
// otherwise (including the tie), holds its output and pulses valid once. Uses
// the currents printed in the paper's transient figure (32, -95, -37, -29, 39,
// -126 uA) as codes.
module tb_cbl_sense_amp;
  localparam int SUM_W = 12;
  logic clk = 0, rst_n = 0, sa_clk = 1;
  logic signed [SUM_W-1:0] isum = 0, iref = 0;
  logic out, valid;
  int checks = 0, failures = 0, nvalid = 0;

  cbl_sense_amp #(.SUM_W(SUM_W)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (valid) nvalid++;
  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input logic ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int cur [6] = '{32, -95, -37, -29, 39, -126};
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    foreach (cur[k]) begin
      isum = SUM_W'(cur[k]);
      repeat (3) @(negedge clk);
      nvalid = 0;
      sa_clk = 0; @(negedge clk); sa_clk = 1;
      chk(valid == 1, "valid after falling edge");
      chk(out == (cur[k] > 0), $sformatf("sign of %0d -> %0b", cur[k], out));
      // input changes while precharging do not change the held output
      isum = -isum; repeat (3) @(negedge clk);
      chk(out == (cur[k] > 0), "held during precharge");
      chk(nvalid == 1, "exactly one valid per sense phase");
    end
    // tie and reference
    isum = 0; iref = 0; sa_clk = 0; @(negedge clk); sa_clk = 1; chk(out == 0, "tie gives 0"); @(negedge clk);
    isum = 10; iref = 20; sa_clk = 0; @(negedge clk); sa_clk = 1; chk(out == 0, "below reference"); @(negedge clk);
    isum = 21; sa_clk = 0; @(negedge clk); sa_clk = 1; chk(out == 1, "above reference");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
