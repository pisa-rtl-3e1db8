// tb_sensor_timing_ctrl: runs one processing frame and one sensing frame and
// checks the frame lengths (EXP+4 and M*(EXP+7+N) clocks with an ideal
// column controller), the exposure length, the single SA sensing clock, that
// CR is never requested in sensing mode, and the k1 -> exposure -> k2 order
// for every row.
module tb_sensor_timing_ctrl;
  import pisa_pkg::*;
  localparam int M = 4, EXP = 5, N = 3;
  logic clk = 0, rst_n = 0, start_process = 0, start_sense = 0, col_done;
  pisa_mode_e mode;
  logic rst_req, row_en, cr_en, expose, sa_clk, k1, k2, col_start, busy, done;
  logic [1:0] row_addr;
  int checks = 0, failures = 0;
  int colcnt = 0;

  sensor_timing_ctrl #(.M(M), .EXP(EXP)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (4000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input logic ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ideal column controller: N clocks after col_start
  always_ff @(posedge clk) begin
    if (col_start) colcnt <= N;
    else if (colcnt > 0) colcnt <= colcnt - 1;
  end
  assign col_done = (colcnt == 1);

  initial begin
    int cyc, nexp, nsense, nk1, nk2, ncr, state;
    repeat (2) @(negedge clk); rst_n = 1;
    // processing frame
    start_process = 1; @(negedge clk); start_process = 0;
    cyc = 1; nexp = 0; nsense = 0; ncr = 0;
    while (!done) begin
      if (expose) nexp++;
      if (!sa_clk) nsense++;
      if (cr_en) ncr++;
      chk(!row_en && !k1 && !k2, "no row access in processing mode");
      @(negedge clk); cyc++;
    end
    chk(mode == MODE_PROCESS, "process mode");
    chk(cyc == EXP + 4, $sformatf("processing frame %0d clocks", cyc));
    chk(nexp == EXP, "exposure length");
    chk(nsense == 1, "one sensing phase");
    chk(ncr == EXP + 1, "CR through exposure and sensing");
    @(negedge clk);
    // sensing frame
    start_sense = 1; @(negedge clk); start_sense = 0;
    cyc = 1; nk1 = 0; nk2 = 0; state = 0;
    while (!done) begin
      chk(!cr_en && sa_clk, "no compute in sensing mode");
      if (k1) begin chk(state == 0 && row_en, "k1 first, with row access"); state = 1; nexp = 0; nk1++; end
      if (expose) begin chk(state == 1, "exposure after k1"); nexp++; end
      if (k2) begin chk(state == 1 && nexp == EXP && row_en, "k2 after full exposure"); state = 0; nk2++; end
      @(negedge clk); cyc++;
    end
    chk(mode == MODE_SENSE, "sense mode");
    chk(nk1 == M && nk2 == M, "one CDS pair per row");
    chk(cyc == M * (EXP + 7 + N), $sformatf("sensing frame %0d clocks", cyc));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
