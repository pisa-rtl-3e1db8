// tb_row_ctrl: checks the row wires in both modes: one-hot R_i and per-row Rst
// with CR grounded in sensing mode; all R_i off, CR on request and global Rst
// in processing mode; outputs one clock after the request.
module tb_row_ctrl;
  import pisa_pkg::*;
  localparam int M = 8;
  logic clk = 0, rst_n = 0;
  pisa_mode_e mode = MODE_SENSE;
  logic rst_req = 0, row_en = 0, cr_en = 0;
  logic [2:0] row_addr = 0;
  logic [M-1:0] row_sel, rst_row;
  logic cr;
  int checks = 0, failures = 0;

  row_ctrl #(.M(M)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input logic ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < M; r++) begin
      mode = MODE_SENSE; row_addr = 3'(r); row_en = 1; cr_en = 1; rst_req = 0;
      @(negedge clk);
      chk(row_sel == M'(1 << r), "one-hot R_i");
      chk(cr == 0, "CR grounded in sensing mode");
      chk(rst_row == 0, "no reset");
      row_en = 0; rst_req = 1; @(negedge clk);
      chk(row_sel == 0, "R_i released");
      chk(rst_row == M'(1 << r), "row reset only");
      rst_req = 0;
    end
    mode = MODE_PROCESS; row_en = 1; cr_en = 1; rst_req = 1; @(negedge clk);
    chk(row_sel == 0, "R_i off in processing mode");
    chk(cr == 1, "CR on");
    chk(rst_row == '1, "global reset");
    rst_req = 0; cr_en = 0; @(negedge clk);
    chk(cr == 0 && rst_row == 0, "released");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
