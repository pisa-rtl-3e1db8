// tb_cmd_decoder: weight-write decode, frame starts, ready while idle, and the
// error pulse for a command offered while a frame runs.
module tb_cmd_decoder;
  import pisa_pkg::*;
  localparam int M = 8, N = 8, V = 8;
  logic clk = 0, rst_n = 0, cmd_valid = 0, a_val = 0, busy = 0;
  pisa_cmd_e cmd = CMD_NOP;
  logic [2:0] a_row = 0, a_col = 0, a_idx = 0;
  logic cmd_ready, start_process, start_sense, w_we, w_val, err;
  logic [2:0] w_row, w_col, w_idx;
  int checks = 0, failures = 0;

  cmd_decoder #(.M(M), .N(N), .V(V)) dut (.*);
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
    for (int t = 0; t < 6; t++) begin
      cmd_valid = 1; cmd = CMD_WRITE_W;
      a_row = 3'($urandom); a_col = 3'($urandom); a_idx = 3'($urandom); a_val = 1'($urandom);
      chk(cmd_ready, "ready while idle");
      @(negedge clk); cmd_valid = 0;
      chk(w_we && w_row == a_row && w_col == a_col && w_idx == a_idx && w_val == a_val, "weight write");
      chk(!start_process && !start_sense && !err, "no start");
      @(negedge clk); chk(!w_we, "single strobe");
    end
    cmd_valid = 1; cmd = CMD_PROCESS; @(negedge clk); cmd_valid = 0;
    chk(start_process && !start_sense && !w_we, "process start");
    chk(!cmd_ready, "not ready while start pending");
    busy = 1; @(negedge clk); chk(!start_process, "single start");
    cmd_valid = 1; cmd = CMD_SENSE; @(negedge clk); cmd_valid = 0;
    chk(err && !start_sense, "rejected while busy");
    busy = 0; @(negedge clk); chk(cmd_ready, "ready again");
    cmd_valid = 1; cmd = CMD_SENSE; @(negedge clk); cmd_valid = 0;
    chk(start_sense && !start_process, "sense start");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
