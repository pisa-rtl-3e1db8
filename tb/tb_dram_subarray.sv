// tb_dram_subarray: a full-size sub-array (512 x 256) against a reference
// array in the testbench: row writes and reads, single-bit writes, copies into
// compute rows, and DRA (AND2 written into both compute rows and latched,
// NAND2 latched), with the source data rows left untouched.
module tb_dram_subarray;
  import pisa_pkg::*;
  localparam int ROWS = 512, DROWS = 500, COLS = 256;
  logic clk = 0, rst_n = 0;
  dram_op_e op = OP_NOP;
  logic [8:0] row_a = 0, row_b = 0;
  logic [7:0] col = 0;
  logic [COLS-1:0] wdata = 0, rdata, rnand;
  logic wbit = 0;
  logic [COLS-1:0] ref_m [ROWS];
  int checks = 0, failures = 0, ndra = 0;

  dram_subarray #(.ROWS(ROWS), .DROWS(DROWS), .COLS(COLS)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input logic ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic logic [COLS-1:0] rnd();
    return {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
  endfunction
  task automatic do_op(input dram_op_e o, input int a, input int b);
    op = o; row_a = 9'(a); row_b = 9'(b); @(negedge clk); op = OP_NOP;
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      ref_m[r] = rnd(); wdata = ref_m[r]; do_op(OP_WRITE, r, 0);
    end
    for (int t = 0; t < 200; t++) begin
      automatic int a = $urandom_range(0, DROWS - 1);
      automatic int b = $urandom_range(0, DROWS - 1);
      automatic int x1 = DROWS + $urandom_range(0, 11);
      automatic int x2 = DROWS + $urandom_range(0, 11);
      if (x1 == x2) x2 = (x1 == ROWS - 1) ? DROWS : x1 + 1;
      case ($urandom_range(0, 3))
        0: begin do_op(OP_READ, a, 0); chk(rdata == ref_m[a], "read"); end
        1: begin
          col = 8'($urandom); wbit = 1'($urandom);
          do_op(OP_WBIT, a, 0); ref_m[a][col] = wbit;
          do_op(OP_READ, a, 0); chk(rdata == ref_m[a], "bit write");
        end
        default: begin
          do_op(OP_COPY, a, x1); ref_m[x1] = ref_m[a]; chk(rdata == ref_m[a], "copy latch");
          do_op(OP_COPY, b, x2); ref_m[x2] = ref_m[b];
          do_op(OP_DRA, x1, x2); ndra++;
          chk(rdata == (ref_m[a] & ref_m[b]), "DRA AND2");
          chk(rnand == ~(ref_m[a] & ref_m[b]), "DRA NAND2");
          ref_m[x1] = ref_m[a] & ref_m[b]; ref_m[x2] = ref_m[x1];
          do_op(OP_READ, x1, 0); chk(rdata == ref_m[x1], "x1 written back");
          do_op(OP_READ, x2, 0); chk(rdata == ref_m[x2], "x2 written back");
          do_op(OP_READ, a, 0);  chk(rdata == ref_m[a], "operand a intact");
          do_op(OP_READ, b, 0);  chk(rdata == ref_m[b], "operand b intact");
        end
      endcase
    end
    for (int r = 0; r < ROWS; r++) begin do_op(OP_READ, r, 0); chk(rdata == ref_m[r], "final sweep"); end
    chk(ndra > 0, "DRA exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
