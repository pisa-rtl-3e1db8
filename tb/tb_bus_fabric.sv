// tb_bus_fabric: streams 40 random 3-bit elements through a 16-column bus,
// flushes, and rebuilds the elements from the issued row writes: each group
// of 16 must appear as three bit-planes at rows base..base+2 of consecutive
// sub-arrays, the last group zero-padded. Then checks that an element offered
// while planes are being written is counted as an overrun, and that a 1-bit
// stream (activations) needs one write per group.
module tb_bus_fabric;
  import pisa_pkg::*;
  localparam int COLS = 16, NSUB = 8;
  logic clk = 0, rst_n = 0, begin_i = 0, in_valid = 0, flush = 0;
  logic [BITS_W-1:0] nbits = 3;
  logic [ROW_AW-1:0] base_row = 0;
  logic [2:0] sub0 = 0;
  logic [MAX_BITS-1:0] in_data = 0;
  logic in_ready, busy;
  dram_op_e w_op;
  logic [2:0] w_sub;
  logic [ROW_AW-1:0] w_row;
  logic [COLS-1:0] w_data;
  logic [15:0] overruns;
  int checks = 0, failures = 0, nwrites = 0;
  logic [COLS-1:0] mem [NSUB][512];

  bus_fabric #(.COLS(COLS), .NSUB(NSUB)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && w_op == OP_WRITE) begin mem[w_sub][w_row] <= w_data; nwrites++; end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input logic ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int elems [48];
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    nbits = 3; base_row = 9'd77; sub0 = 3'd2;
    begin_i = 1; @(negedge clk); begin_i = 0;
    for (int k = 0; k < 40; k++) begin
      while (!in_ready) @(negedge clk);
      elems[k] = $urandom_range(0, 7);
      in_valid = 1; in_data = 32'(elems[k]); @(negedge clk); in_valid = 0;
    end
    for (int k = 40; k < 48; k++) elems[k] = 0;
    while (busy) @(negedge clk);
    flush = 1; @(negedge clk); flush = 0;
    while (busy) @(negedge clk);
    @(negedge clk);
    chk(nwrites == 9, $sformatf("%0d plane writes", nwrites));
    for (int g = 0; g < 3; g++)
      for (int c = 0; c < COLS; c++) begin
        automatic int v = 0;
        for (int p = 0; p < 3; p++) v |= int'(mem[2 + g][77 + p][c]) << p;
        chk(v == elems[g * COLS + c], $sformatf("group %0d col %0d", g, c));
      end
    chk(overruns == 0, "no overruns");
    // overrun: keep streaming while the buffer drains
    nbits = 1; base_row = 9'd5; sub0 = 3'd0; nwrites = 0;
    begin_i = 1; @(negedge clk); begin_i = 0;
    for (int k = 0; k < COLS + 1; k++) begin in_valid = 1; in_data = 32'(k & 1); @(negedge clk); end
    in_valid = 0;
    @(negedge clk);
    chk(overruns == 1, $sformatf("overruns %0d", overruns));
    chk(nwrites == 1 && mem[0][5] == 16'hAAAA, "1-bit plane");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
