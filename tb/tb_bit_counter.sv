// tb_bit_counter: popcount of all-zero, all-one, one-hot and random rows.
module tb_bit_counter;
  localparam int COLS = 256;
  logic [COLS-1:0] row;
  logic [8:0] count;
  int checks = 0, failures = 0;
  bit_counter #(.COLS(COLS)) dut (.*);
  task automatic chk(input logic ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    row = '0; #1; chk(count == 0, "zero");
    row = '1; #1; chk(count == 256, "all ones");
    for (int i = 0; i < COLS; i += 17) begin row = '0; row[i] = 1; #1; chk(count == 1, "one-hot"); end
    for (int t = 0; t < 100; t++) begin
      automatic int e = 0;
      for (int i = 0; i < COLS; i++) begin row[i] = ($urandom_range(0, 99) < t); e += row[i]; end
      #1; chk(count == 9'(e), $sformatf("random %0d exp %0d", count, e));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
