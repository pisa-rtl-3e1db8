// tb_mrd: exhaustive check of the modified row decoder: single activation
// raises exactly addr_a, dual activation raises addr_a and addr_b, disabled
// raises nothing.
module tb_mrd;
  localparam int CROWS = 12;
  logic en, dual;
  logic [3:0] addr_a, addr_b;
  logic [CROWS-1:0] wl;
  int checks = 0, failures = 0;
  mrd #(.CROWS(CROWS)) dut (.*);
  task automatic chk(input logic ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    for (int a = 0; a < CROWS; a++) for (int b = 0; b < CROWS; b++) begin
      logic [CROWS-1:0] e;
      en = 1; dual = 0; addr_a = 4'(a); addr_b = 4'(b); #1;
      chk(wl == CROWS'(1 << a), "single");
      dual = 1; #1;
      e = CROWS'(1 << a) | CROWS'(1 << b);
      chk(wl == e, $sformatf("dual %0d %0d", a, b));
      chk($countones(wl) == ((a == b) ? 1 : 2), "two word-lines");
      en = 0; #1; chk(wl == 0, "disabled");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
