// tb_recon_sa: the reconfigurable sense amplifier against the charge-sharing
// truth table: DRA gives NAND2 on the inverter and writes AND2 back (the
// paper's transient results: 00 -> 1, 10 -> 1, 11 -> 0 on NAND2), memory mode
// reads the single cell, and nothing is driven when disabled.
module tb_recon_sa;
  localparam int COLS = 64;
  logic en_m, en_l, en_a, dual;
  logic [COLS-1:0] cell_a, cell_b, bl_o, nand_o;
  int checks = 0, failures = 0;
  recon_sa #(.COLS(COLS)) dut (.*);
  task automatic chk(input logic ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    // the three combinations of the paper's figure on columns 0..2, plus 01
    cell_a = '0; cell_b = '0;
    cell_a[1] = 1; cell_a[2] = 1; cell_b[2] = 1; cell_b[3] = 1;
    en_m = 0; en_l = 1; en_a = 1; dual = 1; #1;
    chk(nand_o[3:0] == 4'b1011, "NAND2 of 00,10,11,01");
    chk(bl_o[3:0] == 4'b0100, "AND2 written back");
    for (int t = 0; t < 20; t++) begin
      cell_a = {$urandom, $urandom}; cell_b = {$urandom, $urandom};
      en_m = 0; en_l = 1; en_a = 1; dual = 1; #1;
      chk(nand_o == ~(cell_a & cell_b), "NAND2");
      chk(bl_o == (cell_a & cell_b), "AND2");
      en_l = 0; en_a = 0; en_m = 1; dual = 0; #1;
      chk(bl_o == cell_a, "single-row read");
      en_m = 0; #1;
      chk(bl_o == '0 && nand_o == '0, "disabled");
      en_l = 1; en_a = 0; #1;
      chk(bl_o == '0, "logic needs both En_L and En_A");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
