// recon_sa: behavioural model of the reconfigurable DRAM sense amplifiers of one
// sub-array row (COLS columns): a regular DRAM SA plus one add-on inverter with
// a high switching voltage (V_s = 3/4 VDD), controlled by En_M, En_L and En_A.
//
// How it works: the bit-line voltage after charge sharing is
// V_i = n * VDD / C, where n is the number of activated cells holding 1 and C
// the number of activated cells (1 for a normal access, 2 for DRA). It is
// computed here in quarter-VDD units (q = 4n/C).
//  * Memory mode (en_m): the regular SA resolves V_i against VDD/2; the result
//    is latched and restored into the cell (read / copy).
//  * Logic mode (en_l and en_a): the high-V_s inverter outputs 1 unless
//    V_i > 3/4 VDD, i.e. NAND2 of the two cells ('nand_o'); its inverse, AND2,
//    is what the SA drives back on the bit-line and so writes into both
//    activated cells ('bl_o'), as in the transient results of the paper
//    (cells 00/10 -> 0, 11 -> 1, NAND2 = 1/1/0).
// With neither mode enabled both outputs are 0. Combinational.
// Follows the paper: V_i = n.VDD/C, the 3/4 VDD threshold, NAND2 out, AND2
// written back. Own choice: which enable selects which path (En_M memory,
// En_L and En_A together logic); the paper gives the names only.
module recon_sa #(
  parameter int unsigned COLS = 256
) (
  input  logic            en_m,
  input  logic            en_l,
  input  logic            en_a,
  input  logic            dual,            // two cells share each bit-line
  input  logic [COLS-1:0] cell_a,
  input  logic [COLS-1:0] cell_b,
  output logic [COLS-1:0] bl_o,            // resolved bit-line, written back
  output logic [COLS-1:0] nand_o           // add-on inverter output
);
  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      logic [2:0] q;   // bit-line voltage in units of VDD/4
      if (dual) q = 3'(2 * (int'(cell_a[c]) + int'(cell_b[c])));
      else      q = 3'(4 * int'(cell_a[c]));
      bl_o[c]   = 1'b0;
      nand_o[c] = 1'b0;
      if (en_l && en_a) begin
        nand_o[c] = !(q > 3'd3);
        bl_o[c]   = !nand_o[c];
      end else if (en_m) begin
        bl_o[c]   = (q > 3'd2);
        nand_o[c] = !bl_o[c];
      end
    end
  end
endmodule
