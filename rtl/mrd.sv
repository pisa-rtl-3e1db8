// mrd: modified row decoder for the compute rows of a DRAM sub-array. Unlike a
// regular row decoder it can raise two word-lines in the same cycle, which the
// dual-row activation (DRA) needs: with 'dual' high both addr_a and addr_b are
// activated, otherwise only addr_a. Addresses are offsets inside the compute
// region (0..CROWS-1). Combinational.
// Follows the paper: 12 compute rows on a decoder that enables two-row
// activation. Own choice: the address interface.
module mrd #(
  parameter int unsigned CROWS = 12,
  localparam int unsigned AW   = $clog2(CROWS)
) (
  input  logic             en,
  input  logic             dual,
  input  logic [AW-1:0]    addr_a,
  input  logic [AW-1:0]    addr_b,
  output logic [CROWS-1:0] wl
);
  always_comb begin
    wl = '0;
    if (en) begin
      for (int r = 0; r < CROWS; r++) begin
        if (addr_a == AW'(r))         wl[r] = 1'b1;
        if (dual && addr_b == AW'(r)) wl[r] = 1'b1;
      end
    end
  end
endmodule
