// bit_counter: the DPU's bit-counter. It returns the number of ones in a
// COLS-bit result row (the bitcount of AND(C_n(W), C_m(I))). Combinational,
// written as a plain sum; a synthesis tool builds the adder tree.
module bit_counter #(
  parameter int unsigned COLS = 256,
  localparam int unsigned CW  = $clog2(COLS + 1)
) (
  input  logic [COLS-1:0] row,
  output logic [CW-1:0]   count
);
  always_comb begin
    count = '0;
    for (int c = 0; c < COLS; c++) count += CW'(row[c]);
  end
endmodule
