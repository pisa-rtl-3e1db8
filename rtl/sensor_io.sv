// sensor_io: behavioural model of the column read circuits of the sensor I/O,
// one per column, performing correlated double sampling (CDS).
//
// How it works: with the row's access transistor on, closing switch k1 samples
// the sense bit-line onto C1 (V1, the level just after reset); after exposure,
// closing k2 samples it onto C2 (V2). The amplifier output is V1 - V2, which is
// proportional to the voltage drop of the photodiode and hence to the light.
// Here capacitors are registers loaded on the rising clock edge while k1 / k2
// are high, and the amplifier is a saturating subtraction (combinational).
// Follows the paper: k1/C1, k2/C2 and the V1-V2 difference. Own choice: digital
// codes in place of voltages and saturation at 0.
module sensor_io
  import pisa_pkg::*;
#(
  parameter int unsigned N = 128          // columns
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             k1,
  input  logic             k2,
  input  logic [PIX_W-1:0] sbl  [N],
  output logic [PIX_W-1:0] pix  [N]       // V1 - V2 per column
);
  logic [PIX_W-1:0] c1 [N];
  logic [PIX_W-1:0] c2 [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < N; c++) begin
        c1[c] <= '0;
        c2[c] <= '0;
      end
    end else begin
      for (int c = 0; c < N; c++) begin
        if (k1) c1[c] <= sbl[c];
        if (k2) c2[c] <= sbl[c];
      end
    end
  end

  always_comb
    for (int c = 0; c < N; c++) pix[c] = sat_sub(c1[c], c2[c]);

  // The two samples are taken at different times.
  a_k_exclusive: assert property (@(posedge clk) disable iff (!rst_n) !(k1 && k2));
endmodule
