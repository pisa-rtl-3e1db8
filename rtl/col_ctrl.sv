// col_ctrl: column controller. After a row has been sampled by the sensor I/O
// (CDS values of all N columns available in parallel), a one-clock 'start'
// makes it scan the columns 0..N-1, putting one pixel per clock on pix_out with
// pix_valid high and the column index on col_idx. 'done' pulses with the last
// column. Follows the paper in name only ("column controllers"); the serial
// one-pixel-per-clock readout is this design's choice.
module col_ctrl
  import pisa_pkg::*;
#(
  parameter int unsigned N = 128
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [PIX_W-1:0]     pix [N],
  output logic [PIX_W-1:0]     pix_out,
  output logic                 pix_valid,
  output logic [$clog2(N)-1:0] col_idx,
  output logic                 busy,
  output logic                 done
);
  logic [$clog2(N)-1:0] col;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      col  <= '0;
    end else if (!busy) begin
      if (start) begin
        busy <= 1'b1;
        col  <= '0;
      end
    end else begin
      if (col == $clog2(N)'(N-1)) busy <= 1'b0;
      else                          col  <= col + 1'b1;
    end
  end

  assign pix_out   = pix[col];
  assign pix_valid = busy;
  assign col_idx   = col;
  assign done      = busy && (col == $clog2(N)'(N-1));

  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !start);
endmodule
