// bus_fabric: the bus from the sensor to the PNS memory. It gathers a stream
// of elements (binary first-layer activations in processing mode, quantised
// pixels in sensing mode) into a COLS-element row buffer and stores the buffer
// as bit-planes, the layout the bit-wise convolution needs: plane p is the row
// whose column c holds bit p of element c (the paper's C_p(I)), written to row
// base_row+p of the current sub-array.
//
// Interface: 'begin_i' (one clock, while idle) sets the element precision
// 'nbits', 'base_row' and the first sub-array 'sub0' and empties the buffer.
// Elements arrive with in_valid (one per clock, accepted when in_ready). When
// COLS elements are held, or on 'flush' with a partly filled buffer (the rest
// zero), the unit issues nbits OP_WRITE requests, one per clock (w_op, w_sub,
// w_row, w_data), then moves on to the next sub-array. in_ready is low while it
// writes; an element offered then is dropped and counted in 'overruns'
// (a stream that cannot stall, like a sensor row, must leave nbits clocks free
// after every COLS elements). 'busy' is high while planes are being written.
// The paper only says activations are sent "through the bus fabrics to the PIM
// unit for storage"; everything here is this design's choice.
// w_op only ever carries OP_NOP or OP_WRITE, so its lowest bit is constant 0
// after synthesis; the port keeps the full dram_op_e type so that it can be
// muxed directly onto the PNS host port.
module bus_fabric
  import pisa_pkg::*;
#(
  parameter int unsigned COLS = 256,
  parameter int unsigned NSUB = 4096,
  localparam int unsigned SW  = (NSUB > 1) ? $clog2(NSUB) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                begin_i,
  input  logic [BITS_W-1:0]   nbits,
  input  logic [ROW_AW-1:0]   base_row,
  input  logic [SW-1:0]       sub0,
  input  logic                in_valid,
  input  logic [MAX_BITS-1:0] in_data,
  input  logic                flush,
  output logic                in_ready,
  output dram_op_e            w_op,
  output logic [SW-1:0]       w_sub,
  output logic [ROW_AW-1:0]   w_row,
  output logic [COLS-1:0]     w_data,
  output logic                busy,
  output logic [15:0]         overruns
);
  localparam int unsigned CW = $clog2(COLS + 1);

  logic [MAX_BITS-1:0] buf_q [COLS];
  logic [CW-1:0]       cnt;
  logic [BITS_W-1:0]   nb, plane;
  logic [ROW_AW-1:0]   base;
  logic [SW-1:0]       sub;

  assign in_ready = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0; nb <= BITS_W'(1); plane <= '0; base <= '0; sub <= '0;
      busy <= 1'b0; overruns <= '0;
      for (int c = 0; c < COLS; c++) buf_q[c] <= '0;
    end else if (busy) begin
      if (in_valid) overruns <= overruns + 1'b1;
      if (plane + 1'b1 < nb) plane <= plane + 1'b1;
      else begin
        busy  <= 1'b0;
        plane <= '0;
        cnt   <= '0;
        sub   <= sub + 1'b1;
        for (int c = 0; c < COLS; c++) buf_q[c] <= '0;
      end
    end else if (begin_i) begin
      nb <= nbits; base <= base_row; sub <= sub0; cnt <= '0; plane <= '0;
      for (int c = 0; c < COLS; c++) buf_q[c] <= '0;
    end else begin
      if (in_valid) begin
        buf_q[cnt[$clog2(COLS)-1:0]] <= in_data;
        cnt <= cnt + 1'b1;
        if (cnt == CW'(COLS - 1)) busy <= 1'b1;
      end else if (flush && cnt != '0) begin
        busy <= 1'b1;
      end
    end
  end

  always_comb begin
    for (int c = 0; c < COLS; c++) w_data[c] = buf_q[c][plane[4:0]];
    w_op  = busy ? OP_WRITE : OP_NOP;
    w_sub = sub;
    w_row = base + ROW_AW'(plane);
  end

  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> in_ready)
    else $warning("bus_fabric: element dropped while writing bit-planes");
endmodule
