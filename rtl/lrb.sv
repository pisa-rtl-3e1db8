// lrb: local row buffer shared by a pair of sub-arrays (A and B). It captures
// the sense-amplifier row of either sub-array (load_a / load_b, one clock) and
// presents it on 'q', from where the DPU reads it and from where it can be
// written into either sub-array (inter-sub-array move). Loading both at once
// is illegal (asserted). The paper names the buffer and its sharing; the
// load interface is this design's choice.
module lrb #(
  parameter int unsigned COLS = 256
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            load_a,
  input  logic            load_b,
  input  logic [COLS-1:0] din_a,
  input  logic [COLS-1:0] din_b,
  output logic [COLS-1:0] q
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      q <= '0;
    else if (load_a) q <= din_a;
    else if (load_b) q <= din_b;
  end

  a_one_src: assert property (@(posedge clk) disable iff (!rst_n) !(load_a && load_b));
endmodule
