// cbl_sense_amp: behavioural model of the StrongARM-latch sense amplifier on a
// compute bit-line (CBL). It realises the in-sensor sign activation of the
// first BWNN layer.
//
// How it works: the paper's SA has two clock phases, precharge while its clock
// is high and sensing while it is low. Here the sense clock 'sa_clk' is a
// signal sampled by the system clock; the cycle in which it is seen low after
// being high is the sensing (falling-edge) event. Then the summed CBL current
// 'isum' is compared with the reference 'iref' (the paper's R_pro reference):
// out = 1 when isum > iref, else 0, matching "when I_CBL is positive ... the
// sign function results in 1 and vice-versa" for iref = 0. The decision is held
// until the next sensing event; 'valid' pulses for one clock with it.
// Own choices: the digital current code, strict '>' for the tie, and the
// output register behaviour.
module cbl_sense_amp #(
  parameter int unsigned SUM_W = 24
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    sa_clk,  // 1: precharge, 0: sense
  input  logic signed [SUM_W-1:0] isum,    // summed CBL current (code)
  input  logic signed [SUM_W-1:0] iref,    // reference current (code)
  output logic                    out,     // binary activation
  output logic                    valid    // one-clock strobe with a new decision
);
  logic sa_clk_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sa_clk_q <= 1'b1;
      out      <= 1'b0;
      valid    <= 1'b0;
    end else begin
      sa_clk_q <= sa_clk;
      valid    <= 1'b0;
      if (sa_clk_q && !sa_clk) begin
        out   <= (isum > iref);
        valid <= 1'b1;
      end
    end
  end
endmodule
