// compute_pixel: behavioural model of one compute pixel (CP) of the PISA focal
// plane. The real cell is analog (3T pixel + photodiode, and v compute add-ons of
// T4/T5 current sources and an NVM-selected 2:1 MUX); this model keeps its
// digital-visible behaviour with V_PD represented by a PIX_W-bit code.
//
// How it works
//  * rst_pix (Rst high, T1 on) precharges the photodiode: vpd = all ones (VDD).
//  * expose (T1 off) discharges vpd by the photocurrent code 'light' every
//    clock, saturating at 0, like V_PD falling under illumination.
//  * row_sel (R_i, access transistor T3) drives vpd onto the sense bit-line
//    'sbl'; otherwise the pixel leaves sbl at 0 so a column can OR its pixels.
//  * cr (ComputeRow) enables the v add-ons. Add-on x sources +vpd onto CBL x
//    when its stored weight is 1 (W=+1, T4) and sinks -vpd when it is 0
//    (W=-1, T5), as in the paper. With cr low every CBL contribution is 0
//    (the paper grounds CR in sensing mode).
//  * The v binary weights model STT-MRAM bits: they are written through
//    w_we/w_idx/w_val and are deliberately not cleared by rst_n (non-volatile).
// Timing: vpd and weights update on the rising clock edge; sbl and cbl are
// combinational from the stored state.
// Own choices: the linear, saturating discharge and the code width.
module compute_pixel
  import pisa_pkg::*;
#(
  parameter int unsigned V = 8          // compute add-ons (= compute bit-lines)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        rst_pix,   // Rst
  input  logic                        expose,    // T1 off, photodiode integrating
  input  logic [PIX_W-1:0]            light,     // photocurrent per clock (code)
  input  logic                        row_sel,   // R_i
  input  logic                        cr,        // CR, compute row
  input  logic                        w_we,      // NVM write strobe
  input  logic [$clog2(V)-1:0]        w_idx,     // which add-on
  input  logic                        w_val,     // 1: W=+1, 0: W=-1
  output logic [PIX_W-1:0]            sbl,       // contribution to the sense bit-line
  output logic signed [PIX_W:0]       cbl [V],   // contribution to each compute bit-line
  output logic [PIX_W-1:0]            vpd_o      // photodiode voltage code (observation)
);
  logic [PIX_W-1:0] vpd;
  logic [V-1:0]     nvm;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        vpd <= '1;
    else if (rst_pix)  vpd <= '1;
    else if (expose)   vpd <= sat_sub(vpd, light);
  end

  // Non-volatile weights: no reset.
  always_ff @(posedge clk) begin
    if (w_we) nvm[w_idx] <= w_val;
  end

  always_comb begin
    sbl = row_sel ? vpd : '0;
    for (int x = 0; x < V; x++) begin
      if (!cr)         cbl[x] = '0;
      else if (nvm[x]) cbl[x] =  $signed({1'b0, vpd});
      else             cbl[x] = -$signed({1'b0, vpd});
    end
  end

  assign vpd_o = vpd;
endmodule
