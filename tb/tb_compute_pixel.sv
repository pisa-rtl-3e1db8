// tb_compute_pixel: self-checking test of the compute-pixel model. Programs the
// NVM weights, precharges, exposes with a known photocurrent and checks V_PD on
// the SBL (only while R_i), the signed CBL contributions (only while CR), the
// saturation at 0 and that the weights survive rst_n (non-volatile).
module tb_compute_pixel;
  import pisa_pkg::*;
  localparam int V = 4;
  logic clk = 0, rst_n = 0;
  logic rst_pix = 0, expose = 0, row_sel = 0, cr = 0, w_we = 0, w_val = 0;
  logic [PIX_W-1:0] light = 0;
  logic [1:0] w_idx = 0;
  logic [PIX_W-1:0] sbl, vpd_o;
  logic signed [PIX_W:0] cbl [V];
  int checks = 0, failures = 0;

  compute_pixel #(.V(V)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(input int idx, input logic val);
    @(negedge clk); w_we = 1; w_idx = 2'(idx); w_val = val;
    @(negedge clk); w_we = 0;
  endtask

  localparam logic [3:0] W = 4'b1101;  // weights of add-ons 3..0
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < V; i++) wr(i, W[i]);
    @(negedge clk); rst_pix = 1; @(negedge clk); rst_pix = 0;
    chk(vpd_o == 8'hFF, "precharge to full");
    light = 8'd10; expose = 1;
    repeat (5) @(negedge clk);
    expose = 0;
    chk(vpd_o == 8'd205, $sformatf("vpd after 5x10 = %0d", vpd_o));
    chk(sbl == 0, "sbl idle without R_i");
    for (int i = 0; i < V; i++) chk(cbl[i] == 0, "cbl zero with CR low");
    row_sel = 1; #1; chk(sbl == 8'd205, "sbl shows vpd"); row_sel = 0;
    cr = 1; #1;
    for (int i = 0; i < V; i++)
      chk(cbl[i] == (W[i] ? 205 : -205), $sformatf("cbl[%0d]=%0d", i, cbl[i]));
    cr = 0;
    // reset of the logic keeps the NVM bits
    @(negedge clk); rst_n = 0; @(negedge clk); rst_n = 1;
    cr = 1; #1;
    for (int i = 0; i < V; i++)
      chk(cbl[i] == (W[i] ? 255 : -255), "weights kept through rst_n");
    cr = 0;
    // saturation
    light = 8'd100; expose = 1; repeat (4) @(negedge clk); expose = 0;
    chk(vpd_o == 0, "saturates at 0");
    // rewrite one weight
    wr(0, 1'b0);
    @(negedge clk); rst_pix = 1; @(negedge clk); rst_pix = 0;
    cr = 1; #1; chk(cbl[0] == -255, "weight rewritten");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
