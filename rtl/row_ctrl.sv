// row_ctrl: row controller of the PISA array. It turns the timing controller's
// requests into the array's row wires:
//   R_i  (row_sel) - one-hot row access for rolling-shutter sensing,
//   CR   (cr)      - the single ComputeRow wire that enables every pixel's
//                    compute add-ons in processing mode,
//   Rst  (rst_row) - per-row photodiode reset.
// Mode rules from the paper: in sensing mode CR is grounded and rows are
// accessed one at a time; in processing mode the R_i are deactivated and CR is
// active for the whole array (global shutter), and all rows reset together.
// Timing: outputs are registered (one clock after the request).
// Own choices: the request interface and the one-clock registration.
module row_ctrl
  import pisa_pkg::*;
#(
  parameter int unsigned M = 128
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  pisa_mode_e           mode,
  input  logic                 rst_req,   // reset the addressed row (sense) / all rows (process)
  input  logic                 row_en,    // access the addressed row (sense mode only)
  input  logic [$clog2(M)-1:0] row_addr,
  input  logic                 cr_en,     // compute request (process mode only)
  output logic [M-1:0]         row_sel,
  output logic                 cr,
  output logic [M-1:0]         rst_row
);
  logic [M-1:0] onehot;
  always_comb begin
    onehot = '0;
    onehot[row_addr] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row_sel <= '0;
      cr      <= 1'b0;
      rst_row <= '0;
    end else if (mode == MODE_PROCESS) begin
      row_sel <= '0;
      cr      <= cr_en;
      rst_row <= rst_req ? '1 : '0;
    end else begin
      row_sel <= row_en  ? onehot : '0;
      cr      <= 1'b0;
      rst_row <= rst_req ? onehot : '0;
    end
  end
endmodule
