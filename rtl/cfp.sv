// cfp: the m x n Compute Focal Plane of PISA (behavioural at the pixel level,
// since the pixels, bit-lines and sense amplifiers are analog).
//
// How it works: M x N compute_pixel instances share a sense bit-line (SBL) per
// column and V compute bit-lines (CBL) across the whole array. In processing
// mode CR turns on every pixel's add-ons at once, so CBL x carries
// I_sum,x = sum over all pixels of (+/-) V_PD, signed by the pixel's weight x
// (Kirchhoff summation, modelled as an exact integer sum). A cbl_sense_amp per
// CBL turns it into one binary activation at the falling edge of sa_clk: the
// whole first BWNN layer (a fully connected layer of M*N inputs and V outputs,
// the paper's mapping) in one evaluation. In sensing mode row_sel[r] puts row
// r on the SBLs, which are the OR of the pixels' contributions (unselected
// pixels contribute 0).
// The NVM write driver is represented by its address decode: a weight write
// (w_we, w_row, w_col, w_idx, w_val) reaches exactly one pixel.
// Timing: SBL and CBL sums are combinational from the pixel state; act is
// registered at the sensing event and flagged by act_valid.
// Follows the paper: shared SBL per column, V shared CBLs with one SA each,
// whole-array single-cycle MAC + sign. Own choice: exact digital sums.
module cfp
  import pisa_pkg::*;
#(
  parameter int unsigned M = 128,   // rows
  parameter int unsigned N = 128,   // columns
  parameter int unsigned V = 8,     // compute bit-lines / NVM units per pixel
  localparam int unsigned SUM_W = PIX_W + 2 + $clog2(M*N)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [M-1:0]            rst_row,        // Rst per row
  input  logic                    expose,
  input  logic [PIX_W-1:0]        light [M][N],
  input  logic [M-1:0]            row_sel,        // R_i
  input  logic                    cr,             // CR
  input  logic                    w_we,
  input  logic [$clog2(M)-1:0]    w_row,
  input  logic [$clog2(N)-1:0]    w_col,
  input  logic [$clog2(V)-1:0]    w_idx,
  input  logic                    w_val,
  input  logic                    sa_clk,
  input  logic signed [SUM_W-1:0] iref,
  output logic [PIX_W-1:0]        sbl  [N],
  output logic signed [SUM_W-1:0] icbl [V],
  output logic [V-1:0]            act,
  output logic                    act_valid
);
  logic [PIX_W-1:0]       sbl_p [M][N];
  logic signed [PIX_W:0]  cbl_p [M][N][V];
  logic [PIX_W-1:0]       vpd_p [M][N];
  logic [V-1:0]           valid_x;

  for (genvar r = 0; r < M; r++) begin : g_row
    for (genvar c = 0; c < N; c++) begin : g_col
      compute_pixel #(.V(V)) u_cp (
        .clk     (clk),
        .rst_n   (rst_n),
        .rst_pix (rst_row[r]),
        .expose  (expose),
        .light   (light[r][c]),
        .row_sel (row_sel[r]),
        .cr      (cr),
        .w_we    (w_we && (w_row == r[$clog2(M)-1:0]) && (w_col == c[$clog2(N)-1:0])),
        .w_idx   (w_idx),
        .w_val   (w_val),
        .sbl     (sbl_p[r][c]),
        .cbl     (cbl_p[r][c]),
        .vpd_o   (vpd_p[r][c])
      );
    end
  end

  always_comb begin
    for (int c = 0; c < N; c++) begin
      sbl[c] = '0;
      for (int r = 0; r < M; r++) sbl[c] |= sbl_p[r][c];
    end
  end

  always_comb begin
    for (int x = 0; x < V; x++) begin
      icbl[x] = '0;
      for (int r = 0; r < M; r++)
        for (int c = 0; c < N; c++)
          icbl[x] += SUM_W'(cbl_p[r][c][x]);
    end
  end

  for (genvar x = 0; x < V; x++) begin : g_sa
    cbl_sense_amp #(.SUM_W(SUM_W)) u_sa (
      .clk    (clk),
      .rst_n  (rst_n),
      .sa_clk (sa_clk),
      .isum   (icbl[x]),
      .iref   (iref),
      .out    (act[x]),
      .valid  (valid_x[x])
    );
  end
  assign act_valid = valid_x[0];

  // Sensing reads one row at a time.
  a_one_row: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(row_sel));
  // CR is grounded while a row is being read.
  a_modes:   assert property (@(posedge clk) disable iff (!rst_n) !(cr && |row_sel));
endmodule
