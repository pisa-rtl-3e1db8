// pisa_array: the PISA processing-in-sensor chip: an M x N compute focal plane
// (cfp) with its row controller, column controller, command decoder, sensor
// timing controller and sensor I/O (column CDS circuits).
//
// Two operating modes, selected per frame by the command that starts it:
//  * CMD_PROCESS - integrated sensing-processing: global reset and exposure,
//    the whole array drives the V compute bit-lines at once and the V sense
//    amplifiers output the binary first-layer activations on 'act' with a
//    one-clock 'act_valid' (EXP + 4 clocks after the start command is decoded).
//  * CMD_SENSE   - sensing-only, like a rolling-shutter image sensor: each row
//    is reset, sampled (k1), exposed, sampled again (k2) and its N CDS values
//    V1 - V2 are streamed out on pix_out, one per clock, with pix_row/pix_col.
//  * CMD_WRITE_W - programs one NVM weight bit of one pixel (one clock).
// Commands are accepted when cmd_ready is high; see cmd_decoder.
// Follows the paper's block list (CFP, row and column Ctrl, command decoder,
// sensor timing Ctrl, sensor I/O); how they are wired is this design's choice.
module pisa_array
  import pisa_pkg::*;
#(
  parameter int unsigned M   = 128,
  parameter int unsigned N   = 128,
  parameter int unsigned V   = 8,
  parameter int unsigned EXP = 16,
  localparam int unsigned SUM_W = PIX_W + 2 + $clog2(M*N)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // command port
  input  logic                    cmd_valid,
  input  pisa_cmd_e               cmd,
  input  logic [$clog2(M)-1:0]    a_row,
  input  logic [$clog2(N)-1:0]    a_col,
  input  logic [$clog2(V)-1:0]    a_idx,
  input  logic                    a_val,
  output logic                    cmd_ready,
  output logic                    err,
  // scene and reference
  input  logic [PIX_W-1:0]        light [M][N],
  input  logic signed [SUM_W-1:0] iref,
  // processing-mode output
  output logic [V-1:0]            act,
  output logic                    act_valid,
  output logic signed [SUM_W-1:0] icbl [V],
  // sensing-mode output
  output logic [PIX_W-1:0]        pix_out,
  output logic                    pix_valid,
  output logic [$clog2(M)-1:0]    pix_row,
  output logic [$clog2(N)-1:0]    pix_col,
  // status
  output pisa_mode_e              mode,
  output logic                    busy,
  output logic                    done
);
  logic                 start_process, start_sense;
  logic                 w_we, w_val;
  logic [$clog2(M)-1:0] w_row;
  logic [$clog2(N)-1:0] w_col;
  logic [$clog2(V)-1:0] w_idx;
  logic                 rst_req, row_en, cr_en, expose, sa_clk, k1, k2;
  logic                 col_start, col_done, col_busy;
  logic [$clog2(M)-1:0] row_addr;
  logic [M-1:0]         row_sel, rst_row;
  logic                 cr;
  logic [PIX_W-1:0]     sbl [N];
  logic [PIX_W-1:0]     cds [N];

  cmd_decoder #(.M(M), .N(N), .V(V)) u_dec (
    .clk, .rst_n, .cmd_valid, .cmd, .a_row, .a_col, .a_idx, .a_val, .busy,
    .cmd_ready, .start_process, .start_sense,
    .w_we, .w_row, .w_col, .w_idx, .w_val, .err
  );

  sensor_timing_ctrl #(.M(M), .EXP(EXP)) u_tim (
    .clk, .rst_n, .start_process, .start_sense, .col_done,
    .mode, .rst_req, .row_en, .row_addr, .cr_en, .expose, .sa_clk, .k1, .k2,
    .col_start, .busy, .done
  );

  row_ctrl #(.M(M)) u_row (
    .clk, .rst_n, .mode, .rst_req, .row_en, .row_addr, .cr_en,
    .row_sel, .cr, .rst_row
  );

  cfp #(.M(M), .N(N), .V(V)) u_cfp (
    .clk, .rst_n, .rst_row, .expose, .light, .row_sel, .cr,
    .w_we, .w_row, .w_col, .w_idx, .w_val, .sa_clk, .iref,
    .sbl, .icbl, .act, .act_valid
  );

  sensor_io #(.N(N)) u_io (
    .clk, .rst_n, .k1, .k2, .sbl, .pix(cds)
  );

  col_ctrl #(.N(N)) u_col (
    .clk, .rst_n, .start(col_start), .pix(cds),
    .pix_out, .pix_valid, .col_idx(pix_col), .busy(col_busy), .done(col_done)
  );

  assign pix_row = row_addr;
endmodule
