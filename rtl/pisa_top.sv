// pisa_top: the hybrid processing-in-sensor / near-sensor system.
//
// Data flow of one 'run' (one frame of the always-on loop):
//  1. COARSE  - the PISA array executes a processing frame: the first BWNN
//               layer is computed inside the focal plane and yields V binary
//               activations without any pixel conversion.
//  2. The activations travel over bus_fabric into sub-array 0 of the PNS as a
//     1-bit plane at row coarse_job.i_row, and the PNS runs coarse_job (the
//     remaining layers, here one bit-wise convolution job per run on all
//     sub-arrays). Bit 0 of sub-array 0's activation is the detection flag.
//  3. If nothing is detected the run ends (detected = 0, PISA stays in
//     processing mode).
//  4. FINE    - otherwise PISA switches to sensing mode and captures a full
//     rolling-shutter frame; the DPU quantiser cuts each pixel to
//     fine_job.i_bits bits and bus_fabric stores COLS pixels per sub-array
//     (starting at sub-array 0) as bit-planes at row fine_job.i_row; the PNS
//     then runs fine_job, the fine-grained convolution, and the run ends with
//     detected = 1 and res_fine = sub-array 0's output.
// 'run_done' pulses at the end of each run. While the system is idle the host
// may program the sensor's NVM weights (w_*) and use the PNS host port (h_*),
// e.g. to load weight bit-planes and read results.
// Follows the paper: coarse-grained in-sensor first layer, PNS for the
// remaining layers, switch to sensing mode on detection, fine-grained
// convolution near the sensor. Own choices: one PNS job per phase, detection
// taken from sub-array 0, and the run/idle protocol.
module pisa_top
  import pisa_pkg::*;
#(
  parameter int unsigned M       = 128,
  parameter int unsigned N       = 128,
  parameter int unsigned V       = 8,
  parameter int unsigned EXP     = 16,
  parameter int unsigned N_BANKS = 256,
  parameter int unsigned MATS    = 16,
  parameter int unsigned ROWS    = SUB_ROWS,
  parameter int unsigned DROWS   = DATA_ROWS,
  parameter int unsigned COLS    = 256,
  parameter int unsigned ACC_W   = 48,
  localparam int unsigned NSUB   = N_BANKS * MATS,
  localparam int unsigned SW     = (NSUB > 1) ? $clog2(NSUB) : 1,
  localparam int unsigned SUM_W  = PIX_W + 2 + $clog2(M*N)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // scene
  input  logic [PIX_W-1:0]        light [M][N],
  input  logic signed [SUM_W-1:0] iref,
  // sensor NVM programming (idle only)
  input  logic                    w_we,
  input  logic [$clog2(M)-1:0]    w_row,
  input  logic [$clog2(N)-1:0]    w_col,
  input  logic [$clog2(V)-1:0]    w_idx,
  input  logic                    w_val,
  // PNS host port (idle only)
  input  dram_op_e                h_op,
  input  logic [SW-1:0]           h_sub,
  input  logic [ROW_AW-1:0]       h_row_a,
  input  logic [ROW_AW-1:0]       h_row_b,
  input  logic [$clog2(COLS)-1:0] h_col,
  input  logic [COLS-1:0]         h_wdata,
  input  logic                    h_wbit,
  output logic [COLS-1:0]         h_rdata,
  // run control
  input  logic                    run,
  input  pns_job_t                coarse_job,
  input  pns_job_t                fine_job,
  output logic                    busy,
  output logic                    run_done,
  output logic                    detected,
  output pisa_mode_e              sensor_mode,
  output logic [V-1:0]            act,
  output logic [7:0]              res_coarse,
  output logic [7:0]              res_fine,
  output logic [15:0]             bus_overruns
);
  typedef enum logic [3:0] {
    T_IDLE, T_PCMD, T_PWAIT, T_PUSH, T_PFLUSH, T_CJOB, T_CWAIT,
    T_SCMD, T_SWAIT, T_SFLUSH, T_FJOB, T_FWAIT
  } tstate_e;

  tstate_e st;

  // PISA array
  logic                 cmd_valid, cmd_ready, cmd_err;
  pisa_cmd_e            cmd;
  logic [V-1:0]         act_w;
  logic                 act_valid;
  logic signed [SUM_W-1:0] icbl [V];
  logic [PIX_W-1:0]     pix_out;
  logic                 pix_valid;
  logic [$clog2(M)-1:0] pix_row;
  logic [$clog2(N)-1:0] pix_col;
  logic                 s_busy, s_done;

  // PNS
  dram_op_e             p_op;
  logic [SW-1:0]        p_sub;
  logic [ROW_AW-1:0]    p_row_a;
  logic [COLS-1:0]      p_wdata;
  logic                 p_start, p_busy, p_done;
  pns_job_t             p_job;
  logic [7:0]           res0;
  logic [MAX_BITS-1:0]  q_out;

  // Bus
  logic                 b_begin, b_valid, b_flush, b_ready, b_busy;
  logic [BITS_W-1:0]    b_nbits;
  logic [ROW_AW-1:0]    b_base;
  logic [MAX_BITS-1:0]  b_data;
  dram_op_e             b_op;
  logic [SW-1:0]        b_sub;
  logic [ROW_AW-1:0]    b_row;
  logic [COLS-1:0]      b_wdata;

  logic [$clog2(V+1)-1:0] push_i;

  pisa_array #(.M(M), .N(N), .V(V), .EXP(EXP)) u_pisa (
    .clk, .rst_n, .cmd_valid, .cmd,
    .a_row(w_row), .a_col(w_col), .a_idx(w_idx), .a_val(w_val),
    .cmd_ready, .err(cmd_err), .light, .iref,
    .act(act_w), .act_valid, .icbl,
    .pix_out, .pix_valid, .pix_row, .pix_col,
    .mode(sensor_mode), .busy(s_busy), .done(s_done)
  );

  bus_fabric #(.COLS(COLS), .NSUB(NSUB)) u_bus (
    .clk, .rst_n, .begin_i(b_begin), .nbits(b_nbits), .base_row(b_base), .sub0('0),
    .in_valid(b_valid), .in_data(b_data), .flush(b_flush), .in_ready(b_ready),
    .w_op(b_op), .w_sub(b_sub), .w_row(b_row), .w_data(b_wdata),
    .busy(b_busy), .overruns(bus_overruns)
  );

  pns #(.N_BANKS(N_BANKS), .MATS(MATS), .ROWS(ROWS), .DROWS(DROWS), .COLS(COLS),
        .ACC_W(ACC_W)) u_pns (
    .clk, .rst_n,
    .h_op(p_op), .h_sub(p_sub), .h_row_a(p_row_a), .h_row_b(h_row_b), .h_col,
    .h_wdata(p_wdata), .h_wbit, .h_rdata,
    .start(p_start), .job(p_job), .busy(p_busy), .done(p_done), .res0,
    .q_in(pix_out), .q_bits(fine_job.i_bits), .q_out
  );

  // PNS host port: the host while idle, the bus otherwise.
  always_comb begin
    if (st == T_IDLE) begin
      p_op = h_op; p_sub = h_sub; p_row_a = h_row_a; p_wdata = h_wdata;
    end else begin
      p_op = b_op; p_sub = b_sub; p_row_a = b_row; p_wdata = b_wdata;
    end
  end

  // Sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= T_IDLE; act <= '0; push_i <= '0; detected <= 1'b0;
      res_coarse <= '0; res_fine <= '0; run_done <= 1'b0;
    end else begin
      run_done <= 1'b0;
      unique case (st)
        T_IDLE:   if (run) begin st <= T_PCMD; detected <= 1'b0; end
        T_PCMD:   if (cmd_ready) st <= T_PWAIT;
        T_PWAIT:  if (act_valid) begin act <= act_w; push_i <= '0; st <= T_PUSH; end
        T_PUSH:   begin
          push_i <= push_i + 1'b1;
          if (push_i == $bits(push_i)'(V - 1)) st <= T_PFLUSH;
        end
        T_PFLUSH: if (!b_busy && !b_flush) st <= T_CJOB;
        T_CJOB:   st <= T_CWAIT;
        T_CWAIT:  if (p_done) begin
          res_coarse <= res0;
          if (res0[0]) begin detected <= 1'b1; st <= T_SCMD; end
          else begin st <= T_IDLE; run_done <= 1'b1; end
        end
        T_SCMD:   if (cmd_ready) st <= T_SWAIT;
        T_SWAIT:  if (s_done) st <= T_SFLUSH;
        T_SFLUSH: if (!b_busy && !b_flush) st <= T_FJOB;
        T_FJOB:   st <= T_FWAIT;
        T_FWAIT:  if (p_done) begin res_fine <= res0; st <= T_IDLE; run_done <= 1'b1; end
        default:  st <= T_IDLE;
      endcase
    end
  end

  // Flush requests: one clock after the last element, until the buffer drains.
  logic flushed;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) flushed <= 1'b0;
    else if (st == T_PUSH || st == T_SWAIT) flushed <= 1'b0;
    else if (b_flush) flushed <= 1'b1;
  end

  always_comb begin
    // sensor commands
    cmd_valid = 1'b0;
    cmd       = CMD_NOP;
    if (st == T_IDLE && w_we)  begin cmd_valid = 1'b1; cmd = CMD_WRITE_W; end
    if (st == T_PCMD)          begin cmd_valid = 1'b1; cmd = CMD_PROCESS; end
    if (st == T_SCMD)          begin cmd_valid = 1'b1; cmd = CMD_SENSE;   end
    // bus
    b_begin = (st == T_PWAIT && act_valid) || (st == T_CWAIT && p_done && res0[0]);
    b_nbits = (st == T_CWAIT) ? fine_job.i_bits : BITS_W'(1);
    b_base  = (st == T_CWAIT) ? fine_job.i_row  : coarse_job.i_row;
    b_valid = (st == T_PUSH) || (st == T_SWAIT && pix_valid);
    b_data  = (st == T_PUSH) ? MAX_BITS'(act[push_i[$clog2(V)-1:0]]) : q_out;
    b_flush = (st == T_PFLUSH || st == T_SFLUSH) && !flushed && !b_busy;
    // PNS jobs
    p_start = (st == T_CJOB) || (st == T_FJOB);
    p_job   = (st == T_FJOB || st == T_FWAIT) ? fine_job : coarse_job;
  end

  assign busy = (st != T_IDLE);

  a_host_idle: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> (h_op == OP_NOP && !w_we));
endmodule
