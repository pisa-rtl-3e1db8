// pns: the near-sensor processing-in-DRAM (PNS) unit.
//
// Organisation: N_BANKS banks of MATS computational sub-arrays each
// (NSUB = N_BANKS*MATS sub-arrays, flat-indexed bank*MATS + mat). Every two
// neighbouring sub-arrays (2k, 2k+1) share a local row buffer (lrb); one DPU
// and one controller (pns_ctrl) serve the whole array. All sub-arrays execute
// the controller's broadcast commands in lock-step, which is where the PNS
// parallelism comes from; the shared DPU then reads their results one by one
// through the LRBs.
//
// Host port (usable while busy is low): one sub-array operation per clock on
// sub-array h_sub (OP_READ/WRITE/WBIT/COPY/DRA, see dram_subarray); h_rdata is
// that sub-array's sense-amplifier latch, valid the clock after an OP_READ.
// It is how weights are loaded, how the sensor's data are stored (bus_fabric)
// and how results are read back.
// Job port: 'start' with a pns_job_t runs one bit-wise convolution job (see
// pns_ctrl for the sequence and its length); 'done' pulses at the end and
// res0 holds the activation written for sub-array 0.
// Also exposed: the DPU quantiser (q_in -> q_out), used on raw pixels.
// Follows the paper: banks of computational sub-arrays, an LRB per two
// sub-arrays, one DPU for the entire array. Own choices: flat indexing,
// lock-step broadcast and the host port.
module pns
  import pisa_pkg::*;
#(
  parameter int unsigned N_BANKS = 256,
  parameter int unsigned MATS    = 16,
  parameter int unsigned ROWS    = SUB_ROWS,
  parameter int unsigned DROWS   = DATA_ROWS,
  parameter int unsigned COLS    = 256,
  parameter int unsigned ACC_W   = 48,
  localparam int unsigned NSUB   = N_BANKS * MATS,
  localparam int unsigned SW     = (NSUB > 1) ? $clog2(NSUB) : 1,
  localparam int unsigned CAW    = $clog2(COLS)
) (
  input  logic              clk,
  input  logic              rst_n,
  // host port
  input  dram_op_e          h_op,
  input  logic [SW-1:0]     h_sub,
  input  logic [ROW_AW-1:0] h_row_a,
  input  logic [ROW_AW-1:0] h_row_b,
  input  logic [CAW-1:0]    h_col,
  input  logic [COLS-1:0]   h_wdata,
  input  logic              h_wbit,
  output logic [COLS-1:0]   h_rdata,
  // job port
  input  logic              start,
  input  pns_job_t          job,
  output logic              busy,
  output logic              done,
  output logic [7:0]        res0,
  // quantiser
  input  logic [PIX_W-1:0]  q_in,
  input  logic [BITS_W-1:0] q_bits,
  output logic [MAX_BITS-1:0] q_out
);
  dram_op_e          c_op;
  logic              c_all, c_wbit, lrb_load, acc_clr, acc_en;
  logic [SW-1:0]     c_sub;
  logic [ROW_AW-1:0] c_row_a, c_row_b;
  logic [7:0]        c_col;
  logic [6:0]        shift;
  logic [7:0]        act_out;
  logic [ACC_W-1:0]  acc_out;
  pns_job_t          job_q;

  logic [COLS-1:0]   rdata [NSUB];
  logic [COLS-1:0]   rnand [NSUB];
  logic [COLS-1:0]   lrb_q [NSUB/2];

  // Operands seen by every sub-array
  logic [ROW_AW-1:0] s_row_a, s_row_b;
  logic [CAW-1:0]    s_col;
  logic              s_wbit;
  assign s_row_a = busy ? c_row_a : h_row_a;
  assign s_row_b = busy ? c_row_b : h_row_b;
  assign s_col   = busy ? CAW'(c_col) : h_col;
  assign s_wbit  = busy ? c_wbit : h_wbit;

  pns_ctrl #(.NSUB(NSUB), .DROWS(DROWS)) u_ctrl (
    .clk, .rst_n, .start, .job,
    .c_op, .c_all, .c_sub, .c_row_a, .c_row_b, .c_col, .c_wbit,
    .lrb_load, .acc_clr, .acc_en, .shift, .act_out, .job_q, .busy, .done
  );

  for (genvar s = 0; s < NSUB; s++) begin : g_sub
    dram_op_e op_s;
    always_comb begin
      if (busy) op_s = (c_all || c_sub == SW'(s)) ? c_op : OP_NOP;
      else      op_s = (h_sub == SW'(s)) ? h_op : OP_NOP;
    end
    dram_subarray #(.ROWS(ROWS), .DROWS(DROWS), .COLS(COLS)) u_sa (
      .clk, .rst_n, .op(op_s),
      .row_a(s_row_a), .row_b(s_row_b), .col(s_col),
      .wdata(h_wdata), .wbit(s_wbit),
      .rdata(rdata[s]), .rnand(rnand[s])
    );
  end

  for (genvar k = 0; k < NSUB/2; k++) begin : g_lrb
    lrb #(.COLS(COLS)) u_lrb (
      .clk, .rst_n,
      .load_a (lrb_load && c_sub == SW'(2*k)),
      .load_b (lrb_load && c_sub == SW'(2*k+1)),
      .din_a  (rdata[2*k]),
      .din_b  (rdata[2*k+1]),
      .q      (lrb_q[k])
    );
  end

  dpu #(.COLS(COLS), .NACC(NSUB), .ACC_W(ACC_W)) u_dpu (
    .clk, .rst_n,
    .q_in, .q_bits, .q_out,
    .row(lrb_q[c_sub >> 1]), .shift, .acc_sel(c_sub), .acc_en, .acc_clr,
    .out_sel(c_sub), .bn_scale(job_q.bn_scale), .bn_bias(job_q.bn_bias),
    .bn_shift(job_q.bn_shift), .act(job_q.act), .out_bits(job_q.out_bits),
    .acc_out, .act_out
  );

  assign h_rdata = rdata[h_sub];

  // Result of sub-array 0, captured while it is written back.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) res0 <= '0;
    else if (busy && c_op == OP_WBIT && c_sub == '0) res0 <= act_out;
  end

  // Sub-arrays are paired on LRBs.
  if (NSUB % 2 != 0) begin : g_bad
    $error("pns: N_BANKS*MATS must be even");
  end
  a_host_idle: assert property (@(posedge clk) disable iff (!rst_n) busy |-> h_op == OP_NOP);
endmodule
