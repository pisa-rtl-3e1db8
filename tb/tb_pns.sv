// tb_pns: the PNS unit (2 banks x 2 sub-arrays of 512 x 256) end to end through
// its host port. For several weight:input precisions (including the paper's
// 1:4, 1:8 and 1:32 and a multi-bit 3:3) it stores random weight and input
// vectors as bit-planes in every sub-array, runs a job, reads the output
// bit-planes back and compares each sub-array's output with
// act(BN(sum_c W_c * I_c)) computed from the integers directly, and checks the
// job length. Also checks that the data rows holding the operands survive.
module tb_pns;
  import pisa_pkg::*;
  localparam int NB = 2, MT = 2, NSUB = NB * MT, COLS = 256;
  logic clk = 0, rst_n = 0;
  dram_op_e h_op = OP_NOP;
  logic [1:0] h_sub = 0;
  logic [ROW_AW-1:0] h_row_a = 0, h_row_b = 0;
  logic [7:0] h_col = 0;
  logic [COLS-1:0] h_wdata = 0, h_rdata;
  logic h_wbit = 0, start = 0, busy, done;
  pns_job_t job;
  logic [7:0] res0;
  logic [PIX_W-1:0] q_in = 0;
  logic [BITS_W-1:0] q_bits = 8;
  logic [MAX_BITS-1:0] q_out;
  int checks = 0, failures = 0;
  longint wv [NSUB][COLS], iv [NSUB][COLS];

  pns #(.N_BANKS(NB), .MATS(MT), .COLS(COLS)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input logic ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic hop(input dram_op_e o, input int s, input int r);
    h_op = o; h_sub = 2'(s); h_row_a = 9'(r); @(negedge clk); h_op = OP_NOP;
  endtask

  task automatic run(input int wb, input int ib, input int ob, input act_mode_e am);
    automatic int cyc = 1;
    automatic logic [COLS-1:0] plane;
    job = '0;
    job.w_row = 9'($urandom_range(0, 60)); job.i_row = 9'($urandom_range(100, 150));
    job.w_bits = 6'(wb); job.i_bits = 6'(ib); job.out_bits = 4'(ob); job.act = am;
    job.out_row = 9'($urandom_range(300, 400)); job.out_col = 8'($urandom);
    job.bn_scale = 16'($urandom_range(1, 5)); job.bn_shift = 6'($urandom_range(0, 3));
    // load operands
    for (int s = 0; s < NSUB; s++) begin
      for (int c = 0; c < COLS; c++) begin
        wv[s][c] = longint'({$urandom, $urandom}) & ((longint'(1) << wb) - 1);
        iv[s][c] = longint'({$urandom, $urandom}) & ((longint'(1) << ib) - 1);
      end
      for (int p = 0; p < wb; p++) begin
        for (int c = 0; c < COLS; c++) plane[c] = wv[s][c][p];
        h_wdata = plane; hop(OP_WRITE, s, job.w_row + p);
      end
      for (int p = 0; p < ib; p++) begin
        for (int c = 0; c < COLS; c++) plane[c] = iv[s][c][p];
        h_wdata = plane; hop(OP_WRITE, s, job.i_row + p);
      end
    end
    begin  // choose the bias so that sub-array outputs straddle the threshold
      automatic longint d0 = 0;
      for (int c = 0; c < COLS; c++) d0 += wv[0][c] * iv[0][c];
      job.bn_bias = -32'(d0 * job.bn_scale) + ((am == ACT_SIGN) ? 32'sd1 : 32'sd0);
    end
    start = 1; @(negedge clk); start = 0;
    while (!done) begin @(negedge clk); cyc++; end
    chk(cyc == 2 + wb * ib * (3 + 2 * NSUB) + NSUB * ob, $sformatf("job length %0d", cyc));
    for (int s = 0; s < NSUB; s++) begin
      automatic longint d = 0, y;
      automatic int e, got = 0;
      for (int c = 0; c < COLS; c++) d += wv[s][c] * iv[s][c];
      y = (d * longint'(job.bn_scale) + longint'(job.bn_bias)) >>> job.bn_shift;
      if (am == ACT_SIGN) e = (y > 0);
      else e = (y <= 0) ? 0 : ((y >= (1 << ob) - 1) ? (1 << ob) - 1 : int'(y));
      for (int b = 0; b < ob; b++) begin
        hop(OP_READ, s, job.out_row + b);
        got |= int'(h_rdata[job.out_col]) << b;
      end
      chk(got == e, $sformatf("W:I %0d:%0d sub %0d dot %0d -> %0d exp %0d", wb, ib, s, d, got, e));
      if (s == 0) chk(res0 == 8'(e), "res0 holds sub-array 0 output");
      // operands intact
      hop(OP_READ, s, job.i_row);
      for (int c = 0; c < COLS; c++) plane[c] = iv[s][c][0];
      chk(h_rdata == plane, "input plane intact");
    end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    run(1, 4, 4, ACT_QREL);
    run(1, 8, 1, ACT_SIGN);
    run(3, 3, 8, ACT_QREL);
    run(1, 32, 1, ACT_SIGN);
    run(2, 2, 1, ACT_SIGN);
    // quantiser port
    q_in = 8'd200; q_bits = 6'd4; #1; chk(q_out == 32'd12, "quantiser 200 -> 4 bits");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
