// tb_pisa_top: the whole system end to end at a reduced size (4 x 4 pixels,
// 8 compute bit-lines, 2 sub-arrays of 512 x 16). Programs the sensor's NVM
// weights and the PNS weight planes, then performs runs whose detection
// threshold is set from an independent model so that some runs stop after the
// coarse in-sensor layer and others switch to sensing mode. Checks the first
// layer activations, the coarse PNS decision, the quantised pixel planes
// stored by the bus, the fine-grained convolution result (register and the
// bit-planes written back into memory), and counts every mechanism: processing
// frames, sensing frames, mode switches, runs with and without detection,
// copies, dual-row activations, bus plane writes and result write-backs.
module tb_pisa_top;
  import pisa_pkg::*;
  localparam int M = 4, N = 4, V = 8, EXP = 4, NB = 1, MT = 2, COLS = 16;
  localparam int SUM_W = PIX_W + 2 + $clog2(M*N);
  localparam int FB = 4;      // fine input precision
  logic clk = 0, rst_n = 0;
  logic [PIX_W-1:0] light [M][N];
  logic signed [SUM_W-1:0] iref = 0;
  logic w_we = 0, w_val = 0;
  logic [1:0] w_row = 0, w_col = 0;
  logic [2:0] w_idx = 0;
  dram_op_e h_op = OP_NOP;
  logic h_sub = 0;
  logic [ROW_AW-1:0] h_row_a = 0, h_row_b = 0;
  logic [3:0] h_col = 0;
  logic [COLS-1:0] h_wdata = 0, h_rdata;
  logic h_wbit = 0, run = 0;
  pns_job_t coarse_job, fine_job;
  logic busy, run_done, detected;
  pisa_mode_e sensor_mode;
  logic [V-1:0] act;
  logic [7:0] res_coarse, res_fine;
  logic [15:0] bus_overruns;
  int checks = 0, failures = 0;
  int n_proc = 0, n_sense = 0, n_switch = 0, n_nodet = 0, n_det = 0;
  int n_copy = 0, n_dra = 0, n_bus = 0, n_wb = 0;
  bit w [M][N][V];
  logic [COLS-1:0] cw, fw;

  pisa_top #(.M(M), .N(N), .V(V), .EXP(EXP), .N_BANKS(NB), .MATS(MT), .COLS(COLS)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input logic ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // mechanism counters
  pisa_mode_e mode_q = MODE_PROCESS;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_pisa.start_process) n_proc++;
    if (dut.u_pisa.start_sense) n_sense++;
    mode_q <= sensor_mode;
    if (mode_q != sensor_mode) n_switch++;
    if (dut.u_pns.busy && dut.u_pns.c_op == OP_COPY) n_copy++;
    if (dut.u_pns.busy && dut.u_pns.c_op == OP_DRA) n_dra++;
    if (dut.u_pns.busy && dut.u_pns.c_op == OP_WBIT) n_wb++;
    if (dut.u_bus.w_op == OP_WRITE) n_bus++;
  end

  function automatic int vpd(int r, int c);
    automatic int v = 255 - int'(light[r][c]) * EXP;
    return v < 0 ? 0 : v;
  endfunction
  function automatic logic [V-1:0] model_act();
    logic [V-1:0] a;
    for (int x = 0; x < V; x++) begin
      automatic int s = 0;
      for (int r = 0; r < M; r++) for (int c = 0; c < N; c++) s += w[r][c][x] ? vpd(r, c) : -vpd(r, c);
      a[x] = (s > 0);
    end
    return a;
  endfunction
  function automatic int qpix(int k);
    automatic int p = int'(light[k / N][k % N]) * EXP;
    if (p > 255) p = 255;
    return p >> (8 - FB);
  endfunction
  task automatic hop(input dram_op_e o, input int s, input int r);
    h_op = o; h_sub = 1'(s); h_row_a = 9'(r); @(negedge clk); h_op = OP_NOP;
  endtask

  task automatic do_run(input bit want_detect);
    automatic logic [V-1:0] a;
    automatic int pc, dot = 0, e;
    foreach (light[r, c]) light[r][c] = 8'($urandom_range(0, 70));
    a = model_act();
    pc = $countones(a & cw[V-1:0]);
    // y = pc - T > 0 detects
    coarse_job.bn_bias = want_detect ? -32'(pc - 1) : -32'(pc);
    @(negedge clk);
    run = 1; @(negedge clk); run = 0;
    while (!run_done) @(negedge clk);
    chk(act == a, $sformatf("first-layer activations %b exp %b", act, a));
    chk(res_coarse == 8'(want_detect), "coarse PNS decision");
    chk(detected == want_detect, "detected flag");
    if (want_detect) begin
      n_det++;
      chk(sensor_mode == MODE_SENSE, "sensor left in sensing mode");
      for (int k = 0; k < M * N; k++) dot += int'(fw[k]) * qpix(k);
      e = dot >>> 1; if (e > 15) e = 15;
      chk(res_fine == 8'(e), $sformatf("fine result %0d exp %0d", res_fine, e));
      // stored pixel planes and written-back result
      for (int p = 0; p < FB; p++) begin
        automatic logic [COLS-1:0] pl;
        for (int k = 0; k < COLS; k++) pl[k] = (k < M * N) ? 1'((qpix(k) >> p) & 1) : 1'b0;
        hop(OP_READ, 0, 30 + p);
        chk(h_rdata == pl, $sformatf("pixel plane %0d", p));
      end
      begin
        automatic int got = 0;
        for (int b = 0; b < 4; b++) begin hop(OP_READ, 0, 40 + b); got |= int'(h_rdata[5]) << b; end
        chk(got == e, "result bit-planes in memory");
      end
    end else begin
      n_nodet++;
      chk(sensor_mode == MODE_PROCESS, "sensor stays in processing mode");
    end
  endtask

  initial begin
    foreach (light[r, c]) light[r][c] = 0;
    coarse_job = '0; fine_job = '0;
    coarse_job.w_row = 0; coarse_job.i_row = 10; coarse_job.w_bits = 1; coarse_job.i_bits = 1;
    coarse_job.out_row = 20; coarse_job.out_col = 3; coarse_job.out_bits = 1; coarse_job.act = ACT_SIGN;
    coarse_job.bn_scale = 1;
    fine_job.w_row = 1; fine_job.i_row = 30; fine_job.w_bits = 1; fine_job.i_bits = 6'(FB);
    fine_job.out_row = 40; fine_job.out_col = 5; fine_job.out_bits = 4; fine_job.act = ACT_QREL;
    fine_job.bn_scale = 1; fine_job.bn_bias = 0; fine_job.bn_shift = 1;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk);
    for (int r = 0; r < M; r++) for (int c = 0; c < N; c++) for (int x = 0; x < V; x++) begin
      w[r][c][x] = 1'($urandom);
      w_we = 1; w_row = 2'(r); w_col = 2'(c); w_idx = 3'(x); w_val = w[r][c][x];
      @(negedge clk); w_we = 0; @(negedge clk);
    end
    cw = COLS'($urandom_range(1, 255));
    fw = COLS'($urandom);
    h_wdata = cw; hop(OP_WRITE, 0, 0);
    h_wdata = fw; hop(OP_WRITE, 0, 1);
    h_wdata = '0; hop(OP_WRITE, 1, 0); hop(OP_WRITE, 1, 1);
    do_run(0);
    do_run(1);
    do_run(0);
    do_run(1);
    do_run(1);
    chk(bus_overruns == 0, "no bus overruns");
    $display("mechanisms: processing frames %0d, sensing frames %0d, mode switches %0d, no-detect runs %0d, detect runs %0d, copies %0d, DRA %0d, bus writes %0d, write-backs %0d",
             n_proc, n_sense, n_switch, n_nodet, n_det, n_copy, n_dra, n_bus, n_wb);
    chk(n_proc == 5, "processing frames");
    chk(n_sense == 3, "sensing frames");
    chk(n_switch >= 5, "mode switches");
    chk(n_nodet > 0 && n_det > 0, "both branches");
    chk(n_copy > 0 && n_dra > 0 && n_bus > 0 && n_wb > 0, "PNS mechanisms");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
