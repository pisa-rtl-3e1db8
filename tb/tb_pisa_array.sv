// tb_pisa_array: the PISA sensor on its own (4 x 4 pixels, 8 CBLs). Programs
// every NVM weight through the command port, then runs processing frames and
// checks the eight activations against an independent model and their latency
// (EXP + 5 clocks from the accepted command), then runs a sensing frame and
// checks that all M*N CDS values (light * EXP, saturated at 255) stream out in
// row-major order. Also checks that a command offered during a frame is refused.
module tb_pisa_array;
  import pisa_pkg::*;
  localparam int M = 4, N = 4, V = 8, EXP = 6;
  localparam int SUM_W = PIX_W + 2 + $clog2(M*N);
  logic clk = 0, rst_n = 0, cmd_valid = 0, a_val = 0;
  pisa_cmd_e cmd = CMD_NOP;
  logic [1:0] a_row = 0, a_col = 0;
  logic [2:0] a_idx = 0;
  logic cmd_ready, err, act_valid, pix_valid, busy, done;
  logic [PIX_W-1:0] light [M][N];
  logic signed [SUM_W-1:0] iref = 0;
  logic [V-1:0] act;
  logic signed [SUM_W-1:0] icbl [V];
  logic [PIX_W-1:0] pix_out;
  logic [1:0] pix_row, pix_col;
  pisa_mode_e mode;
  int checks = 0, failures = 0, nerr = 0;
  bit w [M][N][V];

  pisa_array #(.M(M), .N(N), .V(V), .EXP(EXP)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (err && rst_n) nerr++;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input logic ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic int vpd(int r, int c);
    automatic int v = 255 - int'(light[r][c]) * EXP;
    return v < 0 ? 0 : v;
  endfunction
  task automatic issue(input pisa_cmd_e k);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd = k; @(negedge clk); cmd_valid = 0; cmd = CMD_NOP;
  endtask

  initial begin
    foreach (light[r, c]) light[r][c] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int frame = 0; frame < 6; frame++) begin
      int lat;
      for (int r = 0; r < M; r++) for (int c = 0; c < N; c++) for (int x = 0; x < V; x++) begin
        w[r][c][x] = 1'($urandom);
        a_row = 2'(r); a_col = 2'(c); a_idx = 3'(x); a_val = w[r][c][x];
        issue(CMD_WRITE_W);
      end
      foreach (light[r, c]) light[r][c] = 8'($urandom_range(0, 50));
      @(negedge clk);
      issue(CMD_PROCESS);
      lat = 1;
      // a command during the frame is refused
      @(negedge clk); lat++;
      cmd_valid = 1; cmd = CMD_SENSE; @(negedge clk); cmd_valid = 0; lat++;
      while (!act_valid) begin @(negedge clk); lat++; end
      chk(lat == EXP + 5, $sformatf("processing latency %0d", lat));
      chk(mode == MODE_PROCESS, "processing mode");
      for (int x = 0; x < V; x++) begin
        automatic int s = 0;
        for (int r = 0; r < M; r++) for (int c = 0; c < N; c++) s += w[r][c][x] ? vpd(r, c) : -vpd(r, c);
        chk(act[x] == (s > 0), $sformatf("frame %0d act[%0d] sum %0d", frame, x, s));
      end
    end
    chk(nerr == 6, $sformatf("commands refused while busy: %0d", nerr));
    // sensing frame
    foreach (light[r, c]) light[r][c] = 8'($urandom_range(0, 60));
    @(negedge clk);
    issue(CMD_SENSE);
    begin
      automatic int k = 0;
      forever begin
        if (pix_valid) begin
          automatic int r = k / N, c = k % N;
          automatic int e = int'(light[r][c]) * EXP;
          if (e > 255) e = 255;
          chk(pix_row == 2'(r) && pix_col == 2'(c), "raster order");
          chk(pix_out == 8'(e), $sformatf("pixel %0d,%0d = %0d exp %0d", r, c, pix_out, e));
          k++;
        end
        if (done) break;
        @(negedge clk);
      end
      chk(k == M * N, $sformatf("%0d pixels", k));
      chk(mode == MODE_SENSE, "sensing mode");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
