// tb_cfp: a 4 x 4 compute focal plane with eight compute bit-lines (the size of
// the paper's post-layout functional simulation). For random weights and
// scenes it checks each CBL sum against sum(+/-V_PD), each sign activation,
// and the per-column sense bit-line in row-wise access. The expected V_PD of a
// pixel is computed independently as max(0, 255 - light*exposure).
module tb_cfp;
  import pisa_pkg::*;
  localparam int M = 4, N = 4, V = 8;
  localparam int SUM_W = PIX_W + 2 + $clog2(M*N);
  logic clk = 0, rst_n = 0;
  logic [M-1:0] rst_row = 0, row_sel = 0;
  logic expose = 0, cr = 0, w_we = 0, w_val = 0, sa_clk = 1;
  logic [PIX_W-1:0] light [M][N];
  logic [1:0] w_row = 0, w_col = 0;
  logic [2:0] w_idx = 0;
  logic signed [SUM_W-1:0] iref = 0;
  logic [PIX_W-1:0] sbl [N];
  logic signed [SUM_W-1:0] icbl [V];
  logic [V-1:0] act;
  logic act_valid;
  int checks = 0, failures = 0, npos = 0, nneg = 0;
  bit w [M][N][V];
  int vpd [M][N];

  cfp #(.M(M), .N(N), .V(V)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input logic ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    foreach (light[r, c]) light[r][c] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int frame = 0; frame < 12; frame++) begin
      int exp_t;
      // program all weights (one write per clock)
      for (int r = 0; r < M; r++) for (int c = 0; c < N; c++) for (int x = 0; x < V; x++) begin
        w[r][c][x] = 1'($urandom);
        w_we = 1; w_row = 2'(r); w_col = 2'(c); w_idx = 3'(x); w_val = w[r][c][x];
        @(negedge clk);
      end
      w_we = 0;
      exp_t = $urandom_range(1, 12);
      foreach (light[r, c]) begin
        light[r][c] = 8'($urandom_range(0, 40));
        vpd[r][c] = 255 - int'(light[r][c]) * exp_t;
        if (vpd[r][c] < 0) vpd[r][c] = 0;
      end
      rst_row = '1; @(negedge clk); rst_row = 0;
      expose = 1; repeat (exp_t) @(negedge clk); expose = 0;
      // row-wise sensing access
      for (int r = 0; r < M; r++) begin
        row_sel = '0; row_sel[r] = 1'b1; #1;
        for (int c = 0; c < N; c++) chk(sbl[c] == 8'(vpd[r][c]), "sbl value");
      end
      row_sel = 0;
      // processing: all pixels on all CBLs
      cr = 1; #1;
      for (int x = 0; x < V; x++) begin
        automatic int s = 0;
        for (int r = 0; r < M; r++) for (int c = 0; c < N; c++) s += w[r][c][x] ? vpd[r][c] : -vpd[r][c];
        chk(icbl[x] == SUM_W'(s), $sformatf("icbl[%0d]=%0d exp %0d", x, icbl[x], s));
        if (s > 0) npos++; else nneg++;
      end
      sa_clk = 0; @(negedge clk); sa_clk = 1; cr = 0;
      chk(act_valid, "act_valid");
      for (int x = 0; x < V; x++) begin
        automatic int s = 0;
        for (int r = 0; r < M; r++) for (int c = 0; c < N; c++) s += w[r][c][x] ? vpd[r][c] : -vpd[r][c];
        chk(act[x] == (s > 0), $sformatf("act[%0d]", x));
      end
    end
    chk(npos > 0 && nneg > 0, "both signs exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
