// tb_pns_ctrl: the controller's command trace for several job shapes on four
// sub-arrays. Checks, step by step, the operand rows of every COPY and DRA,
// that every (n, m) pair is visited once with shift m+n, that each sub-array's
// result row is loaded into its LRB and accumulated, that write-back puts bit b
// of that sub-array's activation into row out_row+b, and the job length
// 2 + w_bits*i_bits*(3 + 2*NSUB) + NSUB*out_bits clocks.
module tb_pns_ctrl;
  import pisa_pkg::*;
  localparam int NSUB = 4, DROWS = 500;
  logic clk = 0, rst_n = 0, start = 0;
  pns_job_t job;
  dram_op_e c_op;
  logic c_all, c_wbit, lrb_load, acc_clr, acc_en, busy, done;
  logic [1:0] c_sub;
  logic [ROW_AW-1:0] c_row_a, c_row_b;
  logic [7:0] c_col, act_out;
  logic [6:0] shift;
  pns_job_t job_q;
  int checks = 0, failures = 0;

  pns_ctrl #(.NSUB(NSUB), .DROWS(DROWS)) dut (.*);
  assign act_out = 8'(8'hA5 ^ (c_sub * 8'd37));   // a distinct activation per sub-array
  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input logic ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run_job(input int wb, input int ib, input int ob);
    automatic int cyc = 1, pairs = 0, lds = 0, accs = 0, wbs = 0, clr = 0;
    automatic int n = 0, m = 0, expect_step = 0, s_exp = 0, b_exp = 0;
    job = '0;
    job.w_row = 9'($urandom_range(0, 100)); job.i_row = 9'($urandom_range(200, 300));
    job.w_bits = 6'(wb); job.i_bits = 6'(ib); job.out_bits = 4'(ob);
    job.out_row = 9'($urandom_range(400, 450)); job.out_col = 8'($urandom);
    start = 1; @(negedge clk); start = 0;
    while (!done) begin
      if (acc_clr) clr++;
      case (c_op)
        OP_COPY: begin
          chk(c_all, "copy broadcast");
          if (expect_step == 0) begin
            chk(c_row_a == job.w_row + 9'(n) && c_row_b == 9'(DROWS + X1), "CPW rows");
            expect_step = 1;
          end else begin
            chk(expect_step == 1 && c_row_a == job.i_row + 9'(m) && c_row_b == 9'(DROWS + X2), "CPI rows");
            expect_step = 2;
          end
        end
        OP_DRA: begin
          chk(expect_step == 2 && c_all && c_row_a == 9'(DROWS + X1) && c_row_b == 9'(DROWS + X2), "DRA rows");
          expect_step = 3; pairs++; s_exp = 0;
        end
        OP_WBIT: begin
          chk(!c_all && c_sub == 2'(s_exp) && c_row_a == job.out_row + 9'(b_exp) && c_col == job.out_col, "WB address");
          chk(c_wbit == act_out[b_exp], "WB bit");
          wbs++;
          b_exp++; if (b_exp == ob) begin b_exp = 0; s_exp++; end
        end
        default: ;
      endcase
      if (lrb_load) begin chk(expect_step == 3 && c_sub == 2'(s_exp), "LRB load order"); lds++; end
      if (acc_en) begin
        chk(c_sub == 2'(s_exp) && shift == 7'(m + n), $sformatf("ACC sub %0d shift %0d", c_sub, shift));
        accs++; s_exp++;
        if (s_exp == NSUB) begin
          expect_step = 0; s_exp = 0;
          m++; if (m == ib) begin m = 0; n++; end
        end
      end
      @(negedge clk); cyc++;
    end
    chk(clr == 1, "accumulators cleared once");
    chk(pairs == wb * ib, "every bit pair once");
    chk(lds == wb * ib * NSUB && accs == wb * ib * NSUB, "LRB loads and accumulations");
    chk(wbs == NSUB * ob, "write-backs");
    chk(cyc == 2 + wb * ib * (3 + 2 * NSUB) + NSUB * ob, $sformatf("job length %0d", cyc));
    chk(!busy, "idle after done");
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    run_job(1, 1, 1);
    run_job(1, 4, 2);
    run_job(3, 3, 8);
    run_job(1, 32, 1);
    run_job(2, 1, 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
