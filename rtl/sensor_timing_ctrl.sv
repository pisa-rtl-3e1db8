// sensor_timing_ctrl: sensor timing controller of PISA. It sequences one frame
// in either mode and drives row_ctrl, the CFP exposure / sense clock, the CDS
// switches of the sensor I/O and the column controller.
//
// Processing frame (global shutter, Fig. 11 behaviour): all rows are reset
// (Rst high, photodiodes precharged to VDD), the array integrates for EXP
// clocks with CR active and the sense amplifiers precharging (sa_clk high),
// then sa_clk goes low for one clock: the SAs evaluate sign(I_CBL) on that
// falling edge. Length: EXP + 4 clocks from start to done.
//   P_RST(1) P_GAP(1) P_EXP(EXP) P_SENSE(1) P_END(1, done)
// Sensing frame (rolling shutter with correlated double sampling), per row r:
//   S_RRST(1) S_GAP(1) S_K1A(1) S_K1B(1, k1) S_EXP(EXP) S_K2A(1) S_K2B(1, k2)
//   S_COL(1, col_start) S_COLW(until col_done)
// so a frame lasts M*(EXP + 7 + N) clocks, first state and done clock included.
// The extra *A/*GAP clocks let the registered row_ctrl outputs settle before a
// sample is taken.
// Follows the paper: reset then exposure then sign evaluation at the SA clock's
// falling edge in processing mode, CR low and one row at a time with k1 then
// k2 in sensing mode. Own choices: the state lengths, 'expose' gated to the
// exposure window, and the handshakes.
module sensor_timing_ctrl
  import pisa_pkg::*;
#(
  parameter int unsigned M   = 128,
  parameter int unsigned EXP = 16   // exposure length in clocks
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start_process,
  input  logic                 start_sense,
  input  logic                 col_done,
  output pisa_mode_e           mode,
  output logic                 rst_req,
  output logic                 row_en,
  output logic [$clog2(M)-1:0] row_addr,
  output logic                 cr_en,
  output logic                 expose,
  output logic                 sa_clk,
  output logic                 k1,
  output logic                 k2,
  output logic                 col_start,
  output logic                 busy,
  output logic                 done
);
  typedef enum logic [3:0] {
    IDLE, P_RST, P_GAP, P_EXP, P_SENSE, P_END,
    S_RRST, S_GAP, S_K1A, S_K1B, S_EXP, S_K2A, S_K2B, S_COL, S_COLW
  } state_e;

  state_e                 st;
  logic [$clog2(EXP+1)-1:0] cnt;
  logic [$clog2(M)-1:0]   row;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= IDLE;
      cnt  <= '0;
      row  <= '0;
      mode <= MODE_PROCESS;
    end else begin
      unique case (st)
        IDLE: begin
          if (start_process) begin
            st <= P_RST; mode <= MODE_PROCESS;
          end else if (start_sense) begin
            st <= S_RRST; mode <= MODE_SENSE; row <= '0;
          end
        end
        P_RST:   st <= P_GAP;
        P_GAP:   begin st <= P_EXP; cnt <= '0; end
        P_EXP:   begin
          cnt <= cnt + 1'b1;
          if (cnt == $bits(cnt)'(EXP-1)) st <= P_SENSE;
        end
        P_SENSE: st <= P_END;
        P_END:   st <= IDLE;
        S_RRST:  st <= S_GAP;
        S_GAP:   st <= S_K1A;
        S_K1A:   st <= S_K1B;
        S_K1B:   begin st <= S_EXP; cnt <= '0; end
        S_EXP:   begin
          cnt <= cnt + 1'b1;
          if (cnt == $bits(cnt)'(EXP-1)) st <= S_K2A;
        end
        S_K2A:   st <= S_K2B;
        S_K2B:   st <= S_COL;
        S_COL:   st <= S_COLW;
        S_COLW:  if (col_done) begin
          if (row == $clog2(M)'(M-1)) st <= IDLE;
          else begin row <= row + 1'b1; st <= S_RRST; end
        end
        default: st <= IDLE;
      endcase
    end
  end

  always_comb begin
    rst_req   = (st == P_RST) || (st == S_RRST);
    row_en    = (st == S_K1A) || (st == S_K1B) || (st == S_K2A) || (st == S_K2B);
    row_addr  = row;
    cr_en     = (st == P_EXP) || (st == P_SENSE);
    expose    = (st == P_EXP) || (st == S_EXP);
    sa_clk    = (st != P_SENSE);
    k1        = (st == S_K1B);
    k2        = (st == S_K2B);
    col_start = (st == S_COL);
    busy      = (st != IDLE);
    done      = (st == P_END) || (st == S_COLW && col_done && row == $clog2(M)'(M-1));
  end
endmodule
