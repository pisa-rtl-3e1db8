// cmd_decoder: command decoder of the PISA sensor. One command per clock is
// accepted with cmd_valid (cmd_ready high):
//   CMD_WRITE_W - program one compute-pixel NVM bit (row, col, index, value);
//                 produces a one-clock w_we towards the array's write drivers.
//   CMD_PROCESS - start one integrated sensing-processing frame.
//   CMD_SENSE   - start one sensing-only frame.
// While a frame is running (busy from the timing controller) cmd_ready is low;
// a command offered anyway is dropped and flagged by a one-clock 'err'.
// The paper names the block only; encodings and the ready/err rules are this
// design's choices. Outputs are registered.
module cmd_decoder
  import pisa_pkg::*;
#(
  parameter int unsigned M = 128,
  parameter int unsigned N = 128,
  parameter int unsigned V = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 cmd_valid,
  input  pisa_cmd_e            cmd,
  input  logic [$clog2(M)-1:0] a_row,
  input  logic [$clog2(N)-1:0] a_col,
  input  logic [$clog2(V)-1:0] a_idx,
  input  logic                 a_val,
  input  logic                 busy,
  output logic                 cmd_ready,
  output logic                 start_process,
  output logic                 start_sense,
  output logic                 w_we,
  output logic [$clog2(M)-1:0] w_row,
  output logic [$clog2(N)-1:0] w_col,
  output logic [$clog2(V)-1:0] w_idx,
  output logic                 w_val,
  output logic                 err
);
  logic pending;   // a start was just issued and busy has not risen yet

  assign cmd_ready = !busy && !pending;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      start_process <= 1'b0;
      start_sense   <= 1'b0;
      w_we          <= 1'b0;
      w_row         <= '0;
      w_col         <= '0;
      w_idx         <= '0;
      w_val         <= 1'b0;
      err           <= 1'b0;
      pending       <= 1'b0;
    end else begin
      start_process <= 1'b0;
      start_sense   <= 1'b0;
      w_we          <= 1'b0;
      err           <= 1'b0;
      if (busy) pending <= 1'b0;
      if (cmd_valid) begin
        if (!cmd_ready) begin
          err <= (cmd != CMD_NOP);
        end else begin
          unique case (cmd)
            CMD_WRITE_W: begin
              w_we  <= 1'b1;
              w_row <= a_row;
              w_col <= a_col;
              w_idx <= a_idx;
              w_val <= a_val;
            end
            CMD_PROCESS: begin start_process <= 1'b1; pending <= 1'b1; end
            CMD_SENSE:   begin start_sense   <= 1'b1; pending <= 1'b1; end
            default: ;
          endcase
        end
      end
    end
  end
endmodule
