// dram_subarray: one computational DRAM sub-array of the PNS unit.
//
// Organisation (paper): ROWS = 512 rows of COLS cells; rows 0..DATA_ROWS-1
// (500) are data rows on the regular row decoder, the remaining 12 are compute
// rows on the modified row decoder (mrd), which can open two of them at once.
// Every column ends in a reconfigurable sense amplifier (recon_sa).
//
// Each operation takes one memory cycle (one clock):
//  OP_READ  row_a -> SA latch 'rdata' (memory mode of the SA).
//  OP_WRITE wdata -> row_a.
//  OP_WBIT  wbit  -> row_a[col] (other columns unchanged).
//  OP_COPY  row_a -> row_b, through the SAs (also latched in rdata). Used to
//           bring operands into the compute rows so that DRA never destroys
//           the original data, as the paper requires.
//  OP_DRA   dual-row activation of compute rows row_a and row_b: charge
//           sharing, then the high-V_s inverter yields NAND2 (latched in
//           'rnand') and AND2 is written back into both rows and latched in
//           'rdata'.
// Timing: memory contents and latches update on the rising edge; rdata/rnand
// hold until the next READ/COPY/DRA. The cells are not reset (DRAM); the
// latches are.
// Follows the paper: 500/12 row split, single-cycle DRA with NAND2 result and
// in-place write-back. Own choices: the one-cycle in-array row copy (the paper
// says operands "are copied" without saying how) and the bit-write operation.
module dram_subarray
  import pisa_pkg::*;
#(
  parameter int unsigned ROWS  = SUB_ROWS,
  parameter int unsigned DROWS = DATA_ROWS,
  parameter int unsigned COLS  = 256,
  localparam int unsigned CROWS = ROWS - DROWS,
  localparam int unsigned RAW   = $clog2(ROWS),
  localparam int unsigned CAW   = $clog2(COLS)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  dram_op_e        op,
  input  logic [RAW-1:0]  row_a,
  input  logic [RAW-1:0]  row_b,
  input  logic [CAW-1:0]  col,
  input  logic [COLS-1:0] wdata,
  input  logic            wbit,
  output logic [COLS-1:0] rdata,
  output logic [COLS-1:0] rnand
);
  logic [COLS-1:0]  mem [ROWS];
  logic [COLS-1:0]  bl, nand_v;
  logic [CROWS-1:0] wl;
  logic             is_dra;

  assign is_dra = (op == OP_DRA);

  mrd #(.CROWS(CROWS)) u_mrd (
    .en     (is_dra),
    .dual   (1'b1),
    .addr_a ($clog2(CROWS)'(row_a - RAW'(DROWS))),
    .addr_b ($clog2(CROWS)'(row_b - RAW'(DROWS))),
    .wl     (wl)
  );

  recon_sa #(.COLS(COLS)) u_sa (
    .en_m   (op == OP_READ || op == OP_COPY),
    .en_l   (is_dra),
    .en_a   (is_dra),
    .dual   (is_dra),
    .cell_a (mem[row_a]),
    .cell_b (mem[row_b]),
    .bl_o   (bl),
    .nand_o (nand_v)
  );

  always_ff @(posedge clk) begin
    unique case (op)
      OP_WRITE: mem[row_a] <= wdata;
      OP_WBIT:  mem[row_a][col] <= wbit;
      OP_COPY:  mem[row_b] <= bl;
      OP_DRA:   for (int k = 0; k < CROWS; k++) if (wl[k]) mem[DROWS + k] <= bl;
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rdata <= '0;
      rnand <= '0;
    end else if (op == OP_READ || op == OP_COPY || op == OP_DRA) begin
      rdata <= bl;
      rnand <= nand_v;
    end
  end

  // DRA only on two distinct compute rows, so data rows are never overwritten.
  a_dra_rows: assert property (@(posedge clk) disable iff (!rst_n)
    is_dra |-> (row_a >= RAW'(DROWS) && row_b >= RAW'(DROWS) && row_a != row_b
                && int'(row_a) < ROWS && int'(row_b) < ROWS));
endmodule
