// pisa_pkg: constants and types shared by the sensor array (PISA) and the
// near-sensor processing-in-DRAM unit (PNS).
//
// What follows the paper: a DRAM sub-array has 512 rows of which 500 are
// ordinary data rows and 12 are compute rows reached through the modified row
// decoder; in-memory logic is a dual-row activation (DRA) that yields NAND2 on
// the add-on inverter and AND2 written back into both cells; multi-bit
// convolution is sum_{m,n} 2^(m+n) * bitcount(AND(C_n(W), C_m(I))), with
// weight:input precisions up to 1:32.
// This design's own choices: the command encodings, the 8-bit code that stands
// for a photodiode voltage, the batch-normalisation/activation arithmetic and
// the job descriptor layout.
package pisa_pkg;

  // ---------------- sensor side ----------------
  // Width of the digital code that stands for a photodiode voltage V_PD
  // (all ones = pixel fully precharged to VDD).
  localparam int unsigned PIX_W = 8;

  // Commands accepted by the PISA command decoder.
  typedef enum logic [1:0] {
    CMD_NOP     = 2'd0,
    CMD_WRITE_W = 2'd1,   // program one binary weight into a compute-pixel NVM
    CMD_PROCESS = 2'd2,   // one integrated sensing-processing frame (global shutter)
    CMD_SENSE   = 2'd3    // one sensing-only frame (rolling shutter, CDS readout)
  } pisa_cmd_e;

  typedef enum logic {
    MODE_SENSE   = 1'b0,
    MODE_PROCESS = 1'b1
  } pisa_mode_e;

  // ---------------- PNS side ----------------
  localparam int unsigned SUB_ROWS  = 512;  // rows per computational sub-array
  localparam int unsigned DATA_ROWS = 500;  // rows on the regular row decoder
  localparam int unsigned COMP_ROWS = 12;   // rows on the modified row decoder
  localparam int unsigned ROW_AW    = 9;    // row address width
  localparam int unsigned MAX_BITS  = 32;   // widest operand precision (W:I up to 1:32)
  localparam int unsigned BITS_W    = 6;    // holds 1..MAX_BITS

  // Compute rows used by the convolution sequence (offsets into the compute region).
  localparam int unsigned X1 = 0;
  localparam int unsigned X2 = 1;

  // One memory-cycle operation of a computational sub-array.
  typedef enum logic [2:0] {
    OP_NOP   = 3'd0,
    OP_READ  = 3'd1,  // single-row activation, row latched in the sense amplifiers
    OP_WRITE = 3'd2,  // write a whole row
    OP_WBIT  = 3'd3,  // write one bit of a row (read-modify-write of one column)
    OP_COPY  = 3'd4,  // copy row_a into row_b inside the sub-array
    OP_DRA   = 3'd5   // dual-row activation of two compute rows: NAND2/AND2
  } dram_op_e;

  // Activation applied by the DPU after batch normalisation.
  typedef enum logic {
    ACT_SIGN = 1'b0,  // binary activation: 1 when the normalised value is > 0
    ACT_QREL = 1'b1   // clipped ReLU quantised to out_bits bits
  } act_mode_e;

  // Descriptor of one bit-wise convolution job run on every sub-array in lock-step.
  typedef struct packed {
    logic [ROW_AW-1:0] w_row;     // first row of the weight bit-planes C_0(W)..
    logic [ROW_AW-1:0] i_row;     // first row of the input bit-planes C_0(I)..
    logic [BITS_W-1:0] w_bits;    // N: weight precision, 1..MAX_BITS
    logic [BITS_W-1:0] i_bits;    // M: input precision, 1..MAX_BITS
    logic [ROW_AW-1:0] out_row;   // first row of the output bit-planes
    logic [7:0]        out_col;   // column the output element is written to
    logic [3:0]        out_bits;  // output precision (1..8)
    act_mode_e         act;       // activation function
    logic signed [15:0] bn_scale; // batch-norm gain
    logic signed [31:0] bn_bias;  // batch-norm offset
    logic [5:0]        bn_shift;  // right shift applied after gain and offset
  } pns_job_t;

  // Saturating floor(a - b) for unsigned codes.
  function automatic logic [PIX_W-1:0] sat_sub(input logic [PIX_W-1:0] a,
                                               input logic [PIX_W-1:0] b);
    return (a > b) ? a - b : '0;
  endfunction

endpackage
