// imodhd_pkg -- types shared by the IM-ODHD compute-in-memory mat.
//
// The mat is an array of SRAM subarrays (processing elements, PEs). Every
// clock cycle a PE senses one or two of its rows, lets its customized sense
// amplifier (CSA) combine them, passes the result through a 0..3-bit
// logarithmic shifter and may write the outcome back into one of its rows.
// This package holds the encodings of those operations, of the mat-level
// bus moves and of the per-PE command word.
//
// The set of operations (read/NOT, AND/OR, pointwise multiplication as XOR,
// add, subtract via NOT + add with carry-in, shift) follows the paper's
// operation table. The numeric encodings, the bit order of the 3-bit shift
// mask (bit 2 = direction, bits 1:0 = amount) and the command word layout
// are this design's own choices.
package imodhd_pkg;

  // Row address width for the paper's large PE (M = 1024 rows). PEs with
  // fewer rows use the low $clog2(M) bits.
  localparam int unsigned ROW_AW = 10;

  // Operation of the customized sense amplifier.
  typedef enum logic [2:0] {
    CSA_READ = 3'd0,  // row X
    CSA_NOT  = 3'd1,  // ~row X (read from the bitline-bar side)
    CSA_AND  = 3'd2,  // row X & row Y
    CSA_OR   = 3'd3,  // row X | row Y
    CSA_XOR  = 3'd4,  // row X ^ row Y (pointwise product of bipolar HVs)
    CSA_ADD  = 3'd5   // row X + row Y + cin, as N-bit numbers
  } csa_op_e;

  // What the PE writes into row W at the end of the cycle.
  typedef enum logic [1:0] {
    WR_NONE = 2'd0,   // nothing
    WR_COPY = 2'd1,   // copy driver: the shifter output (local write)
    WR_DATA = 2'd2    // write driver: data arriving on the mat-level bus
  } wr_sel_e;

  // Which of the two broadcast commands a PE executes this cycle.
  typedef enum logic [1:0] {
    ROLE_IDLE = 2'd0,
    ROLE_CMD0 = 2'd1,
    ROLE_CMD1 = 2'd2
  } pe_role_e;

  // Operation of a mat-level bus and its register.
  typedef enum logic [1:0] {
    BUS_IDLE        = 2'd0,
    BUS_PE_TO_REG   = 2'd1,  // selected PE's shifter output -> register
    BUS_REG_TO_PE   = 2'd2,  // register -> selected PE's write driver
    BUS_HOST_TO_REG = 2'd3   // external data -> register
  } bus_op_e;

  // 3-bit shift mask of one PE.
  typedef struct packed {
    logic       left;  // 1: shift towards the MSB, 0: towards the LSB
    logic [1:0] amt;   // 0..3 bit positions
  } shift_mask_t;

  // Command executed by a PE in one cycle.
  typedef struct packed {
    csa_op_e           op;
    logic              cin;    // carry into bit 0 for CSA_ADD
    wr_sel_e           wr;
    logic [ROW_AW-1:0] row_x;  // word line decoder X
    logic [ROW_AW-1:0] row_y;  // word line decoder Y (two-row operations)
    logic [ROW_AW-1:0] row_w;  // row written by the write/copy driver
  } pe_cmd_t;

  // Rows a permutation uses inside every PE of the hypervector's group.
  typedef struct packed {
    logic [ROW_AW-1:0] row_i;        // the hypervector slice (left intact)
    logic [ROW_AW-1:0] row_mask_lo;  // mask with 1s in the m least significant bits
    logic [ROW_AW-1:0] row_mask_hi;  // mask with 1s in the N-m most significant bits
    logic [ROW_AW-1:0] row_sp1;      // 1st spare row (shifted own bits / scratch)
    logic [ROW_AW-1:0] row_sp2;      // 2nd spare row (bits received from the neighbour)
    logic [ROW_AW-1:0] row_sp3;      // 3rd spare row j (permuted slice)
    logic [ROW_AW-1:0] row_out;      // row receiving the result when copy_out is set
    logic              copy_out;
  } perm_rows_t;

  // True for operations that activate both word lines.
  function automatic logic two_rows(csa_op_e op);
    return (op == CSA_AND) || (op == CSA_OR) || (op == CSA_XOR) || (op == CSA_ADD);
  endfunction

endpackage
