// fat_pkg -- types and constants shared by the ternary-weight in-memory
// accelerator.
//
// Geometry defaults follow the paper's main configuration: 4096 Computing
// Memory Arrays (CMAs) of 512 rows x 256 columns, 8-bit activations stored
// column-major (bit k of an operand in row base+k), and 32 activation slots
// per CMA, each followed by a reserved interval of the same height that holds
// intermediate sums. Two hard-wired reference rows sit after the data rows:
// an all-zero row (address ROWS) and an all-ones row (address ROWS+1); the
// all-ones row is the "row filled with 1s" that turns XOR into NOT. Their
// placement outside the 512 data rows is this design's choice.
//
// Ternary weights use the paper's sign/data encoding: +1 = 01, 0 = 00,
// -1 = 11. The data bit masks the row, the sign bit selects add or subtract.
// Modules that import the package but use only some of its constants make
// the linter list the others as unused parameters (UNUSEDPARAM).
package fat_pkg;

  localparam int unsigned ROWS_DEF     = 512;
  localparam int unsigned COLS_DEF     = 256;
  localparam int unsigned ACT_BITS_DEF = 8;   // activation width
  localparam int unsigned PSUM_BITS_DEF = 8;  // reserved interval height = one operand
  localparam int unsigned NUM_CMA_DEF  = 4096;

  // Row address field used in commands (wide enough for any ROWS+2 up to 64K).
  localparam int unsigned RA_W = 16;
  typedef logic [RA_W-1:0] row_addr_t;

  // Ternary weight encoding {sign, data}
  typedef logic [1:0] tw_t;
  localparam tw_t W_POS  = 2'b01;
  localparam tw_t W_ZERO = 2'b00;
  localparam tw_t W_NEG  = 2'b11;

  // Operations the sense amplifier performs natively.
  typedef enum logic [2:0] {
    SA_READ = 3'd0,
    SA_NOT  = 3'd1,
    SA_AND  = 3'd2,
    SA_NAND = 3'd3,
    SA_OR   = 3'd4,
    SA_XOR  = 3'd5,
    SA_ADD  = 3'd6
  } sa_op_e;

  // Enable and selector signals of the sense amplifier.
  typedef struct packed {
    logic en_read;
    logic en_and;
    logic en_or;
    logic sel1;
    logic sel2;
  } sa_ctrl_t;

  // Instructions accepted by a CMA's memory controller.
  typedef enum logic [3:0] {
    CMD_NOP     = 4'd0,
    CMD_WRITE   = 4'd1,  // write a row (masked by the column range)
    CMD_READ    = 4'd2,  // read a row through the SA
    CMD_BOOL    = 4'd3,  // NOT/AND/NAND/OR/XOR of rows a,b -> row d (optional)
    CMD_ADD     = 4'd4,  // bit-serial vector add, nbits rows each
    CMD_SUB     = 4'd5,  // a - b = a + NOT b + 1 (NOT written to d first)
    CMD_LOAD_W  = 4'd6,  // load the SACU weight registers
    CMD_DOT     = 4'd7,  // sparse ternary dot product over the loaded weights
    CMD_READOUT = 4'd8   // read the dot-product result into the reduction unit
  } cmd_e;

  typedef struct packed {
    cmd_e       cmd;
    sa_op_e     op;       // CMD_BOOL: which Boolean function
    logic       wb;       // CMD_BOOL: write the result to row_d
    row_addr_t  row_a;
    row_addr_t  row_b;
    row_addr_t  row_d;
    logic [5:0] nbits;    // CMD_ADD/CMD_SUB: operand width in rows
    logic       cin;      // CMD_ADD: initial carry
    logic [15:0] col_lo;  // enabled column range (inclusive)
    logic [15:0] col_hi;
    logic [3:0] red_log2; // CMD_READOUT: sum groups of 2**red_log2 columns
  } cma_cmd_t;

  // One bit-serial vector operation executed by the memory controller.
  // Operand rows are base + min(k, len-1): an operand shorter than the
  // operation is sign-extended by re-reading its top row.
  typedef struct packed {
    sa_op_e    op;
    row_addr_t base_a;
    logic [5:0] len_a;
    row_addr_t base_b;
    logic [5:0] len_b;
    row_addr_t base_d;
    logic [5:0] nbits;
    logic      cin;
    logic      wb;      // write the OUT row back to base_d + k
    logic      to_red;  // deliver the OUT row to the reduction unit
  } vop_t;

  function automatic int unsigned clog2c(int unsigned v);
    return (v <= 1) ? 1 : $clog2(v);
  endfunction

endpackage
