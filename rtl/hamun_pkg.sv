// hamun_pkg: sizes and shared types of the Hamun ReRAM accelerator.
// The crossbar geometry (128x128 cells, 2 bits per cell, 8-bit weights in
// four cells), the PE shape (6 x 4 APUs), the 64 PEs, the 16 ADCs of 6 bits
// per APU, the 1.5 KB PE buffers, the 96-cycle crossbar computation, the
// 6000-cycle row write and the 16-bank transposing group follow the paper's
// evaluated configuration. Widths of partial sums, the command encoding of
// the PE and the depth of buffers the paper does not size are this design's
// own choices and are marked as such below.
package hamun_pkg;
  // ---- crossbar / APU (paper) ----
  localparam int XB_ROWS      = 128;   // crossbar rows
  localparam int XB_COLS      = 128;   // crossbar columns
  localparam int CELL_BITS    = 2;     // bits per ReRAM cell
  localparam int W_BITS       = 8;     // weight precision
  localparam int CELLS_PER_W  = W_BITS / CELL_BITS;   // 4
  localparam int W_PER_ROW    = XB_COLS / CELLS_PER_W; // 32 weights per row
  localparam int ACT_BITS     = 8;     // activation precision (bit-serial)
  localparam int N_ADC        = 16;    // ADCs per APU
  localparam int ADC_BITS     = 6;     // ADC sampling precision
  localparam int ADC_STEPS    = XB_COLS / N_ADC;       // 8 conversions per bit
  // own choice: crossbar settle + sample-and-hold cycles per activation bit,
  // picked so that 8 bits x (4 + 8) = 96 cycles, the paper's computation latency
  localparam int XB_READ_CYC  = 4;
  localparam int XB_CMP_CYC   = ACT_BITS * (XB_READ_CYC + ADC_STEPS); // 96
  localparam int ROW_WR_CYC   = 6000;  // crossbar row writing latency
  // ---- PE / chip (paper) ----
  localparam int PE_M         = 6;     // APU rows per PE
  localparam int PE_N         = 4;     // APU columns per PE
  localparam int N_PE         = 64;
  localparam int LINE_W       = 128;   // buffer / NoC line, 16 bytes
  localparam int LINE_BYTES   = LINE_W / 8;
  localparam int BUF_BYTES    = 1536;  // PE buffer size
  localparam int BUF_LINES    = BUF_BYTES / LINE_BYTES; // 96
  localparam int TB_BANKS     = 16;    // transposing bank group banks
  // ---- own choices ----
  localparam int PSUM_W       = 24;    // partial sum width (128 x 8b x 8b fits)
  localparam int OBUF_DEPTH   = 16;    // output buffer entries

  typedef logic signed [PSUM_W-1:0] psum_t;
  typedef psum_t apu_out_t [W_PER_ROW];

  // PE command (own encoding; the paper's instruction format is not given)
  typedef enum logic [1:0] {
    OP_SET_MASK  = 2'd0,   // load mask register of APU (row, col)
    OP_WRITE_ROW = 2'd1,   // write one crossbar row in every APU of a PE row
    OP_COMPUTE   = 2'd2    // bit-serial dot product over selected PE rows
  } pe_op_e;

  typedef struct packed {
    pe_op_e                    op;
    logic [2:0]                pe_row;    // PE row (SET_MASK / WRITE_ROW)
    logic [1:0]                pe_col;    // APU column (SET_MASK)
    logic [PE_M-1:0]           row_en;    // PE rows taking part (COMPUTE)
    logic [6:0]                xb_row;    // logical crossbar row (WRITE_ROW)
    logic [6:0]                buf_addr;  // first buffer line used
    logic [3:0]                out_addr;  // output buffer entry (COMPUTE)
    logic [XB_COLS-1:0]        mask;      // 1 = column retired (SET_MASK)
  } pe_cmd_t;

  // kinds of 16-byte line delivered to a PE by the network
  typedef enum logic [0:0] {
    LK_DIRECT = 1'b0,      // weights: straight into the buffer
    LK_ACT    = 1'b1       // activations: through the shift register set
  } line_kind_e;

  typedef struct packed {
    logic [6:0]  row;      // physical crossbar row
    logic [XB_COLS-1:0] cols; // faulty columns found in that row write
  } fault_t;

  // fault record leaving a PE, and leaving the chip (own format)
  typedef struct packed {
    logic [2:0] apu_row;
    logic [1:0] apu_col;
    fault_t     f;
  } pe_fault_t;

  typedef struct packed {
    logic [5:0] pe;
    pe_fault_t  pf;
  } chip_fault_t;
endpackage
