// yoloc_pkg: sizes, types and the ROM programming function shared by the
// YOLoC computing-in-memory (CiM) design.
//
// Geometry that follows the paper: a CiM array of 128 word lines x 256 bit
// lines, 16 column-shared 5-bit ADCs, 8-bit activations times 8-bit weights,
// 2-bit activation digits applied to the word lines as 0..3 unary pulses.
// Everything else here is this design's own choice: how many rows are switched
// on together (8), the column order of a weight's bits, the accumulator width,
// the command set of the chip controller and the hash that stands in for the
// mask-programmed ROM contents.
package yoloc_pkg;

  // ---- CiM array and peripheral geometry ----
  localparam int unsigned ROWS        = 128;  // word lines per array (paper, Fig. 5)
  localparam int unsigned COLS        = 256;  // bit lines per array (paper, Fig. 5)
  localparam int unsigned N_ADC       = 16;   // column-shared ADCs (paper, Fig. 5)
  localparam int unsigned ADC_BITS    = 5;    // ADC resolution (paper, Sec. 3.1)
  localparam int unsigned ACT_BITS    = 8;    // activation width (paper, Table I)
  localparam int unsigned W_BITS      = 8;    // weight width (paper, Table I)
  localparam int unsigned DIG_BITS    = 2;    // bits per unary-coded input digit (paper, Sec. 3.1)
  localparam int unsigned N_DIG       = ACT_BITS / DIG_BITS;  // digits per activation
  localparam int unsigned PULSES      = (1 << DIG_BITS) - 1;  // WL pulses per digit (3)
  localparam int unsigned ACTIVE_ROWS = 8;    // rows driven together (assumed)
  localparam int unsigned N_OUT       = COLS / W_BITS;        // 8-bit weights per row (32)
  localparam int unsigned COLS_PER_ADC = COLS / N_ADC;        // columns sharing one ADC (16)
  localparam int unsigned BL_W        = $clog2(ROWS * PULSES + 1); // discharge-count width
  localparam int unsigned ACC_W       = 32;   // shift-and-add accumulator width (assumed)
  localparam int unsigned GROUPS      = ROWS / ACTIVE_ROWS;   // row groups per array (16)
  localparam int unsigned LANES       = ACTIVE_ROWS;          // activations per cache word (8)
  localparam int unsigned CWORD_W     = LANES * ACT_BITS;     // cache word width (64)
  localparam int unsigned CACHE_DEPTH = 4096; // cache words (assumed)
  localparam int unsigned CADDR_W     = $clog2(CACHE_DEPTH);
  localparam int unsigned SRAM_WR_W   = 32;   // SRAM-CiM weight write width (assumed)

  typedef logic [ACT_BITS-1:0]     act_t;
  typedef logic signed [ACC_W-1:0] acc_t;
  typedef logic [CWORD_W-1:0]      cword_t;

  // ---- Chip controller command set (this design's own) ----
  typedef enum logic [2:0] {
    OP_NOP  = 3'd0,  // nothing
    OP_CWR  = 3'd1,  // host writes one cache word
    OP_CRD  = 3'd2,  // host reads one cache word (answered on the response port)
    OP_SWR  = 3'd3,  // host writes 32 weight bits into the SRAM-CiM (power-on load)
    OP_MVM  = 3'd4,  // one macro operation: 8 activations x one row group
    OP_WB   = 3'd5,  // requantise 8 macro outputs (activation function) into the cache
    OP_POOL = 3'd6   // element-wise max of two cache words (max pooling step)
  } op_e;

  typedef struct packed {
    op_e                  op;
    logic [1:0]           macro;      // 0..N_ROM-1: ROM-CiM, N_ROM: SRAM-CiM
    logic [3:0]           group;      // row group (word lines 8*group .. 8*group+7)
    logic                 in_signed;  // activations are two's complement
    logic                 acc_clear;  // start a new sum (else add onto the last one)
    logic [CADDR_W-1:0]   addr_a;     // source cache word
    logic [CADDR_W-1:0]   addr_b;     // second source (POOL)
    logic [CADDR_W-1:0]   addr_d;     // destination cache word
    logic [1:0]           lane_blk;   // WB: outputs 8*lane_blk .. 8*lane_blk+7
    logic [4:0]           shift;      // WB: arithmetic right shift
    logic                 relu;       // WB: clamp negatives to zero
    logic                 out_signed; // WB/POOL: 8-bit result is signed
    logic [6:0]           srow;       // SWR: SRAM-CiM row
    logic [2:0]           sword;      // SWR: 32-bit word within the row
    logic [CWORD_W-1:0]   data;       // CWR/SWR payload
  } cmd_t;

  // Content of the mask-programmed ROM: bit (row, col) of ROM array `seed`.
  // '1' = cell gate fused to the word line, '0' = gate grounded. A fixed hash
  // stands in for the pretrained weights that a real mask would hold.
  function automatic logic rom_bit(input int unsigned seed, input int unsigned row,
                                   input int unsigned col);
    logic [31:0] h;
    h = (row * 32'h9E3779B1) ^ (col * 32'h85EBCA77) ^ (seed * 32'hC2B2AE3D);
    h = h ^ (h >> 15);
    h = h * 32'h2C1B3C6D;
    h = h ^ (h >> 12);
    return h[7];
  endfunction

endpackage
