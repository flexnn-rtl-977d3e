// flexnn_pkg: constants, enums and descriptor structs shared by the FlexNN
// accelerator RTL.
//
// The array size (16 x 16 PEs), the four MAC lanes and 16-byte register-file
// subbanks per PE, the 16-entry OF register file, the 32-bit psum width, the
// four super columns and the 32-byte SRAM line follow the paper. The layout of
// the layer descriptor (which fields exist, their widths and order) is this
// design's own: software writes it through config_regs before a layer starts.
package flexnn_pkg;

  localparam int N         = 16;  // PE rows per column and number of columns
  localparam int LANES     = 4;   // MACs / RF subbanks per PE
  localparam int SUB_BYTES = 16;  // bytes per IF/FL compressed-data subbank
  localparam int OF_DEPTH  = 16;  // OF RF entries per PE
  localparam int PSUM_W    = 32;  // psum width
  localparam int N_SC      = 4;   // super columns
  localparam int COLS_PER_SC = 4;
  localparam int LINE_BYTES = 32; // SRAM line width
  localparam int ADDR_W    = 16;  // SRAM line address width
  localparam int N_TAPS    = 15;  // FlexTree output tap registers A..O

  // PE operation (descriptor field)
  typedef enum logic [1:0] {
    OP_MAC     = 2'd0,
    OP_ELTWISE = 2'd1,
    OP_POOL    = 2'd2
  } op_e;

  // Command issued by the column control block to every PE of the array
  typedef enum logic [2:0] {
    PE_NOP      = 3'd0,
    PE_SWAP     = 3'd1,  // shadow IF/FL RFs become active
    PE_CLEAR    = 3'd2,  // clear the active OF RF
    PE_COMPUTE  = 3'd3,  // run MAC / eltwise / pool on the active RFs
    PE_ACCUM    = 3'd4,  // OF[acc_idx] += neighbour or external psum
    PE_SNAPSHOT = 3'd5   // copy active OF RF to shadow OF RF and clear it
  } pe_cmd_e;

  // Per-layer PE configuration
  typedef struct packed {
    logic       mxm;          // 0: vector x vector, 1: matrix x matrix
    op_e        op;
    logic       en_ext_psum;  // accumulate the external (SRAM) psum
    logic       accum_nbr;    // accumulate the neighbour psum
    logic       accum_dir;    // 0: PSumX (left neighbour), 1: PSumY (bottom)
    logic [3:0] of_base;      // OF RF entry used by the V x V template
  } pe_cfg_t;

  // Post-processing configuration
  typedef struct packed {
    logic        relu;
    logic [4:0]  shift;
    logic [15:0] scale;
  } ppm_cfg_t;

  // Address pattern of one operand (IF or FL) for the load path.
  // chunk line = base + round*round_stride + col*col_stride + pe*pe_stride + sb*sb_stride
  // byte offset = (col*col_boff + pe*pe_boff + sb*sb_boff) mod 16, length = len
  typedef struct packed {
    logic [ADDR_W-1:0] base;
    logic [ADDR_W-1:0] round_stride;
    logic [ADDR_W-1:0] col_stride;
    logic [ADDR_W-1:0] pe_stride;
    logic [ADDR_W-1:0] sb_stride;
    logic [3:0]        col_boff;
    logic [3:0]        pe_boff;
    logic [3:0]        sb_boff;
    logic [4:0]        len;      // 1..16 dense bytes per subbank
  } ld_pat_t;

  // Whole layer descriptor
  typedef struct packed {
    pe_cfg_t           pe;
    logic [4:0]        icp;       // IC partition factor 1..16
    logic [4:0]        n_of;      // OF RF entries per PE to drain, 1..16
    logic [3:0]        n_rounds;  // load/compute rounds accumulated before drain, 1..15
    logic              nbr_accum; // run one neighbour-accumulate pass after compute
    ppm_cfg_t          ppm;
    ld_pat_t           ifp;
    ld_pat_t           flp;
    logic [ADDR_W-1:0] of_base;   // SRAM line of the first drained Z-line
    logic [4:0]        z_bytes;   // valid bytes per drain staging row: 16, 8, 4, 2 or 1
  } layer_cfg_t;

  // A compressed chunk as carried on the IF / FL NoCs to a PE subbank
  typedef struct packed {
    logic [SUB_BYTES-1:0]      bmp;
    logic [SUB_BYTES-1:0][7:0] data;  // non-zero bytes packed from byte 0
  } chunk_t;

  function automatic logic [4:0] popcount16(input logic [15:0] v);
    logic [4:0] c;
    c = '0;
    for (int i = 0; i < 16; i++) c = c + 5'(v[i]);
    return c;
  endfunction

endpackage
