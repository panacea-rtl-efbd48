// panacea_pkg: types and constants shared by the Panacea AQS-GEMM accelerator.
//
// Number formats (the design's main configuration, 7-bit weights and 8-bit activations):
//   * A weight is a signed 7-bit integer split by the signed bit-slice representation
//     into a signed 4-bit HO slice (weight 2^3) and a signed 4-bit LO slice (weight 1).
//   * An activation is an unsigned 8-bit integer. With LO-slice width l (DBS type 1/2/3
//     gives l = 4/5/6) the HO slice is x[7:l] padded with zeros to 4 bits (weight 2^4)
//     and the LO slice is x[l-1:l-4] (weight 2^(l-4)); the l-4 lowest bits are dropped.
//   * Slices are grouped in vectors of V = 4: a weight HO vector is 4 rows x 1 column,
//     an activation HO vector is 1 row (one k) x 4 columns.
//   * A compressed HO stream of one TK segment is a list of entries {rle[3:0], vec[15:0]};
//     rle counts the compressed vectors skipped before this one. A memory block of 64
//     words holds one segment: words 0..31 the dense LO vectors (bits 15:0), with the
//     number of HO entries in bits 21:16 of word 31, and words 32.. the HO entries.
// The tile sizes are the paper's (v=4, P=16, TM=64, TK=32, TN=64, R=16); the memory word
// layout below is this design's own choice.
package panacea_pkg;

  localparam int V        = 4;    // slice-vector length
  localparam int P        = 16;   // PEAs
  localparam int TM       = 64;   // = P*V
  localparam int TK       = 32;
  localparam int TN       = 64;
  localparam int R        = 16;   // = TN/V
  localparam int N_DWO    = 4;
  localparam int N_SWO    = 8;
  localparam int N_OPS    = N_DWO + N_SWO;
  localparam int KIDX_W   = $clog2(TK);
  localparam int PSUM_W   = 48;   // partial sum width
  localparam int CS_W     = 32;   // compensation sum width
  localparam int WORD_W   = 32;   // one memory lane
  localparam int BLK_WORDS = 64;  // words per compressed block: 0..31 LO, 32..63 HO entries

  typedef logic signed [3:0] wslice_t;   // signed weight slice
  typedef logic        [3:0] aslice_t;   // unsigned activation slice
  typedef logic        [15:0] vec_t;     // four 4-bit slices, element i at [4i+3:4i]
  typedef logic signed [7:0] prod_t;
  typedef logic signed [PSUM_W-1:0] psum_t;
  typedef logic signed [CS_W-1:0] cs_t;

  // Kind of outer product, named after weight slice x activation slice.
  typedef enum logic [1:0] {J_HH = 2'd0, J_LH = 2'd1, J_HL = 2'd2, J_LL = 2'd3} jkind_e;

  typedef struct packed {
    logic              valid;
    logic              tile;   // weight sub-tile 0 or 1 (DTP)
    jkind_e            kind;
    logic [KIDX_W-1:0] k;
  } job_t;

  // HO entry as carried on load ports; 'empty' is set by the loader for a segment
  // without any uncompressed vector (it is not stored in memory).
  typedef struct packed {
    logic       empty;
    logic [3:0] rle;    // compressed vectors skipped before this one
    vec_t       vec;
  } ho_entry_t;

  localparam int PWL_SEGS = 8;

  // Per-layer configuration of the post-processing unit.
  typedef struct packed {
    logic [3:0]                        r;        // frequent HO slice of this layer's input
    logic [PWL_SEGS-2:0][31:0]         pwl_bp;   // ascending breakpoints (signed)
    logic [PWL_SEGS-1:0][15:0]         pwl_slope;// signed slopes
    logic [PWL_SEGS-1:0][31:0]         pwl_icpt; // signed intercepts
    logic [4:0]                        pwl_sh;   // right shift after the slope multiply
    logic [15:0]                       qmul;     // requantization multiplier (unsigned)
    logic [5:0]                        qsh;      // requantization right shift
    logic [7:0]                        zp;       // output zero point (after ZPM)
    logic [1:0]                        nl_sh;    // next layer's DBS: l-4
    logic [3:0]                        nr;       // next layer's frequent HO slice r''
  } ppu_cfg_t;

  localparam int MEM_AW  = 10;    // logical word address of a 64 KB memory (16 x 32 bit)
  localparam int MEM_LANES = 16;

  // Per-layer configuration of the whole accelerator, sampled at start.
  typedef struct packed {
    logic [5:0]        m_tiles;   // output-row tiles of TM rows (2TM under DTP)
    logic [5:0]        n_tiles;   // column tiles of TN
    logic [5:0]        k_tiles;   // reduction tiles of TK
    logic              dtp;       // double-tile processing
    logic [1:0]        dbs_sh;    // l-4 of this layer's input activations
    logic [MEM_AW-1:0] w_base;    // WMEM: weight blocks
    logic [MEM_AW-1:0] b_base;    // WMEM: biases, 16 per word
    logic [MEM_AW-1:0] a_base;    // AMEM: activation blocks
    logic [MEM_AW-1:0] o_base;    // OMEM: output blocks
    ppu_cfg_t          ppu;
  } layer_cfg_t;

  // Shift applied to a product of kind k when the activation LO slice has width l
  // (dbs_sh = l-4). Weight HO weight 2^3, activation HO weight 2^4.
  function automatic logic [3:0] job_shift(jkind_e k, logic [1:0] dbs_sh);
    case (k)
      J_HH:    return 4'd7;
      J_LH:    return 4'd4;
      J_HL:    return 4'd3 + {2'b00, dbs_sh};
      default: return {2'b00, dbs_sh};
    endcase
  endfunction

  function automatic wslice_t vget_w(vec_t v, int i);
    return wslice_t'(v[4*i +: 4]);
  endfunction

  function automatic aslice_t vget_a(vec_t v, int i);
    return v[4*i +: 4];
  endfunction

endpackage
