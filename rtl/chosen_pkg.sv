// chosen_pkg: shared widths, types and helper functions of the multi-kernel ViT accelerator.
//
// Data format. Every value moved between memory, kernels and units is a signed DW-bit
// fixed-point number with FRAC fractional bits (Q8.8 by default). One memory word is one
// 512-bit AXI beat. Following the packing rule floor(AXI_WIDTH / (2*DW)) elements per beat,
// a beat holds PM = 16 lanes of 2*DW = 32 bits; a value sits sign-extended in the low DW
// bits of its lane. Why the packing divides by 2*DW is not explained by the source; the
// lane layout is this design's choice. Matrices are split column-wise over the BN DDR
// banks: bank b holds columns [b*W/BN, (b+1)*W/BN) of every row.
//
// The operation list run by the controller (instr_t) is produced offline by the compiler;
// its field layout is this design's own.
package chosen_pkg;

  localparam int AXI_W  = 512;                 // AXI data width (paper: 512-bit bursts)
  localparam int DW     = 16;                  // element width, from Pm = 16 = 512/(2*DW)
  localparam int LANE_W = 2 * DW;              // lane width inside a beat
  localparam int PM     = AXI_W / (2 * DW);    // compute units per PE = elements per beat
  localparam int FRAC   = 8;                   // fractional bits of the Q8.8 format
  localparam int ACC_W  = 32;                  // accumulator width of a compute unit
  localparam int BN     = 4;                   // DDR banks on the board
  localparam int ADDR_W = 32;                  // word address inside one bank
  localparam int LEN_W  = 16;                  // burst length field (beats)

  typedef logic signed [DW-1:0]    data_t;
  typedef data_t [PM-1:0]          vec_t;      // one beat's worth of elements
  typedef logic [AXI_W-1:0]        word_t;     // one memory word
  typedef logic [ADDR_W-1:0]       addr_t;

  typedef enum logic [2:0] {
    OP_END       = 3'd0,   // end of the operation list
    OP_MATMUL    = 3'd1,   // C = A x B on the 1D PE array
    OP_GELU      = 3'd2,   // row-wise GELU (Fig. 3, "Gelu")
    OP_SOFTMAX   = 3'd3,   // head-wise softmax (Fig. 3, "Softmax")
    OP_LAYERNORM = 3'd4,   // rotating LayerNorm (Fig. 3, "LayerNorm")
    OP_ADD       = 3'd5,   // skip path + main path
    OP_HMATMUL   = 3'd6    // head-wise C = A x B, A taken from the kernel's own bank part
  } op_e;

  // Crossbar routing between bank ports and kernels.
  typedef enum logic [1:0] {
    RT_DIRECT = 2'd0,      // kernel k <-> bank (k + rot) mod BN (rot = 0: same index)
    RT_BCAST  = 2'd1       // read data of bank b to the A buffer port b of every kernel
  } route_e;

  // Per-kernel configuration of one operation.
  typedef struct packed {
    op_e          op;
    logic [15:0]  n_rows;   // rows (matmul tile rows, or rows/slices this kernel processes)
    logic [15:0]  k_dim;    // matmul shared dimension
    logic [15:0]  words;    // beats per row part / slice (B row part for matmul)
    logic [15:0]  a_words;  // matmul: beats of one A row part held in one bank
    logic [15:0]  elems;    // softmax: valid elements of a slice
    logic [7:0]   reps;     // softmax: slices (heads) per row in one bank
  } kcfg_t;

  // One entry of the static schedule.
  typedef struct packed {
    kcfg_t        k;
    addr_t        src0;        // A (matmul) or main input
    addr_t        src1;        // B (matmul) or skip input (add)
    addr_t        dst;
    addr_t        src0_stride; // words between consecutive rows inside one bank
    addr_t        src1_stride;
    addr_t        dst_stride;
  } instr_t;

  // Memory word <-> element vector.
  function automatic word_t pack_word(vec_t v);
    word_t w;
    for (int i = 0; i < PM; i++) w[i*LANE_W +: LANE_W] = LANE_W'(signed'(v[i]));
    return w;
  endfunction

  function automatic vec_t unpack_word(word_t w);
    vec_t v;
    for (int i = 0; i < PM; i++) v[i] = w[i*LANE_W +: DW];
    return v;
  endfunction

  // Saturate a wide signed value to DW bits.
  function automatic data_t sat_dw(logic signed [63:0] x);
    if (x > 64'sd32767)       return data_t'(16'sh7fff);
    else if (x < -64'sd32768) return data_t'(16'sh8000);
    else                      return data_t'(x[DW-1:0]);
  endfunction

  // Position of the most significant set bit (0 for x == 0).
  function automatic int unsigned msb_pos(logic [63:0] x);
    int unsigned p = 0;
    for (int i = 0; i < 64; i++) if (x[i]) p = i;
    return p;
  endfunction

  // Reciprocal without a divider. v = Mn * 2^p with Mn in [1, 2) found by a leading-one
  // search; 1/Mn starts from the chord 1.5 - Mn/2 and is refined by two Newton-Raphson steps
  // y <- y * (2 - Mn * y). Returns y in Q1.15 (so 1/v = y * 2^-(p+15)) and p.
  typedef struct packed {
    logic [16:0] y;
    logic [6:0]  p;
  } recip_t;

  function automatic recip_t recip_bm(logic [47:0] v);
    recip_t r;
    logic [63:0] mn, y, t;
    int unsigned p;
    p  = msb_pos(64'(v));
    mn = (p >= 15) ? (64'(v) >> (p - 15)) : (64'(v) << (15 - p));   // Q1.15 in [1, 2)
    y  = 64'd49152 - (mn >> 1);                                       // 1.5 - Mn/2
    for (int it = 0; it < 2; it++) begin
      t = (mn * y) >> 15;                                             // Mn*y, Q1.15
      y = (y * (64'd65536 - t)) >> 15;
    end
    r.y = y[16:0];
    r.p = 7'(p);
    return r;
  endfunction

endpackage
