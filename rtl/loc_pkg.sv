// loc_pkg: sizes, number format and memory layout shared by the adaptive
// Transformer localization accelerator.
//
// Every activation and weight is a signed 16-bit fixed-point number in Q8.8
// (8 integer bits, 8 fraction bits), as the accelerator uses throughout.
// Products are 32-bit Q16.16 and are summed in a wider accumulator; an
// accumulator is brought back to Q8.8 by an arithmetic shift right by 8
// (truncation towards minus infinity) followed by saturation to 16 bits.
// The truncation/saturation rule is this design's own choice; the Q8.8 format
// and the extended-precision accumulation are the accelerator's.
//
// Model sizes: 128 beam tokens of 46 delay-bin features, two attention heads
// of 23 features, an FFN hidden width of 64, max-pooling by 4 over the
// features padded to 48 (1536 pooled values), an FCNN hidden width of 32 and
// two outputs (x, y). Three propagation scenarios: S1 runs one encoder layer,
// S2 and S3 run two, giving five weight segments S1, S21, S22, S31, S32.
//
// Lint note: a module that uses only part of this package sees the other
// constants reported as unused.
package loc_pkg;

  // ---------------- model sizes ----------------
  localparam int unsigned N_TOK    = 128;  // sequence length (beams)
  localparam int unsigned D_MODEL  = 46;   // delay-bin features per beam
  localparam int unsigned N_HEADS  = 2;
  localparam int unsigned D_HEAD   = D_MODEL / N_HEADS;  // 23
  localparam int unsigned D_FF     = 64;   // FFN hidden width
  localparam int unsigned POOL_K   = 4;    // max-pool factor
  localparam int unsigned POOL_PAD = 2;    // zero padding to 48 features
  localparam int unsigned POOL_W   = (D_MODEL + POOL_PAD) / POOL_K;  // 12
  localparam int unsigned FC_IN    = N_TOK * POOL_W;                 // 1536
  localparam int unsigned D_HID    = 32;   // FCNN hidden width
  localparam int unsigned D_OUT    = 2;    // (x, y)
  localparam int unsigned N_SCEN   = 3;    // S1, S2, S3
  localparam int unsigned N_SEG    = 5;    // S1, S21, S22, S31, S32
  localparam int unsigned MAX_LANES = 64;  // widest memory word

  // ---------------- number format ----------------
  localparam int unsigned FRAC = 8;
  typedef logic signed [15:0] q_t;          // Q8.8
  typedef logic signed [39:0] acc_t;        // extended-precision accumulator
  typedef q_t word_t [MAX_LANES];           // one weight-memory word

  typedef enum logic [1:0] {SCEN_S1 = 2'd0, SCEN_S2 = 2'd1, SCEN_S3 = 2'd2} scen_e;

  // saturate a wide value to Q8.8
  function automatic q_t sat16(input acc_t v);
    if (v > acc_t'(32767))       return q_t'(16'sh7fff);
    else if (v < acc_t'(-32768)) return q_t'(-16'sh8000);
    else                         return q_t'(v[15:0]);
  endfunction

  // accumulator (Q16.16) back to Q8.8
  function automatic q_t requant(input acc_t v);
    return sat16(v >>> FRAC);
  endfunction

  // leaky ReLU with slope 77/256 (0.3008, nearest Q0.8 value to 0.3)
  localparam int LEAKY_NUM = 77;
  function automatic q_t leaky_relu(input q_t v);
    acc_t p;
    p = acc_t'(v) * acc_t'(LEAKY_NUM);
    return (v < 0) ? q_t'(p >>> FRAC) : v;
  endfunction

  // number of layers and weight segment of a scenario
  function automatic logic [1:0] n_layers(input scen_e s);
    return (s == SCEN_S1) ? 2'd1 : 2'd2;
  endfunction
  function automatic logic [2:0] segment(input scen_e s, input logic layer);
    case (s)
      SCEN_S1: return 3'd0;
      SCEN_S2: return layer ? 3'd2 : 3'd1;
      default: return layer ? 3'd4 : 3'd3;
    endcase
  endfunction

  // ---------------- encoder weight segment layout ----------------
  // One word per weight column (matrices stored transposed), up to 64 lanes.
  localparam int unsigned OFF_WQ = 0;                  // 46 words x 46 lanes
  localparam int unsigned OFF_WK = OFF_WQ + D_MODEL;   // 46 words
  localparam int unsigned OFF_WV = OFF_WK + D_MODEL;   // 46 words
  localparam int unsigned OFF_WO = OFF_WV + D_MODEL;   // 46 words
  localparam int unsigned OFF_W1 = OFF_WO + D_MODEL;   // 64 words x 46 lanes
  localparam int unsigned OFF_W2 = OFF_W1 + D_FF;      // 46 words x 64 lanes
  localparam int unsigned OFF_B1 = OFF_W2 + D_MODEL;   // 1 word, 64 lanes
  localparam int unsigned OFF_B2 = OFF_B1 + 1;         // 1 word, 46 lanes
  localparam int unsigned OFF_SC = OFF_B2 + 1;         // lane0 score scale, lane1 score bias
  localparam int unsigned ENC_WORDS = OFF_SC + 1;      // 297
  localparam int unsigned ENC_AW = $clog2(N_SEG * ENC_WORDS);

  // ---------------- FCNN weight layout (per scenario) ----------------
  localparam int unsigned FOFF_W1 = 0;                 // 1536 words x 32 lanes
  localparam int unsigned FOFF_B1 = FC_IN;             // 1 word x 32 lanes
  localparam int unsigned FOFF_W2 = FOFF_B1 + 1;       // 32 words x 2 lanes
  localparam int unsigned FOFF_B2 = FOFF_W2 + D_HID;   // 1 word x 2 lanes
  localparam int unsigned FC_WORDS = FOFF_B2 + 1;      // 1570
  localparam int unsigned FC_AW = $clog2(N_SCEN * FC_WORDS);

  // ---------------- SLP weight layout ----------------
  localparam int unsigned SLP_WORDS = N_TOK + 1;       // 128 x 3 lanes, then bias
  localparam int unsigned SLP_BIN   = 0;               // delay bin fed to the router

  // host write port memory select
  typedef enum logic [1:0] {MEM_ENC = 2'd0, MEM_FC = 2'd1, MEM_SLP = 2'd2} mem_sel_e;

  // default sparsity thresholds per scenario (Q8.8 element threshold,
  // zero-count row threshold): 0.039/41, 0.014/1, 0.006/28
  localparam q_t         TE_DEF [N_SCEN] = '{16'sd10, 16'sd4, 16'sd2};
  localparam logic [5:0] TR_DEF [N_SCEN] = '{6'd41, 6'd1, 6'd28};

  // sigmoid bias b = -log(128) = -4.852 in Q8.8
  localparam q_t SIG_BIAS_DEF = -16'sd1242;

endpackage
