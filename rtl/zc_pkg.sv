// zc_pkg: types, constants and helper functions shared by the ZAC-DEST
// (zero aware configurable data encoding by skipping transfer) channel coder.
//
// A DRAM chip sends one 64-bit word per access (8 beats of 8 data lines).
// The coder either sends the word as zeros, as a one-hot index of a similar
// word both ends already hold (the transfer is skipped), as the bitwise
// difference to a stored word, or raw; Dynamic Bus Inversion is applied last.
//
// Granularity settings (gran_e) name a chunk size N and a bit count k per
// chunk; they select the protected MSBs (tolerance) or the cleared LSBs
// (truncation). The eight (N,k) pairs are those of the paper's select muxes;
// GRAN_NONE is this design's addition for "no tolerance / no truncation".
package zc_pkg;

  localparam int unsigned W       = 64;  // word per chip per access
  localparam int unsigned BEATS   = 8;   // beats per burst
  localparam int unsigned BEAT_W  = 8;   // data lines per chip (x8 devices)
  localparam int unsigned CNT_W   = 7;   // 0..64 ones

  typedef enum logic [3:0] {
    GRAN_NONE  = 4'd0,
    GRAN_64_16 = 4'd1,
    GRAN_64_8  = 4'd2,
    GRAN_32_8  = 4'd3,
    GRAN_32_4  = 4'd4,
    GRAN_16_4  = 4'd5,
    GRAN_16_2  = 4'd6,
    GRAN_8_2   = 4'd7,
    GRAN_8_1   = 4'd8
  } gran_e;

  // Similarity limit select: index into the limit table {7,13,16,20}
  // (90 %, 80 %, 75 %, 70 % of 64 bits alike).
  typedef enum logic [1:0] {
    SIM_90 = 2'd0,
    SIM_80 = 2'd1,
    SIM_75 = 2'd2,
    SIM_70 = 2'd3
  } sim_e;

  // Settings of one access, sent by the controller with the column address.
  typedef struct packed {
    logic  approx_en;  // 0: exact access (instructions, non-resilient data)
    sim_e  sim_sel;
    gran_e tol_sel;
    gran_e trunc_sel;
  } zc_cfg_t;

  // How a word was coded; carried by two flags on the index line.
  typedef enum logic [1:0] {
    KIND_ZERO = 2'd0,  // data lines all 0, flags 0
    KIND_RAW  = 2'd1,  // data lines hold the word (after DBI)
    KIND_DIFF = 2'd2,  // data lines hold word xor entry, index line the index
    KIND_SKIP = 2'd3   // data lines hold the one-hot index of an entry
  } kind_e;

  // Index-line word, one bit per beat (bit b on beat b).
  typedef struct packed {
    logic       is_addr;  // bit 7: data lines carry a one-hot address
    logic       is_diff;  // bit 6: data lines carry a bitwise difference
    logic [5:0] idx;      // bits 5:0: binary index for a difference word
  } zc_side_t;

  // One encoded word as handed to the serializer.
  typedef struct packed {
    logic [W-1:0]     data;  // data-line bits, byte b on beat b
    logic [BEATS-1:0] dbi;   // DBI flag of each byte (1 = inverted)
    zc_side_t         side;
  } zc_enc_word_t;

  // One beat on a chip's pins.
  typedef struct packed {
    logic              strobe;  // 1 while a burst beat is on the lines
    logic [BEAT_W-1:0] dq;
    logic              dbi;
    logic              idx;
  } zc_beat_t;

  // Chunk size N and bit count k of a setting (0,0 for none).
  function automatic int unsigned gran_n(gran_e g);
    case (g)
      GRAN_64_16, GRAN_64_8: return 64;
      GRAN_32_8,  GRAN_32_4: return 32;
      GRAN_16_4,  GRAN_16_2: return 16;
      GRAN_8_2,   GRAN_8_1:  return 8;
      default:               return 0;
    endcase
  endfunction

  function automatic int unsigned gran_k(gran_e g);
    case (g)
      GRAN_64_16: return 16;
      GRAN_64_8, GRAN_32_8: return 8;
      GRAN_32_4, GRAN_16_4: return 4;
      GRAN_16_2, GRAN_8_2:  return 2;
      GRAN_8_1:  return 1;
      default:   return 0;
    endcase
  endfunction

  // 1 at the k most significant bits of every N-bit chunk.
  function automatic logic [W-1:0] msb_mask(gran_e g);
    logic [W-1:0] m;
    int unsigned n, k;
    n = gran_n(g);
    k = gran_k(g);
    m = '0;
    for (int unsigned i = 0; i < W; i++)
      if (n != 0 && (i % n) >= (n - k)) m[i] = 1'b1;
    return m;
  endfunction

  // 1 at the k least significant bits of every N-bit chunk.
  function automatic logic [W-1:0] lsb_mask(gran_e g);
    logic [W-1:0] m;
    int unsigned n, k;
    n = gran_n(g);
    k = gran_k(g);
    m = '0;
    for (int unsigned i = 0; i < W; i++)
      if (n != 0 && (i % n) < k) m[i] = 1'b1;
    return m;
  endfunction

  function automatic logic [CNT_W-1:0] popcount64(logic [W-1:0] v);
    logic [CNT_W-1:0] c;
    c = '0;
    for (int unsigned i = 0; i < W; i++) c = c + CNT_W'(v[i]);
    return c;
  endfunction

  // Invert, or restore, the bytes whose flag is set.
  function automatic logic [W-1:0] apply_dbi(logic [W-1:0] v, logic [BEATS-1:0] flags);
    logic [W-1:0] r;
    for (int unsigned b = 0; b < BEATS; b++)
      r[b*BEAT_W +: BEAT_W] = flags[b] ? ~v[b*BEAT_W +: BEAT_W] : v[b*BEAT_W +: BEAT_W];
    return r;
  endfunction

endpackage
