// pimba_pkg: number formats, command encodings and shared helper functions
// of the Pimba processing-in-memory pseudo-channel.
//
// MX8 group (128 bits): 16 elements share one 8-bit exponent, each pair of
// elements shares a 1-bit microexponent, and each element keeps a sign bit
// and a 6-bit magnitude, so the group averages 8 bits per value. The group
// size, pair sharing and mantissa width follow the paper; the bit layout,
// the exponent bias and the binary point are this design's choice:
//
//   bits [127:120] shared exponent E (bias 127)
//   bits [119:112] microexponents, bit p covers elements 2p and 2p+1
//   bits [7e+6:7e] element e: {sign, magnitude[5:0]}
//   value(e) = (-1)^sign * magnitude * 2^(E - 127 - micro[e/2] - 5)
//
// A DRAM column (one sub-chunk) is 256 bits, i.e. two MX8 groups or 32
// elements; element j of a word lives in group j/16, slot j%16.
//
// Wide formats inside the State-update Processing Engine (SPE):
//   mxw_group_t  multiplier output: sign + 12-bit magnitude per element,
//                value = mag * 2^(exp - 127 - micro - 10)
//   mxs_group_t  adder output: signed 18-bit element, microexponent 0,
//                value = val * 2^(exp - 127 - 14)
//   acc_scalar_t dot-product partial sum: value = mant * 2^(exp - 12)
package pimba_pkg;

  localparam int EXP_W      = 8;
  localparam int MANT_W     = 6;
  localparam int ELEM_W     = MANT_W + 1;
  localparam int GROUP_N    = 16;
  localparam int MICRO_N    = GROUP_N / 2;
  localparam int EXP_BIAS   = 127;
  localparam int WORD_W     = 256;
  localparam int GROUPS_PER_WORD = WORD_W / 128;
  localparam int ELEMS_PER_WORD  = GROUPS_PER_WORD * GROUP_N;
  localparam int COL_W      = 5;             // 32 columns of 256 bits per row
  localparam int ROW_W      = 14;
  localparam int XEXP_W     = 12;            // internal exponent width
  localparam int WMAG_W     = 2 * MANT_W;    // product magnitude
  localparam int WFRAC      = 2 * (MANT_W - 1);
  localparam int GUARD      = 4;
  localparam int SUM_W      = WMAG_W + GUARD + 2;
  localparam int SFRAC      = WFRAC + GUARD;
  localparam int ACC_EXP_W  = 10;
  localparam int ACC_MANT_W = 22;
  localparam int ACC_FRAC   = 2 * (MANT_W - 1) + 2;

  typedef struct packed {
    logic [EXP_W-1:0]                exp;
    logic [MICRO_N-1:0]              micro;
    logic [GROUP_N-1:0][ELEM_W-1:0]  elem;
  } mx8_group_t;

  typedef mx8_group_t [GROUPS_PER_WORD-1:0] mx8_word_t;

  typedef struct packed {
    logic signed [XEXP_W-1:0]        exp;
    logic [MICRO_N-1:0]              micro;
    logic [GROUP_N-1:0]              sign;
    logic [GROUP_N-1:0][WMAG_W-1:0]  mag;
  } mxw_group_t;

  typedef mxw_group_t [GROUPS_PER_WORD-1:0] mxw_word_t;

  typedef struct packed {
    logic signed [XEXP_W-1:0]        exp;
    logic [GROUP_N-1:0][SUM_W-1:0]   val;     // two's complement
  } mxs_group_t;

  typedef mxs_group_t [GROUPS_PER_WORD-1:0] mxs_word_t;

  typedef struct packed {
    logic signed [ACC_EXP_W-1:0]     exp;
    logic signed [ACC_MANT_W-1:0]    mant;
  } acc_scalar_t;

  // Custom DRAM commands of the memory interface.
  typedef enum logic [2:0] {
    CMD_NOP         = 3'd0,
    CMD_ACT4        = 3'd1,
    CMD_REG_WRITE   = 3'd2,
    CMD_COMP        = 3'd3,
    CMD_RESULT_READ = 3'd4,
    CMD_PRECHARGES  = 3'd5
  } cmd_e;

  // COMP dataflows: state update, attention score, attention attend.
  typedef enum logic [1:0] {
    MODE_SU     = 2'd0,
    MODE_SCORE  = 2'd1,
    MODE_ATTEND = 2'd2
  } mode_e;

  // Operand registers; V also holds the attention scores in attend mode.
  typedef enum logic [1:0] {
    REG_D = 2'd0,
    REG_Q = 2'd1,
    REG_K = 2'd2,
    REG_V = 2'd3
  } reg_e;

  localparam logic SIDE_UPPER  = 1'b0;
  localparam logic SIDE_BOTTOM = 1'b1;

  typedef struct packed {
    cmd_e              op;
    logic [1:0]        bg;       // ACT4: bank group whose 4 banks open
    logic [ROW_W-1:0]  row;      // ACT4: row address
    mode_e             mode;     // COMP
    logic [COL_W-1:0]  col;      // COMP: column of the sub-chunk
    logic [4:0]        eidx;     // COMP: element of V used this iteration
    logic [4:0]        acc_idx;  // COMP: accumulator entry
    logic              acc_clr;  // COMP: start a new sum in that entry
    logic [2:0]        spu;      // REG_WRITE / RESULT_READ: target SPU
    logic              bcast;    // REG_WRITE: write every SPU
    logic              side;     // REG_WRITE / RESULT_READ: bank side
    reg_e              reg_id;   // REG_WRITE: operand register
    logic              rr_vec;   // RESULT_READ: 1 = attend vector entry
    logic [1:0]        rr_idx;   // RESULT_READ: word index
    logic [WORD_W-1:0] data;     // REG_WRITE payload
  } pim_cmd_t;

  // Tag that travels with one iteration down the SPE pipeline.
  typedef struct packed {
    logic              valid;
    mode_e             mode;
    logic              side;
    logic [COL_W-1:0]  col;
    logic [4:0]        eidx;
    logic [4:0]        acc_idx;
    logic              acc_clr;
  } spe_tag_t;

  // MX8 group -> wide format (no precision change).
  function automatic mxw_group_t mx8_to_w(mx8_group_t g);
    mxw_group_t w;
    w.exp   = XEXP_W'(g.exp);
    w.micro = g.micro;
    for (int e = 0; e < GROUP_N; e++) begin
      w.sign[e] = g.elem[e][ELEM_W-1];
      w.mag[e]  = WMAG_W'(g.elem[e][MANT_W-1:0]) << (WFRAC - (MANT_W - 1));
    end
    return w;
  endfunction

  // Word whose every element equals element idx of v (broadcast scalar).
  function automatic mx8_word_t mx8_bcast(mx8_word_t v, logic [4:0] idx);
    mx8_word_t  r;
    mx8_group_t g;
    logic [3:0] slot;
    g    = v[idx[4]];
    slot = idx[3:0];
    for (int h = 0; h < GROUPS_PER_WORD; h++) begin
      r[h].exp   = g.exp;
      r[h].micro = {MICRO_N{g.micro[slot[3:1]]}};
      for (int e = 0; e < GROUP_N; e++) r[h].elem[e] = g.elem[slot];
    end
    return r;
  endfunction

  // Sum of two scalar partial sums, aligned to the larger exponent; a sum
  // that leaves the mantissa range is shifted right and its exponent raised.
  function automatic acc_scalar_t acc_add(acc_scalar_t a, acc_scalar_t b);
    acc_scalar_t            r;
    logic signed [ACC_EXP_W:0]    d;
    logic signed [ACC_MANT_W:0]   m_big, m_sml, s;
    int unsigned            sh;
    if (a.mant == '0) return b;
    if (b.mant == '0) return a;
    d = {a.exp[ACC_EXP_W-1], a.exp} - {b.exp[ACC_EXP_W-1], b.exp};
    if (d >= 0) begin
      r.exp = a.exp;
      m_big   = {a.mant[ACC_MANT_W-1], a.mant};
      m_sml = {b.mant[ACC_MANT_W-1], b.mant};
      sh    = unsigned'(int'(d));
    end else begin
      r.exp = b.exp;
      m_big   = {b.mant[ACC_MANT_W-1], b.mant};
      m_sml = {a.mant[ACC_MANT_W-1], a.mant};
      sh    = unsigned'(-int'(d));
    end
    m_sml = (sh > ACC_MANT_W) ? (m_sml >>> ACC_MANT_W) : (m_sml >>> sh);
    s = m_big + m_sml;
    if (s[ACC_MANT_W] != s[ACC_MANT_W-1]) begin
      r.mant = s[ACC_MANT_W:1];
      r.exp  = r.exp + 1'b1;
    end else begin
      r.mant = s[ACC_MANT_W-1:0];
    end
    return r;
  endfunction

endpackage
