// olsc_pkg: types, widths and arithmetic shared by the path-overlapped list
// successive-cancellation (LSC) polar decoder.
//
// LLRs are signed fixed-point numbers of LLR_W bits, kept symmetric in
// [-LLR_MAX, +LLR_MAX] so that a magnitude always fits in LLR_W-1 bits.
// Path metrics are unsigned PM_W-bit numbers that saturate at their maximum.
// The f update is the min-sum approximation; g is the exact add/subtract with
// saturation. Widths are this design's choice: the paper gives none.
//
// A step word (step_t) is what the scheduler hands to one list path for one
// clock cycle: which tree stage to activate, f or g, which bit it belongs to,
// and what to do when the step is the last one of a bit (a decision).
package olsc_pkg;

  localparam int unsigned LLR_W = 8;
  localparam int unsigned PM_W  = 16;
  localparam int unsigned STG_W = 5;   // stage number, 1 = bit side
  localparam int unsigned IDX_W = 16;  // bit index
  localparam int unsigned PTH_W = 8;   // path index / path count

  typedef logic signed [LLR_W-1:0] llr_t;
  typedef logic [PM_W-1:0]         pm_t;

  localparam llr_t LLR_MAX = llr_t'((1 << (LLR_W - 1)) - 1);
  localparam llr_t LLR_MIN = -LLR_MAX;
  localparam pm_t  PM_MAX  = '1;

  // What a path does when it decides a bit.
  typedef enum logic [1:0] {
    DM_LOCAL = 2'd0,  // frozen bit: take 0, update own metric
    DM_SPAWN = 2'd1,  // list not full: keep 0 here, copy with 1 to a new path
    DM_SORT  = 2'd2   // list full (or last bit): send both candidates to the sorter
  } dec_mode_e;

  typedef struct packed {
    logic             valid;
    logic [STG_W-1:0] stage;
    logic             is_g;
    logic [IDX_W-1:0] idx;
    logic             frozen;
    dec_mode_e        mode;
    logic [PTH_W-1:0] lcur;   // number of live paths when the step was issued
  } step_t;

  // One sorter candidate: the metric of path `parent` extended by bit `bit_val`.
  typedef struct packed {
    logic             valid;
    pm_t              metric;
    logic [PTH_W-1:0] parent;
    logic             bit_val;
  } cand_t;

  function automatic llr_t sat_llr(input logic signed [LLR_W:0] v);
    logic signed [LLR_W:0] hi, lo;
    hi = (LLR_W + 1)'((1 << (LLR_W - 1)) - 1);
    lo = -hi;
    if (v > hi) return LLR_MAX;
    if (v < lo) return LLR_MIN;
    return llr_t'(v);
  endfunction

  function automatic logic [LLR_W-2:0] llr_abs(input llr_t a);
    return a[LLR_W-1] ? (LLR_W-1)'(-a) : (LLR_W-1)'(a);
  endfunction

  // min-sum f: sign(a) sign(b) min(|a|,|b|)
  function automatic llr_t f_fn(input llr_t a, input llr_t b);
    logic [LLR_W-2:0] ma, mb, m;
    ma = llr_abs(a);
    mb = llr_abs(b);
    m  = (ma < mb) ? ma : mb;
    return (a[LLR_W-1] ^ b[LLR_W-1]) ? -llr_t'({1'b0, m}) : llr_t'({1'b0, m});
  endfunction

  // g: b + (1 - 2 u) a, saturated
  function automatic llr_t g_fn(input llr_t a, input llr_t b, input logic u);
    logic signed [LLR_W:0] s;
    s = u ? ($signed({b[LLR_W-1], b}) - $signed({a[LLR_W-1], a}))
          : ($signed({b[LLR_W-1], b}) + $signed({a[LLR_W-1], a}));
    return sat_llr(s);
  endfunction

  function automatic pm_t pm_add(input pm_t pm, input logic [LLR_W-2:0] pen);
    logic [PM_W:0] s;
    s = {1'b0, pm} + (PM_W + 1)'(pen);
    return s[PM_W] ? PM_MAX : s[PM_W-1:0];
  endfunction

  // Copies of the stage-s PU array in the shared decoder: L >> (s-1), at least 1
  // (Fig. 2: list size 2 doubles stage 1; list size 4 has four stage-1 and two
  // stage-2 copies).
  function automatic int unsigned stage_copies(input int unsigned l, input int unsigned s);
    int unsigned c;
    c = l >> (s - 1);
    return (c == 0) ? 1 : c;
  endfunction

  // Offset of the stage-s inner LLR buffer (s >= 2, 2^(s-1) entries) in a path's
  // flat buffer of N-2 entries.
  function automatic int unsigned buf_off(input int unsigned s);
    return (1 << (s - 1)) - 2;
  endfunction

  // Offset of the stage-s partial-sum register (2^(s-1) bits, s >= 1) in a
  // path's flat partial-sum vector of N-1 bits.
  function automatic int unsigned ps_off(input int unsigned s);
    return (1 << (s - 1)) - 1;
  endfunction

endpackage
