// h2eal_pkg: types and constants shared by the hybrid-bonding sparse-attention
// accelerator. The numbers that come from the paper are the 4x4 bank mesh, the
// 256-bit NoC and memory-macro width, the 32-token page, the 4k-token
// retrieval budget (128 pages) and int8 activations/KV. Head dimension 128 is the
// usual value for the evaluated 7B/8B models; everything else (sink count,
// window depth, flit layout, fixed-point formats) is a choice of this design.
//
// Fixed-point conventions used throughout:
//   * attention logits are kept in base-2 "log" units with LOG_FRAC fraction
//     bits (Q.8): x = q.k * SCORE_MUL, SCORE_MUL = log2(e)/sqrt(D)*256 ~ 33,
//     so that 2^(x/256) = exp(q.k/sqrt(D));
//   * softmax weights are 2^-(m-x) in Q.16 (1.0 = 65536), approximated as
//     2^-n * (1 - f/2) for d = n + f, a one-segment linear fit of 2^-f;
//   * output accumulators o hold sum(p*v) with p in Q.16.
package h2eal_pkg;

  // ---------------- array / interconnect ----------------
  localparam int unsigned MESH_X  = 4;
  localparam int unsigned MESH_Y  = 4;
  localparam int unsigned NBANK   = MESH_X * MESH_Y;
  localparam int unsigned ID_W    = 4;          // log2(NBANK)
  localparam int unsigned BEAT_W  = 256;        // NoC link / memory-macro beat
  localparam int unsigned BEAT_B  = BEAT_W / 8; // int8 lanes per beat

  // ---------------- attention geometry ----------------
  localparam int unsigned HEAD_DIM  = 128;
  localparam int unsigned PAGE      = 32;       // tokens per page
  localparam int unsigned TOPK      = 128;      // 4k tokens / 32
  localparam int unsigned N_SINK    = 4;
  localparam int unsigned WIN_DEPTH = 64;       // on-die part of the local window
  localparam int unsigned LOC_PAGES = 6;        // streaming-head local pages on the memory die
  localparam int unsigned MAX_PAGES = 8192;     // retrieval-head page budget per head
  localparam int unsigned SEL_INTERVAL = 3;     // one selection shared by 3 queries
  localparam int unsigned TILE_MAX  = 4;        // banks per tile supported

  // ---------------- numeric formats ----------------
  localparam int unsigned LOG_FRAC  = 8;
  localparam int signed   SCORE_MUL = 33;       // round(log2(e)/sqrt(128)*256)
  localparam int unsigned P_ONE     = 65536;    // 1.0 in Q.16
  localparam int unsigned O_W       = 48;       // output accumulator width
  localparam int unsigned L_W       = 40;       // softmax denominator width

  localparam logic signed [31:0] M_NEG_INF = 32'sh8000_0000;

  // ---------------- NoC flits ----------------
  typedef enum logic [2:0] {
    F_KV  = 3'd0,   // one beat of a K/V token slice, aux = memory address
    F_Q   = 3'd1,   // one beat of a query, aux = beat index
    F_SEL = 3'd2,   // 16 selected page ids, aux = {count, flit index}
    F_ML  = 3'd3,   // partial softmax state: data = {m, l}
    F_O   = 3'd4,   // 4 partial output lanes (64 bits each), aux = lane base
    F_GO  = 3'd5    // owner asks a member for its partial
  } ftype_e;

  typedef struct packed {
    logic [ID_W-1:0]   dst;
    logic [ID_W-1:0]   src;
    ftype_e            ftype;
    logic [31:0]       aux;
    logic [BEAT_W-1:0] data;
  } flit_t;

  localparam int unsigned FLIT_W = $bits(flit_t);

  // host operations of one bank
  typedef enum logic [1:0] {
    OP_APPEND = 2'd0,   // prefill: store the token, no attention
    OP_DECODE = 2'd1    // store the token and attend with its query
  } op_e;

  // 2^-(d) in Q.16 for d >= 0 given in Q.8 (see header).
  function automatic logic [16:0] exp2_neg(input logic [31:0] d);
    logic [23:0] n;
    logic [7:0]  f;
    logic [16:0] mant;
    n = d[31:8];
    f = d[7:0];
    mant = 17'(P_ONE) - {2'b0, f, 7'b0};
    if (n > 24'd16) return 17'd0;
    return mant >> n[4:0];
  endfunction

  // 2^-(hi-lo) for two Q.8 logits with hi >= lo; an empty state (M_NEG_INF)
  // contributes nothing.
  function automatic logic [16:0] exp2_gap(input logic signed [31:0] hi,
                                           input logic signed [31:0] lo);
    logic signed [33:0] d;
    if (lo == M_NEG_INF) return 17'd0;
    d = 34'(hi) - 34'(lo);
    if (d < 0) return 17'(P_ONE);
    if (d > 34'sh0_FFFF_FFFF) return 17'd0;
    return exp2_neg(d[31:0]);
  endfunction

  // signed int8 dot product of one 256-bit beat (32 lanes)
  function automatic logic signed [31:0] dot_beat(input logic [BEAT_W-1:0] a,
                                                  input logic [BEAT_W-1:0] b);
    logic signed [31:0] acc;
    acc = '0;
    for (int i = 0; i < BEAT_B; i++)
      acc += 32'($signed(a[8*i +: 8])) * 32'($signed(b[8*i +: 8]));
    return acc;
  endfunction

endpackage
