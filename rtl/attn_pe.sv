// attn_pe: the attention processing element of a logic bank.
//
// It computes softmax(q.K^T / sqrt(D)) V for one query over a stream of
// tokens with the online (FlashAttention-style) softmax, so tokens can come in
// any order and from any source, and partial results of other banks can be
// merged in. State: running maximum logit m (Q.8, base 2), denominator l and
// D output accumulators o.
//
// Operations (at most one per cycle):
//   clear         load q, set m = -inf, l = 0, o = 0.
//   beat_valid    one 256-bit beat of the current token: BPV beats of K
//                 followed by BPV beats of V (BPV = D/32). After the last K
//                 beat the logit x = q.k * SCORE_MUL (Q.8, base 2) is known;
//                 m' = max(m, x), a = 2^-(m'-m), p = 2^-(m'-x),
//                 l = l*a + p. Each V beat then updates 32 lanes:
//                 o = o*a + p*v.
//   ml_valid      first part of merging a partial (m_in, l_in) from another
//                 bank: m' = max(m, m_in), a = 2^-(m'-m), b = 2^-(m'-m_in),
//                 l = l*a + l_in*b.
//   ov_valid      4 lanes of that partial's o starting at lane ov_base:
//                 o = o*a + o_in*b.
//   norm_start    divide o by l lane by lane, one lane per cycle, emitting
//                 int8 results (saturated) on out_valid/out_idx/out_val;
//                 norm_done pulses after lane D-1.
//
// Exponentials use the one-segment 2^-f approximation of h2eal_pkg. The
// paper gives the PE only as a block and the cross-bank softmax as "following
// FlashAttention"; the datapath widths and the beat-serial organisation are
// this design's choices.
module attn_pe #(
  parameter int unsigned D = h2eal_pkg::HEAD_DIM,
  localparam int unsigned IW = $clog2(D)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         clear,
  input  logic [D*8-1:0]               q,
  input  logic                         beat_valid,
  input  logic [h2eal_pkg::BEAT_W-1:0] beat_data,
  input  logic                         ml_valid,
  input  logic signed [31:0]           m_in,
  input  logic [h2eal_pkg::L_W-1:0]    l_in,
  input  logic                         ov_valid,
  input  logic [IW-1:0]                ov_base,
  input  logic signed [63:0]           ov_in [4],
  input  logic                         norm_start,
  output logic                         norm_busy,
  output logic                         out_valid,
  output logic [IW-1:0]                out_idx,
  output logic signed [7:0]            out_val,
  output logic                         norm_done,
  output logic signed [31:0]           m_out,
  output logic [h2eal_pkg::L_W-1:0]    l_out,
  output logic signed [h2eal_pkg::O_W-1:0] o_out [D],
  output logic [31:0]                  tokens
);
  import h2eal_pkg::*;
  localparam int unsigned BPV = D / BEAT_B;
  localparam int unsigned BW  = $clog2(2 * BPV);

  logic [D*8-1:0]       q_r;
  logic [BW-1:0]        bcnt;
  logic signed [31:0]   sacc, s_full, x, m_new;
  logic signed [63:0]   xs;
  logic [16:0]          a_r, p_r, a_k, p_k;
  logic [16:0]          ma, mb;
  logic signed [31:0]   mm_new;
  logic [IW:0]          ncnt;

  // logit of the token once its last K beat arrives
  always_comb begin
    s_full = ((bcnt == 0) ? 32'sd0 : sacc) + dot_beat(q_r[BEAT_W * (int'(bcnt) % BPV) +: BEAT_W], beat_data);
    if (bcnt >= BW'(BPV)) s_full = sacc;
    xs     = 64'(s_full) * 64'(SCORE_MUL);
    x      = 32'(xs);
    m_new  = (m_out == M_NEG_INF || x > m_out) ? x : m_out;
    a_k    = exp2_gap(m_new, m_out);
    p_k    = exp2_gap(m_new, x);
    mm_new = (m_out == M_NEG_INF || m_in > m_out) ? m_in : m_out;
    ma     = exp2_gap(mm_new, m_out);
    mb     = exp2_gap(mm_new, m_in);
  end

  function automatic logic signed [O_W-1:0] scale(input logic signed [O_W-1:0] v,
                                                  input logic [16:0] f);
    logic signed [O_W+17:0] t;
    t = (O_W+18)'(v) * $signed({1'b0, f});
    return O_W'(t >>> 16);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_r    <= '0;
      bcnt   <= '0;
      sacc   <= '0;
      a_r    <= '0;
      p_r    <= '0;
      m_out  <= M_NEG_INF;
      l_out  <= '0;
      tokens <= '0;
      for (int i = 0; i < D; i++) o_out[i] <= '0;
    end else if (clear) begin
      q_r    <= q;
      bcnt   <= '0;
      sacc   <= '0;
      m_out  <= M_NEG_INF;
      l_out  <= '0;
      tokens <= '0;
      for (int i = 0; i < D; i++) o_out[i] <= '0;
    end else if (beat_valid) begin
      if (bcnt < BW'(BPV)) begin
        sacc <= s_full;
        if (bcnt == BW'(BPV - 1)) begin
          m_out  <= m_new;
          a_r    <= a_k;
          p_r    <= p_k;
          l_out  <= L_W'((({23'b0, l_out} * {40'b0, a_k}) >> 16) + 63'(p_k));
          tokens <= tokens + 1'b1;
        end
      end else begin
        for (int i = 0; i < BEAT_B; i++) begin
          automatic int unsigned lane = (int'(bcnt) - BPV) * BEAT_B + i;
          o_out[lane] <= scale(o_out[lane], a_r) +
                         O_W'($signed({1'b0, p_r})) * O_W'($signed(beat_data[8*i +: 8]));
        end
      end
      bcnt <= (bcnt == BW'(2 * BPV - 1)) ? '0 : bcnt + 1'b1;
    end else if (ml_valid) begin
      m_out <= mm_new;
      a_r   <= ma;
      p_r   <= mb;
      l_out <= L_W'((({23'b0, l_out} * {40'b0, ma}) >> 16) +
                    (({23'b0, l_in}  * {40'b0, mb}) >> 16));
    end else if (ov_valid) begin
      for (int i = 0; i < 4; i++)
        o_out[ov_base + IW'(i)] <= scale(o_out[ov_base + IW'(i)], a_r) +
                                   scale(O_W'(ov_in[i]), p_r);
    end
  end

  // normalisation: one lane per cycle
  logic signed [O_W-1:0] quo;
  always_comb begin
    if (l_out == 0) quo = '0;
    else            quo = o_out[IW'(ncnt)] / O_W'($signed({1'b0, l_out}));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      norm_busy <= 1'b0;
      ncnt      <= '0;
      out_valid <= 1'b0;
      out_idx   <= '0;
      out_val   <= '0;
      norm_done <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      norm_done <= 1'b0;
      if (norm_start && !norm_busy) begin
        norm_busy <= 1'b1;
        ncnt      <= '0;
      end else if (norm_busy) begin
        out_valid <= 1'b1;
        out_idx   <= IW'(ncnt);
        out_val   <= (quo > 127) ? 8'sd127 : (quo < -128) ? -8'sd128 : 8'(quo);
        if (ncnt == (IW+1)'(D - 1)) begin
          norm_busy <= 1'b0;
          norm_done <= 1'b1;
        end
        ncnt <= ncnt + 1'b1;
      end
    end
  end
endmodule
