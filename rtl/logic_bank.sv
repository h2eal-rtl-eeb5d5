// logic_bank: one logic bank of the hybrid-bonded accelerator, running the
// KV-cache side of one attention head (retrieval or streaming) and, inside a
// tile, taking a share of the retrieval head's work.
//
// What it holds on the logic die: the sink tokens (sink_token_mem), the most
// recent local tokens in a sliding-window FIFO (kv_window_fifo), the min/max
// metadata units (page_minmax), the per-page importance scores
// (importance_table), the relevance scorer and top-k selector, and one
// attention PE (attn_pe). The memory die below it is reached through a
// 256-bit request/response port (mem_*), and other banks through one NoC port.
//
// Operation per host token (cmd_*, OP_APPEND for prefill, OP_DECODE for a
// decoding step with a query):
//   1. The token's K/V is pushed into the sink memory (first N_SINK tokens)
//      or the window. When the window becomes full, its oldest PAGE tokens
//      are popped as one page:
//        streaming head: written to a ring of LOC_PAGES pages on the memory
//          die; the oldest page there is overwritten (discarded);
//        retrieval head: keys go through the min/max units; token j of the
//          page goes to tile member j mod TN (interleaved bank allocation),
//          to its own memory or as F_KV flits to another bank; the metadata
//          is written to the own memory die. If the page budget NPAGES is
//          full, the page with the lowest importance is evicted first.
//   2. OP_DECODE, retrieval head: every SEL_INTERVAL-th query runs a
//      selection pass (metadata of all pages streamed from memory, relevance
//      max(q.tmin, q.tmax) accumulated into importance, top-k kept); the
//      queries in between reuse that selection. Query and selected page ids
//      are sent to the other tile members (F_Q, F_SEL).
//   3. The PE attends over sink tokens, window tokens and memory tokens
//      (retrieval: this bank's slices of the selected pages; streaming: the
//      local pages). A retrieval owner then merges each member's partial
//      softmax state (F_GO to ask for it, F_ML/F_O back), normalises, and
//      streams the int8 result lanes on out_*.
//   A tile member does its own head's step and, when a request from its
//   owner is complete, attends over its slices of the owner's selected pages
//   and returns the partial state (memory-compute co-placement: the bank that
//   stores a token computes with it).
//
// Static configuration (cfg_*): head type, tile size TN = 2^cfg_tile_lg and
// the member bank ids (member 0 is the owner, the retrieval bank).
// The host waits for cmd_ready; out_done marks the end of a decode step.
//
// Timing: memory and NoC traffic moves one 256-bit beat per cycle when not
// back-pressured (st_stall counts the cycles it is). A token is 2*D/32 beats
// (key then value), so the PE takes one token per 2*D/32 cycles; a selection
// pass streams the metadata of n pages in n*2*D/32 cycles plus the memory
// latency; popping a page writes PAGE*2*D/32 beats plus the metadata.
// Normalisation emits one output lane per cycle (D cycles).
//
// The split of work and storage follows the paper (Fig. 6, 7 and Sec. IV).
// The message protocol, the memory layout, the order of the phases and the
// sequential request of partials (F_GO) are this design's choices.
module logic_bank #(
  parameter int unsigned MY_ID   = 0,
  parameter int unsigned D       = h2eal_pkg::HEAD_DIM,
  parameter int unsigned PAGE    = h2eal_pkg::PAGE,
  parameter int unsigned N_SINK  = h2eal_pkg::N_SINK,
  parameter int unsigned WIN     = h2eal_pkg::WIN_DEPTH,
  parameter int unsigned LOCP    = h2eal_pkg::LOC_PAGES,
  parameter int unsigned NPAGES  = h2eal_pkg::MAX_PAGES,
  parameter int unsigned K       = h2eal_pkg::TOPK,
  parameter int unsigned SELI    = h2eal_pkg::SEL_INTERVAL,
  parameter int unsigned TMAX    = h2eal_pkg::TILE_MAX,
  localparam int unsigned BPV    = D / h2eal_pkg::BEAT_B,
  localparam int unsigned TB     = 2 * BPV,
  localparam int unsigned META_BASE  = 0,
  localparam int unsigned SLICE_BASE = NPAGES * TB,
  localparam int unsigned LOC_BASE   = SLICE_BASE + NPAGES * PAGE * TB,
  localparam int unsigned MEM_WORDS  = LOC_BASE + LOCP * PAGE * TB,
  localparam int unsigned AW     = $clog2(MEM_WORDS),
  localparam int unsigned PID_W  = $clog2(NPAGES),
  localparam int unsigned TLW    = $clog2(TMAX) + 1,
  localparam int unsigned IW     = $clog2(D)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // static configuration
  input  logic                          cfg_is_ret,
  input  logic [TLW-1:0]                cfg_tile_lg,
  input  logic [h2eal_pkg::ID_W-1:0]    cfg_member [TMAX],
  // host command
  input  logic                          cmd_valid,
  output logic                          cmd_ready,
  input  h2eal_pkg::op_e                cmd_op,
  input  logic [D*8-1:0]                cmd_q,
  input  logic [D*8-1:0]                cmd_k,
  input  logic [D*8-1:0]                cmd_v,
  // attention output
  output logic                          out_valid,
  output logic [IW-1:0]                 out_idx,
  output logic signed [7:0]             out_val,
  output logic                          out_done,
  // memory die
  output logic                          mem_req_valid,
  input  logic                          mem_req_ready,
  output logic                          mem_req_we,
  output logic [AW-1:0]                 mem_req_addr,
  output logic [h2eal_pkg::BEAT_W-1:0]  mem_req_wdata,
  input  logic                          mem_rsp_valid,
  input  logic [h2eal_pkg::BEAT_W-1:0]  mem_rsp_rdata,
  // NoC
  output logic                          inj_valid,
  input  logic                          inj_ready,
  output h2eal_pkg::flit_t              inj_flit,
  input  logic                          ej_valid,
  output logic                          ej_ready,
  input  h2eal_pkg::flit_t              ej_flit,
  // event counters
  output logic [31:0]                   st_pages,     // pages popped from the window
  output logic [31:0]                   st_evict,     // pages evicted
  output logic [31:0]                   st_select,    // selection passes
  output logic [31:0]                   st_reuse,     // queries that reused a selection
  output logic [31:0]                   st_remote_kv, // KV beats sent to other banks
  output logic [31:0]                   st_share,     // partials computed for the owner
  output logic [31:0]                   st_stall      // cycles waiting on memory or NoC
);
  import h2eal_pkg::*;
  localparam int unsigned BW   = $clog2(TB);
  localparam int unsigned LGP  = $clog2(PAGE);
  localparam int unsigned SLW  = (N_SINK > 1) ? $clog2(N_SINK) : 1;
  localparam int unsigned WW   = $clog2(WIN);
  localparam int unsigned KCW  = $clog2(K + 1);

  typedef enum logic [4:0] {
    S_IDLE, S_PUSH, S_POP_PREP, S_SCAN, S_POP, S_META, S_SEL_CHECK, S_SEL_CLR,
    S_SEL_PASS, S_REQ, S_ATT_CLR, S_ATT_SINK, S_ATT_WIN, S_ATT_MEM, S_GO,
    S_ABSORB, S_NORM, S_NORM_WAIT, S_SH_WAIT, S_SH_SEND
  } state_e;

  state_e state;
  logic   share;                 // current attention is a share for the owner
  op_e    op_r;
  logic [D*8-1:0] q_r, k_r, v_r;
  logic [PID_W-1:0] slot;        // page slot being filled
  logic [D*8-1:0]   shq;         // query received from the owner
  logic             rel_seen;

  // ---------------- sub-blocks ----------------
  logic           snk_full;
  logic [$clog2(N_SINK+1)-1:0] snk_cnt;
  logic [SLW-1:0] snk_idx;
  logic [D*8-1:0] snk_k, snk_v;
  logic           snk_wr;

  sink_token_mem #(.D(D), .N_SINK(N_SINK)) u_sink (
    .clk, .rst_n, .clear(1'b0), .wr_en(snk_wr), .wr_k(k_r), .wr_v(v_r),
    .full(snk_full), .count(snk_cnt), .rd_idx(snk_idx), .rd_k(snk_k), .rd_v(snk_v));

  logic           win_push, win_pop, win_full;
  logic [D*8-1:0] win_pk, win_pv, win_rk, win_rv;
  logic [$clog2(WIN+1)-1:0] win_cnt;
  logic [WW-1:0]  win_idx;

  kv_window_fifo #(.D(D), .DEPTH(WIN)) u_win (
    .clk, .rst_n, .push(win_push), .push_k(k_r), .push_v(v_r), .pop(win_pop),
    .pop_k(win_pk), .pop_v(win_pv), .count(win_cnt), .full(win_full),
    .rd_idx(win_idx), .rd_k(win_rk), .rd_v(win_rv));

  logic           mm_in;
  logic           mm_done;
  logic [D*8-1:0] mm_min, mm_max;

  page_minmax #(.D(D), .PAGE(PAGE)) u_mm (
    .clk, .rst_n, .clear(1'b0), .in_valid(mm_in), .in_k(win_pk),
    .out_valid(mm_done), .out_min(mm_min), .out_max(mm_max));

  logic [PID_W:0]       n_pages;
  logic                 imp_acc, imp_set, scan_go, scan_busy, scan_done;
  logic [PID_W-1:0]     imp_acc_idx, victim;
  logic signed [31:0]   imp_acc_val, imp_rd, victim_val;

  importance_table #(.NPAGES(NPAGES), .SW(32)) u_imp (
    .clk, .rst_n, .n_valid(n_pages),
    .acc_en(imp_acc), .acc_idx(imp_acc_idx), .acc_val(imp_acc_val),
    .set_en(imp_set), .set_idx(slot), .set_val(32'sd0),
    .rd_idx(slot), .rd_val(imp_rd),
    .scan_start(scan_go), .scan_busy(scan_busy), .scan_done(scan_done),
    .victim_idx(victim), .victim_val(victim_val));

  logic               rel_in;
  logic               rel_v;
  logic signed [31:0] rel_s;
  logic [15:0]        rel_tag, rel_in_tag;

  relevance_unit #(.D(D), .TAG_W(16)) u_rel (
    .clk, .rst_n, .q(q_r), .beat_valid(rel_in), .beat_data(mem_rsp_rdata),
    .beat_tag(rel_in_tag), .score_valid(rel_v), .score(rel_s), .score_tag(rel_tag));

  logic               tk_clr;
  logic [KCW-1:0]     tk_cnt;
  logic [PID_W-1:0]   tk_id [K];
  logic signed [31:0] tk_sc [K];

  topk_select #(.K(K), .ID_W(PID_W)) u_topk (
    .clk, .rst_n, .clear(tk_clr), .in_valid(rel_v), .in_score(rel_s),
    .in_id(PID_W'(rel_tag)), .count(tk_cnt), .out_id(tk_id), .out_score(tk_sc));

  logic                 pe_clr, pe_beat, pe_ml, pe_ov, pe_norm, pe_nbusy, pe_ndone;
  logic [BEAT_W-1:0]    pe_data;
  logic [IW-1:0]        pe_ovb;
  logic signed [63:0]   pe_ovin [4];
  logic signed [31:0]   pe_m;
  logic [L_W-1:0]       pe_l;
  logic signed [O_W-1:0] pe_o [D];
  logic [31:0]          pe_tok;
  logic                 pe_out_v;
  logic [IW-1:0]        pe_out_i;
  logic signed [7:0]    pe_out_d;

  attn_pe #(.D(D)) u_pe (
    .clk, .rst_n, .clear(pe_clr), .q(share ? shq : q_r),
    .beat_valid(pe_beat), .beat_data(pe_data),
    .ml_valid(pe_ml), .m_in($signed(ej_flit.data[31:0])),
    .l_in(ej_flit.data[32 +: L_W]),
    .ov_valid(pe_ov), .ov_base(pe_ovb), .ov_in(pe_ovin),
    .norm_start(pe_norm), .norm_busy(pe_nbusy),
    .out_valid(pe_out_v), .out_idx(pe_out_i), .out_val(pe_out_d), .norm_done(pe_ndone),
    .m_out(pe_m), .l_out(pe_l), .o_out(pe_o), .tokens(pe_tok));

  // ---------------- tile geometry ----------------
  logic [TLW-1:0]  tn_m1;          // TN-1 as a mask
  logic [LGP:0]    sl;             // slice: tokens of a page held per bank
  assign tn_m1 = TLW'((1 << cfg_tile_lg) - 1);
  assign sl    = (LGP+1)'(PAGE >> cfg_tile_lg);

  // ---------------- retrieval / streaming state ----------------
  logic [$clog2(LOCP):0]    ring_ptr, ring_cnt;
  logic                     sel_valid;
  logic [$clog2(SELI+1)-1:0] sel_age;

  // ---------------- share request buffers (tile member side) ----------------
  logic [PID_W-1:0]   shsel [K];
  logic [15:0]        sh_cnt;
  logic [BPV:0]       sh_qgot;
  logic [15:0]        sh_sgot;
  logic               sh_go;
  logic               sh_ready;
  assign sh_ready = (sh_qgot == (BPV+1)'(BPV)) &&
                    (sh_sgot != 0) && (sh_sgot == ((sh_cnt == 0) ? 16'd1 : (sh_cnt + 15) >> 4));

  // ---------------- incoming KV store FIFO ----------------
  localparam int unsigned KVD = 4;
  logic [AW-1:0]     kvf_a [KVD];
  logic [BEAT_W-1:0] kvf_d [KVD];
  logic [1:0]        kvf_rp, kvf_wp;
  logic [2:0]        kvf_n;
  logic              kvf_push, kvf_pop;

  // ---------------- counters for the sequencing ----------------
  logic [31:0] tok, rx_tok;     // token counters (issue / receive)
  logic [BW-1:0] bt, rx_bt;     // beat counters (issue / receive)
  logic [31:0] ntok;            // tokens in the current sweep
  logic [TLW-1:0] mem_i;        // member index for requests / partials
  logic [15:0] fcnt;            // flit counter

  // beat b of token (k, v)
  function automatic logic [BEAT_W-1:0] beat_of(input logic [D*8-1:0] k,
                                                 input logic [D*8-1:0] v,
                                                 input logic [BW-1:0] b);
    if (int'(b) < BPV) return k[BEAT_W * int'(b) +: BEAT_W];
    return v[BEAT_W * (int'(b) - BPV) +: BEAT_W];
  endfunction

  // memory address of token t of the current memory sweep
  logic [PID_W-1:0] sw_page;
  logic [31:0]      sw_u;
  logic [AW-1:0]    sw_addr;
  always_comb begin
    automatic int unsigned sh = LGP - int'(cfg_tile_lg);
    automatic int unsigned pidx = tok >> sh;
    sw_u    = tok & ((32'd1 << sh) - 1);
    sw_page = share ? shsel[pidx % K] : tk_id[pidx % K];
    if (!share && !cfg_is_ret)
      sw_addr = AW'(LOC_BASE + tok * TB + int'(bt));
    else
      sw_addr = AW'(SLICE_BASE + (int'(sw_page) * int'(sl) + sw_u) * TB + int'(bt));
  end

  // pop destination of window token `tok` (retrieval head)
  logic [TLW-1:0] pop_m;
  logic [AW-1:0]  pop_addr;
  always_comb begin
    pop_m = TLW'(tok) & tn_m1;
    if (cfg_is_ret)
      pop_addr = AW'(SLICE_BASE + (int'(slot) * int'(sl) + (tok >> cfg_tile_lg)) * TB + int'(bt));
    else
      pop_addr = AW'(LOC_BASE + ((int'(ring_ptr) * PAGE) + tok) * TB + int'(bt));
  end

  logic last_beat, issue_done, rx_done;
  assign last_beat  = (bt == BW'(TB - 1));
  assign issue_done = (tok >= ntok);
  assign rx_done    = (rx_tok >= ntok);

  assign snk_idx = SLW'(tok);
  assign win_idx = WW'(tok);

  // ---------------- datapath control (combinational) ----------------
  always_comb begin
    cmd_ready     = 1'b0;
    mem_req_valid = 1'b0;
    mem_req_we    = 1'b0;
    mem_req_addr  = '0;
    mem_req_wdata = '0;
    inj_valid     = 1'b0;
    inj_flit      = '0;
    inj_flit.src  = ID_W'(MY_ID);
    snk_wr = 1'b0; win_push = 1'b0; win_pop = 1'b0; mm_in = 1'b0;
    imp_acc = rel_v; imp_acc_idx = PID_W'(rel_tag); imp_acc_val = rel_s;
    imp_set = 1'b0; scan_go = 1'b0;
    rel_in = 1'b0; rel_in_tag = 16'(rx_tok);
    tk_clr = 1'b0;
    pe_clr = 1'b0; pe_beat = 1'b0; pe_data = '0; pe_ml = 1'b0; pe_ov = 1'b0;
    pe_norm = 1'b0;
    pe_ovb  = IW'(fcnt << 2);
    for (int i = 0; i < 4; i++) pe_ovin[i] = $signed(ej_flit.data[64*i +: 64]);
    kvf_pop = 1'b0;

    case (state)
      S_IDLE: begin
        if (kvf_n != 0) begin
          mem_req_valid = 1'b1;
          mem_req_we    = 1'b1;
          mem_req_addr  = kvf_a[kvf_rp];
          mem_req_wdata = kvf_d[kvf_rp];
          kvf_pop       = mem_req_ready;
        end else if (!sh_ready) begin
          cmd_ready = 1'b1;
        end
      end
      S_PUSH: begin
        if (!snk_full) snk_wr = 1'b1;
        else           win_push = 1'b1;
      end
      S_SCAN: scan_go = !scan_busy && !scan_done;
      S_POP: begin
        if (!cfg_is_ret || pop_m == 0) begin
          mem_req_valid = 1'b1;
          mem_req_we    = 1'b1;
          mem_req_addr  = pop_addr;
          mem_req_wdata = beat_of(win_pk, win_pv, bt);
          if (mem_req_ready && last_beat) begin
            win_pop = 1'b1;
            mm_in   = cfg_is_ret;
          end
        end else begin
          inj_valid      = 1'b1;
          inj_flit.dst   = cfg_member[int'(pop_m) % TMAX];
          inj_flit.ftype = F_KV;
          inj_flit.aux   = 32'(pop_addr);
          inj_flit.data  = beat_of(win_pk, win_pv, bt);
          if (inj_ready && last_beat) begin
            win_pop = 1'b1;
            mm_in   = 1'b1;
          end
        end
      end
      S_META: begin
        if (int'(bt) < TB) begin
          mem_req_valid = 1'b1;
          mem_req_we    = 1'b1;
          mem_req_addr  = AW'(META_BASE + int'(slot) * TB + int'(bt));
          mem_req_wdata = beat_of(mm_min, mm_max, bt);
        end
        imp_set = last_beat && mem_req_ready;
      end
      S_SEL_CLR: tk_clr = 1'b1;
      S_SEL_PASS: begin
        if (!issue_done) begin
          mem_req_valid = 1'b1;
          mem_req_addr  = AW'(META_BASE + tok * TB + int'(bt));
        end
        rel_in = mem_rsp_valid;
      end
      S_REQ: begin
        inj_valid    = 1'b1;
        inj_flit.dst = cfg_member[int'(mem_i) % TMAX];
        if (fcnt < 16'(BPV)) begin
          inj_flit.ftype = F_Q;
          inj_flit.aux   = 32'(fcnt);
          inj_flit.data  = q_r[BEAT_W * (int'(fcnt) % BPV) +: BEAT_W];
        end else begin
          inj_flit.ftype = F_SEL;
          inj_flit.aux   = {16'(tk_cnt), fcnt - 16'(BPV)};
          for (int i = 0; i < 16; i++)
            inj_flit.data[16*i +: 16] = 16'(tk_id[((int'(fcnt) - BPV) * 16 + i) % K]);
        end
      end
      S_ATT_CLR: pe_clr = 1'b1;
      S_ATT_SINK: begin
        pe_beat = (tok < 32'(snk_cnt));
        pe_data = beat_of(snk_k, snk_v, bt);
      end
      S_ATT_WIN: begin
        pe_beat = (tok < 32'(win_cnt));
        pe_data = beat_of(win_rk, win_rv, bt);
      end
      S_ATT_MEM: begin
        if (!issue_done) begin
          mem_req_valid = 1'b1;
          mem_req_addr  = sw_addr;
        end
        pe_beat = mem_rsp_valid;
        pe_data = mem_rsp_rdata;
      end
      S_GO: begin
        inj_valid      = 1'b1;
        inj_flit.dst   = cfg_member[int'(mem_i) % TMAX];
        inj_flit.ftype = F_GO;
      end
      S_ABSORB: begin
        pe_ml = ej_valid && ej_flit.ftype == F_ML;
        pe_ov = ej_valid && ej_flit.ftype == F_O;
        pe_ovb = IW'(ej_flit.aux);
      end
      S_NORM: pe_norm = 1'b1;
      S_SH_SEND: begin
        inj_valid    = 1'b1;
        inj_flit.dst = cfg_member[0];
        if (fcnt == 0) begin
          inj_flit.ftype = F_ML;
          inj_flit.data[31:0]     = pe_m;
          inj_flit.data[32 +: L_W] = pe_l;
        end else begin
          inj_flit.ftype = F_O;
          inj_flit.aux   = 32'((int'(fcnt) - 1) * 4);
          for (int i = 0; i < 4; i++)
            inj_flit.data[64*i +: 64] = 64'(pe_o[((int'(fcnt) - 1) * 4 + i) % D]);
        end
      end
      default: ;
    endcase
  end

  // ---------------- NoC ingress ----------------
  logic ej_take;
  always_comb begin
    case (ej_flit.ftype)
      F_KV:       ej_ready = (kvf_n != 3'(KVD));
      F_Q, F_SEL, F_GO: ej_ready = 1'b1;
      F_ML, F_O:  ej_ready = (state == S_ABSORB);
      default:    ej_ready = 1'b1;
    endcase
    ej_take  = ej_valid && ej_ready;
    kvf_push = ej_take && ej_flit.ftype == F_KV;
  end

  assign out_valid = pe_out_v && !share;
  assign out_idx   = pe_out_i;
  assign out_val   = pe_out_d;

  // ---------------- sequencing ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      share <= 1'b0;
      op_r  <= OP_APPEND;
      q_r <= '0; k_r <= '0; v_r <= '0;
      tok <= '0; bt <= '0; rx_tok <= '0; rx_bt <= '0; ntok <= '0;
      mem_i <= '0; fcnt <= '0;
      slot <= '0; n_pages <= '0; ring_ptr <= '0; ring_cnt <= '0;
      sel_valid <= 1'b0; sel_age <= '0;
      out_done <= 1'b0;
      st_pages <= '0; st_evict <= '0; st_select <= '0; st_reuse <= '0;
      st_remote_kv <= '0; st_share <= '0; st_stall <= '0;
    end else begin
      out_done <= 1'b0;
      if ((mem_req_valid && !mem_req_ready) || (inj_valid && !inj_ready))
        st_stall <= st_stall + 1'b1;
      if (inj_valid && inj_ready && inj_flit.ftype == F_KV)
        st_remote_kv <= st_remote_kv + 1'b1;

      case (state)
        S_IDLE: begin
          if (kvf_n == 0 && sh_ready) begin
            share <= 1'b1;
            state <= S_ATT_CLR;
          end else if (cmd_valid && cmd_ready) begin
            share <= 1'b0;
            op_r  <= cmd_op;
            q_r   <= cmd_q;
            k_r   <= cmd_k;
            v_r   <= cmd_v;
            state <= S_PUSH;
          end
        end
        S_PUSH: begin
          tok <= '0; bt <= '0;
          if (snk_full && win_cnt == ($clog2(WIN+1))'(WIN - 1))
            state <= S_POP_PREP;
          else
            state <= (op_r == OP_DECODE) ? S_SEL_CHECK : S_IDLE;
        end
        S_POP_PREP: begin
          if (!cfg_is_ret) begin
            state <= S_POP;
          end else if (n_pages < (PID_W+1)'(NPAGES)) begin
            slot  <= PID_W'(n_pages);
            state <= S_POP;
          end else begin
            state <= S_SCAN;
          end
        end
        S_SCAN: begin
          if (scan_done) begin
            slot      <= victim;
            sel_valid <= 1'b0;       // the selection may name the evicted page
            st_evict  <= st_evict + 1'b1;
            state     <= S_POP;
          end
        end
        S_POP: begin
          if ((mem_req_valid && mem_req_ready) || (inj_valid && inj_ready)) begin
            bt <= last_beat ? '0 : bt + 1'b1;
            if (last_beat) begin
              tok <= tok + 1'b1;
              if (tok == 32'(PAGE - 1)) begin
                tok   <= '0;
                st_pages <= st_pages + 1'b1;
                if (cfg_is_ret) begin
                  state <= S_META;
                end else begin
                  ring_ptr <= (ring_ptr == ($clog2(LOCP)+1)'(LOCP - 1)) ? '0 : ring_ptr + 1'b1;
                  if (ring_cnt != ($clog2(LOCP)+1)'(LOCP)) ring_cnt <= ring_cnt + 1'b1;
                  state <= (op_r == OP_DECODE) ? S_SEL_CHECK : S_IDLE;
                end
              end
            end
          end
        end
        S_META: begin
          if (mem_req_ready) begin
            bt <= last_beat ? '0 : bt + 1'b1;
            if (last_beat) begin
              if (n_pages == (PID_W+1)'(slot)) n_pages <= n_pages + 1'b1;
              state <= (op_r == OP_DECODE) ? S_SEL_CHECK : S_IDLE;
            end
          end
        end
        S_SEL_CHECK: begin
          tok <= '0; bt <= '0; rx_tok <= '0; rx_bt <= '0;
          mem_i <= TLW'(1); fcnt <= '0;
          ntok <= 32'(n_pages);
          if (!cfg_is_ret) begin
            state <= S_ATT_CLR;
          end else if (!sel_valid || sel_age == ($clog2(SELI+1))'(SELI - 1)) begin
            state <= S_SEL_CLR;
          end else begin
            sel_age  <= sel_age + 1'b1;
            st_reuse <= st_reuse + 1'b1;
            state    <= (cfg_tile_lg != 0) ? S_REQ : S_ATT_CLR;
          end
        end
        S_SEL_CLR: state <= S_SEL_PASS;
        S_SEL_PASS: begin
          if (mem_req_valid && mem_req_ready) begin
            bt <= last_beat ? '0 : bt + 1'b1;
            if (last_beat) tok <= tok + 1'b1;
          end
          if (mem_rsp_valid) begin
            rx_bt <= (rx_bt == BW'(TB - 1)) ? '0 : rx_bt + 1'b1;
            if (rx_bt == BW'(TB - 1)) rx_tok <= rx_tok + 1'b1;
          end
          // finished once the last score has come out of the relevance unit
          if (rx_done && issue_done && !rel_v && !(mem_rsp_valid)) begin
            if (ntok == 0 || rel_seen) begin
              sel_valid <= 1'b1;
              sel_age   <= '0;
              st_select <= st_select + 1'b1;
              state     <= (cfg_tile_lg != 0) ? S_REQ : S_ATT_CLR;
            end
          end
        end
        S_REQ: begin
          if (inj_ready) begin
            fcnt <= fcnt + 1'b1;
            if (fcnt >= 16'(BPV) &&
                (fcnt - 16'(BPV) + 1) * 16 >= ((tk_cnt == 0) ? 16'd1 : 16'(tk_cnt))) begin
              fcnt <= '0;
              if (mem_i == tn_m1) state <= S_ATT_CLR;
              mem_i <= mem_i + 1'b1;
            end
          end
        end
        S_ATT_CLR: begin
          tok <= '0; bt <= '0; rx_tok <= '0; rx_bt <= '0;
          state <= share ? S_ATT_MEM : S_ATT_SINK;
          if (share) ntok <= 32'(sh_cnt) * 32'(sl);
          else if (!cfg_is_ret) ntok <= 32'(ring_cnt) * PAGE;
          else if (sel_valid) ntok <= 32'(tk_cnt) * 32'(sl);
          else ntok <= '0;
        end
        S_ATT_SINK: begin
          bt <= last_beat ? '0 : bt + 1'b1;
          if (last_beat) tok <= tok + 1'b1;
          if (tok >= 32'(snk_cnt)) begin
            tok <= '0; bt <= '0;
            state <= S_ATT_WIN;
          end
        end
        S_ATT_WIN: begin
          bt <= last_beat ? '0 : bt + 1'b1;
          if (last_beat) tok <= tok + 1'b1;
          if (tok >= 32'(win_cnt)) begin
            tok <= '0; bt <= '0;
            state <= S_ATT_MEM;
          end
        end
        S_ATT_MEM: begin
          if (mem_req_valid && mem_req_ready) begin
            bt <= last_beat ? '0 : bt + 1'b1;
            if (last_beat) tok <= tok + 1'b1;
          end
          if (mem_rsp_valid) begin
            rx_bt <= (rx_bt == BW'(TB - 1)) ? '0 : rx_bt + 1'b1;
            if (rx_bt == BW'(TB - 1)) rx_tok <= rx_tok + 1'b1;
          end
          if (issue_done && rx_done) begin
            mem_i <= TLW'(1);
            fcnt  <= '0;
            if (share)                                  state <= S_SH_WAIT;
            else if (cfg_is_ret && cfg_tile_lg != 0)    state <= S_GO;
            else                                        state <= S_NORM;
          end
        end
        S_GO: if (inj_ready) begin
          fcnt  <= '0;
          state <= S_ABSORB;
        end
        S_ABSORB: begin
          if (ej_take && (ej_flit.ftype == F_ML || ej_flit.ftype == F_O)) begin
            fcnt <= fcnt + 1'b1;
            if (fcnt == 16'(D / 4)) begin
              fcnt <= '0;
              mem_i <= mem_i + 1'b1;
              state <= (mem_i == tn_m1) ? S_NORM : S_GO;
            end
          end
        end
        S_NORM: state <= S_NORM_WAIT;
        S_NORM_WAIT: if (pe_ndone) begin
          out_done <= 1'b1;
          state    <= S_IDLE;
        end
        S_SH_WAIT: if (sh_go) begin
          fcnt  <= '0;
          state <= S_SH_SEND;
        end
        S_SH_SEND: if (inj_ready) begin
          fcnt <= fcnt + 1'b1;
          if (fcnt == 16'(D / 4)) begin
            st_share <= st_share + 1'b1;
            share    <= 1'b0;
            state    <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // a score has come out of the relevance unit during this pass
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  rel_seen <= 1'b0;
    else if (state == S_SEL_CLR) rel_seen <= 1'b0;
    else if (rel_v)              rel_seen <= 1'b1;
  end

  // share request buffers and KV FIFO
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shq <= '0; sh_cnt <= '0; sh_qgot <= '0; sh_sgot <= '0; sh_go <= 1'b0;
      for (int i = 0; i < K; i++) shsel[i] <= '0;
      kvf_rp <= '0; kvf_wp <= '0; kvf_n <= '0;
      for (int i = 0; i < KVD; i++) begin
        kvf_a[i] <= '0;
        kvf_d[i] <= '0;
      end
    end else begin
      if (ej_take && ej_flit.ftype == F_Q) begin
        shq[BEAT_W * (int'(ej_flit.aux) % BPV) +: BEAT_W] <= ej_flit.data;
        sh_qgot <= sh_qgot + 1'b1;
      end
      if (ej_take && ej_flit.ftype == F_SEL) begin
        sh_cnt  <= ej_flit.aux[31:16];
        sh_sgot <= sh_sgot + 1'b1;
        for (int i = 0; i < 16; i++)
          if (int'(ej_flit.aux[15:0]) * 16 + i < K)
            shsel[(int'(ej_flit.aux[15:0]) * 16 + i) % K] <= PID_W'(ej_flit.data[16*i +: 16]);
      end
      if (ej_take && ej_flit.ftype == F_GO) sh_go <= 1'b1;
      if (state == S_SH_SEND && inj_ready && fcnt == 16'(D / 4)) begin
        sh_go   <= 1'b0;
        sh_qgot <= '0;
        sh_sgot <= '0;
      end
      if (kvf_push) begin
        kvf_a[kvf_wp] <= AW'(ej_flit.aux);
        kvf_d[kvf_wp] <= ej_flit.data;
        kvf_wp <= kvf_wp + 1'b1;
      end
      if (kvf_pop) kvf_rp <= kvf_rp + 1'b1;
      kvf_n <= kvf_n + 3'(kvf_push) - 3'(kvf_pop);
    end
  end

  a_tile_pow2: assert property (@(posedge clk) disable iff (!rst_n)
                                (PAGE >> cfg_tile_lg) >= 1 && int'(cfg_tile_lg) <= $clog2(TMAX));
  a_sel_fits:  assert property (@(posedge clk) disable iff (!rst_n)
                                ej_take && ej_flit.ftype == F_SEL |-> ej_flit.aux[31:16] <= 16'(K));
endmodule
