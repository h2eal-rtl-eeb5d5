// tb_logic_bank: self-checking test of one logic bank outside a tile.
//
// Two banks at reduced size (D=32, 4-token pages, 8-token window, 4 page
// slots, top-2) run the same token stream: one as a retrieval head (memory
// without stalls, used for the cycle check) and one as a streaming head
// (memory that withholds ready 20% of the time). A reference model
// (h2eal_ref_pkg) tracks sink, window, local pages, selection, importance
// and eviction and computes each decode step's softmax attention in floating
// point; every output lane must be within +-4 of it. The event counters must
// match the model, and a selection pass must take one metadata beat per
// cycle (n_pages * 2 beats plus the memory latency and a few cycles).
module tb_logic_bank;
  import h2eal_pkg::*;
  import h2eal_ref_pkg::*;

  localparam int D = 32, PAGE = 4, NS = 2, WIN = 8, LOCP = 2, NP = 4, K = 2, SELI = 3;
  localparam int TMAX = 4, TB = 2 * D / 32, LAT = 3;
  localparam int NTOK = 60, NPRE = 6, TOL = 4;
  localparam int AW = $clog2(NP * TB + NP * PAGE * TB + LOCP * PAGE * TB);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic          cmd_valid [2];
  logic          cmd_ready [2];
  op_e           cmd_op;
  logic [D*8-1:0] cq, ck, cv;
  logic          ov [2], od [2];
  logic [4:0]    oi [2];
  logic signed [7:0] oval [2];
  logic          mrv [2], mrr [2], mwe [2], mpv [2];
  logic [AW-1:0] ma [2];
  logic [255:0]  mwd [2], mrd [2];
  logic [31:0]   s_pages [2], s_evict [2], s_sel [2], s_reuse [2], s_rkv [2], s_share [2], s_stall [2];
  logic [ID_W-1:0] members [TMAX];
  logic          injv [2];
  flit_t         injf [2];
  flit_t         ejf;

  assign ejf = '0;
  initial for (int i = 0; i < TMAX; i++) members[i] = '0;

  for (genvar b = 0; b < 2; b++) begin : g_dut
    logic_bank #(.MY_ID(0), .D(D), .PAGE(PAGE), .N_SINK(NS), .WIN(WIN), .LOCP(LOCP),
                 .NPAGES(NP), .K(K), .SELI(SELI), .TMAX(TMAX)) dut (
      .clk, .rst_n,
      .cfg_is_ret(b == 0), .cfg_tile_lg('0), .cfg_member(members),
      .cmd_valid(cmd_valid[b]), .cmd_ready(cmd_ready[b]), .cmd_op(cmd_op),
      .cmd_q(cq), .cmd_k(ck), .cmd_v(cv),
      .out_valid(ov[b]), .out_idx(oi[b]), .out_val(oval[b]), .out_done(od[b]),
      .mem_req_valid(mrv[b]), .mem_req_ready(mrr[b]), .mem_req_we(mwe[b]),
      .mem_req_addr(ma[b]), .mem_req_wdata(mwd[b]),
      .mem_rsp_valid(mpv[b]), .mem_rsp_rdata(mrd[b]),
      .inj_valid(injv[b]), .inj_ready(1'b1), .inj_flit(injf[b]),
      .ej_valid(1'b0), .ej_ready(), .ej_flit(ejf),
      .st_pages(s_pages[b]), .st_evict(s_evict[b]), .st_select(s_sel[b]),
      .st_reuse(s_reuse[b]), .st_remote_kv(s_rkv[b]), .st_share(s_share[b]),
      .st_stall(s_stall[b]));
    hb_dram_model #(.AW(AW), .LAT(LAT), .STALL_PCT(b == 0 ? 0 : 20)) mem (
      .clk, .req_valid(mrv[b]), .req_ready(mrr[b]), .req_we(mwe[b]),
      .req_addr(ma[b]), .req_wdata(mwd[b]), .rsp_valid(mpv[b]), .rsp_rdata(mrd[b]));
  end

  // collected outputs
  int got [2][D];
  always @(negedge clk) for (int b = 0; b < 2; b++) if (ov[b]) got[b][oi[b]] = oval[b];

  // selection-pass cycle count of the retrieval bank
  int pass_cyc = 0, pass_bad = 0, passes = 0;
  bit in_pass = 0;
  int pass_pages;
  always @(posedge clk) begin
    if (g_dut[0].dut.state.name() == "S_SEL_PASS") begin
      if (!in_pass) pass_pages = int'(g_dut[0].dut.n_pages);
      in_pass  <= 1;
      pass_cyc <= pass_cyc + 1;
    end else if (in_pass) begin
      in_pass <= 0;
      passes++;
      if (pass_pages > 0 && (pass_cyc < pass_pages * TB || pass_cyc > pass_pages * TB + LAT + 3)) begin
        pass_bad++;
        $display("selection pass of %0d pages took %0d cycles", pass_pages, pass_cyc);
      end
      pass_cyc <= 0;
    end
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int rnd(int lo, int hi);
    return lo + int'($urandom % (hi - lo + 1));
  endfunction

  task automatic run_test();
    head_ref r [2];
    int q[], k[], v[], ids[$], ref_out[];
    bit acc;
    r[0] = new(D, PAGE, NS, WIN, LOCP, NP, K, SELI, 1);
    r[1] = new(D, PAGE, NS, WIN, LOCP, NP, K, SELI, 0);
    cmd_valid[0] = 0; cmd_valid[1] = 0;
    cmd_op = OP_APPEND; cq = '0; ck = '0; cv = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int t = 0; t < NTOK; t++) begin
      q = new[D]; k = new[D]; v = new[D];
      for (int i = 0; i < D; i++) begin
        q[i] = rnd(-8, 7); k[i] = rnd(-8, 7); v[i] = rnd(-100, 100);
        cq[8*i +: 8] = 8'(q[i]); ck[8*i +: 8] = 8'(k[i]); cv[8*i +: 8] = 8'(v[i]);
      end
      cmd_op = (t < NPRE) ? OP_APPEND : OP_DECODE;
      for (int b = 0; b < 2; b++) begin
        r[b].append(k, v);
        @(negedge clk);
        cmd_valid[b] = 1;
        do begin
          acc = cmd_ready[b];
          @(negedge clk);
        end while (!acc);
        cmd_valid[b] = 0;
        if (cmd_op == OP_DECODE) begin
          int bad = 0;
          do @(negedge clk); while (!od[b]);
          r[b].attended(q, ids);
          r[b].attend(q, ids, ref_out);
          for (int i = 0; i < D; i++)
            if (got[b][i] - ref_out[i] > TOL || ref_out[i] - got[b][i] > TOL) begin
              if (bad == 0) $display("bank %0d token %0d lane %0d: got %0d expected %0d",
                                     b, t, i, got[b][i], ref_out[i]);
              bad++;
            end
          checks++;
          if (bad != 0) failures++;
        end else begin
          do @(negedge clk); while (!cmd_ready[b]);
        end
      end
    end
    repeat (20) @(posedge clk);
    for (int b = 0; b < 2; b++) begin
      checks += 4;
      if (s_pages[b] != 32'(r[b].n_pop))    begin failures++; $display("bank %0d pages %0d vs %0d", b, s_pages[b], r[b].n_pop); end
      if (s_evict[b] != 32'(r[b].n_evict))  begin failures++; $display("bank %0d evict %0d vs %0d", b, s_evict[b], r[b].n_evict); end
      if (s_sel[b]   != 32'(r[b].n_select)) begin failures++; $display("bank %0d select %0d vs %0d", b, s_sel[b], r[b].n_select); end
      if (s_reuse[b] != 32'(r[b].n_reuse))  begin failures++; $display("bank %0d reuse %0d vs %0d", b, s_reuse[b], r[b].n_reuse); end
    end
    checks++;
    if (r[0].n_evict == 0 || r[0].n_reuse == 0 || s_stall[1] == 0) begin
      failures++;
      $display("a mechanism was not exercised: evict %0d reuse %0d stall %0d",
               r[0].n_evict, r[0].n_reuse, s_stall[1]);
    end
    checks++;
    if (pass_bad != 0 || passes == 0) failures++;
    $display("pages %0d evictions %0d selections %0d reuses %0d stalls %0d passes %0d",
             s_pages[0], s_evict[0], s_sel[0], s_reuse[0], s_stall[1], passes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial run_test();
endmodule
