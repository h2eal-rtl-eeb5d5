// tb_h2eal_top: end-to-end test of the 16-bank array with tiled retrieval heads.
//
// The 4x4 array is configured like the tiling example of the design notes:
// 4 retrieval heads and 12 streaming heads in 4 tiles of 4 banks, each tile a
// 2x2 block with its retrieval head in a different corner. Pages of a retrieval
// head are interleaved over its tile (token j of a page lives in member
// j mod 4), and each decode step of a retrieval head collects the partial
// softmax states of the three streaming banks over the NoC. Every bank has a
// memory model; some of them stall at random.
//
// Each bank runs its own random token stream (prefill with OP_APPEND, then
// OP_DECODE). The reference model (h2eal_ref_pkg) gives the expected int8
// output of every decode step (+-4 per lane) and the expected number of
// selections, reuses and evictions. The test also requires that every
// mechanism happened: page pops to the memory die, importance-based
// eviction, selection passes, shared selections, interleaved KV stores over
// the NoC, partial results computed by tile members, and memory stalls.
module tb_h2eal_top;
  import h2eal_pkg::*;
  import h2eal_ref_pkg::*;

  localparam int NX = 4, NY = 4, NB = NX * NY;
  localparam int D = 32, PAGE = 4, NS = 2, WIN = 8, LOCP = 2, NP = 4, K = 2, SELI = 3;
  localparam int TMAX = 4, TLW = $clog2(TMAX) + 1, IW = $clog2(D);
  localparam int NTOK = 40, NPRE = 10, TOL = 4, LAT = 4;
  localparam int TB = 2 * D / 32;
  localparam int AW = $clog2(NP * TB + NP * PAGE * TB + LOCP * PAGE * TB);
  localparam longint WATCHDOG = 400000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic            cfg_is_ret  [NB];
  logic [TLW-1:0]  cfg_tile_lg [NB];
  logic [ID_W-1:0] cfg_member  [NB][TMAX];
  logic            cmd_valid [NB], cmd_ready [NB];
  op_e             cmd_op [NB];
  logic [D*8-1:0]  cmd_q [NB], cmd_k [NB], cmd_v [NB];
  logic            out_valid [NB], out_done [NB];
  logic [IW-1:0]   out_idx [NB];
  logic signed [7:0] out_val [NB];
  logic            mrv [NB], mrr [NB], mwe [NB], mpv [NB];
  logic [AW-1:0]   ma [NB];
  logic [255:0]    mwd [NB], mrd [NB];
  logic [31:0]     s_pages [NB], s_evict [NB], s_sel [NB], s_reuse [NB], s_rkv [NB],
                   s_share [NB], s_stall [NB];

  h2eal_top #(.NX(NX), .NY(NY), .D(D), .PAGE(PAGE), .N_SINK(NS), .WIN(WIN), .LOCP(LOCP),
              .NPAGES(NP), .K(K), .SELI(SELI), .TMAX(TMAX)) dut (
    .clk, .rst_n, .cfg_is_ret, .cfg_tile_lg, .cfg_member,
    .cmd_valid, .cmd_ready, .cmd_op, .cmd_q, .cmd_k, .cmd_v,
    .out_valid, .out_idx, .out_val, .out_done,
    .mem_req_valid(mrv), .mem_req_ready(mrr), .mem_req_we(mwe), .mem_req_addr(ma),
    .mem_req_wdata(mwd), .mem_rsp_valid(mpv), .mem_rsp_rdata(mrd),
    .st_pages(s_pages), .st_evict(s_evict), .st_select(s_sel), .st_reuse(s_reuse),
    .st_remote_kv(s_rkv), .st_share(s_share), .st_stall(s_stall));

  for (genvar b = 0; b < NB; b++) begin : g_mem
    hb_dram_model #(.AW(AW), .LAT(LAT), .STALL_PCT((b % 3 == 0) ? 15 : 0)) mem (
      .clk, .req_valid(mrv[b]), .req_ready(mrr[b]), .req_we(mwe[b]), .req_addr(ma[b]),
      .req_wdata(mwd[b]), .rsp_valid(mpv[b]), .rsp_rdata(mrd[b]));
  end

  int got [NB][D];
  always @(negedge clk)
    for (int b = 0; b < NB; b++) if (out_valid[b]) got[b][out_idx[b]] = out_val[b];

  initial begin : watchdog
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  head_ref r [NB];

  // tiles: 2x2 blocks; retrieval head in a different corner of each block
  task automatic configure();
    int corner [4] = '{0, 1, NX, NX + 1};
    for (int b = 0; b < NB; b++) begin
      cfg_is_ret[b] = 0;
      cfg_tile_lg[b] = '0;
      for (int m = 0; m < TMAX; m++) cfg_member[b][m] = '0;
    end
    for (int t = 0; t < 4; t++) begin
      int base = (t / 2) * 2 * NX + (t % 2) * 2;
      int ret  = base + corner[t];
      int mem_list [$];
      mem_list.push_back(ret);
      for (int c = 0; c < 4; c++) if (base + corner[c] != ret) mem_list.push_back(base + corner[c]);
      cfg_is_ret[ret] = 1;
      foreach (mem_list[i]) begin
        cfg_tile_lg[mem_list[i]] = TLW'(2);
        for (int m = 0; m < 4; m++) cfg_member[mem_list[i]][m] = ID_W'(mem_list[m]);
      end
    end
  endtask

  function automatic int rnd(int lo, int hi);
    return lo + int'($urandom % (hi - lo + 1));
  endfunction

  task automatic run_bank(int b);
    int q[], k[], v[], ids[$], ref_out[];
    bit acc;
    for (int t = 0; t < NTOK; t++) begin
      q = new[D]; k = new[D]; v = new[D];
      @(negedge clk);
      for (int i = 0; i < D; i++) begin
        q[i] = rnd(-8, 7); k[i] = rnd(-8, 7); v[i] = rnd(-100, 100);
        cmd_q[b][8*i +: 8] = 8'(q[i]);
        cmd_k[b][8*i +: 8] = 8'(k[i]);
        cmd_v[b][8*i +: 8] = 8'(v[i]);
      end
      cmd_op[b] = (t < NPRE) ? OP_APPEND : OP_DECODE;
      r[b].append(k, v);
      cmd_valid[b] = 1;
      do begin
        acc = cmd_ready[b];
        @(negedge clk);
      end while (!acc);
      cmd_valid[b] = 0;
      if (t >= NPRE) begin
        int bad = 0;
        while (!out_done[b]) @(negedge clk);
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
      end
    end
  endtask

  initial begin
    longint t0;
    int n_pages = 0, n_evict = 0, n_sel = 0, n_reuse = 0, n_rkv = 0, n_share = 0, n_stall = 0;
    configure();
    for (int b = 0; b < NB; b++) begin
      r[b] = new(D, PAGE, NS, WIN, LOCP, NP, K, SELI, cfg_is_ret[b]);
      cmd_valid[b] = 0; cmd_op[b] = OP_APPEND;
      cmd_q[b] = '0; cmd_k[b] = '0; cmd_v[b] = '0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    t0 = $time;
    for (int b = 0; b < NB; b++) begin
      automatic int bb = b;
      fork
        run_bank(bb);
      join_none
    end
    wait fork;
    repeat (50) @(negedge clk);
    for (int b = 0; b < NB; b++) begin
      checks += 3;
      if (s_sel[b]   != 32'(r[b].n_select)) begin failures++; $display("bank %0d selections %0d vs %0d", b, s_sel[b], r[b].n_select); end
      if (s_reuse[b] != 32'(r[b].n_reuse))  begin failures++; $display("bank %0d reuses %0d vs %0d", b, s_reuse[b], r[b].n_reuse); end
      if (s_evict[b] != 32'(r[b].n_evict))  begin failures++; $display("bank %0d evictions %0d vs %0d", b, s_evict[b], r[b].n_evict); end
      n_pages += s_pages[b]; n_evict += s_evict[b]; n_sel += s_sel[b]; n_reuse += s_reuse[b];
      n_rkv += s_rkv[b]; n_share += s_share[b]; n_stall += s_stall[b];
      // a member computes one partial per decode step of its owner
      if (!cfg_is_ret[b]) begin
        checks++;
        if (s_share[b] != 32'(NTOK - NPRE)) begin
          failures++;
          $display("bank %0d shares %0d, expected %0d", b, s_share[b], NTOK - NPRE);
        end
      end
    end
    $display("mechanisms: page pops %0d, evictions %0d, selections %0d, reuses %0d, remote KV beats %0d, shared partials %0d, stall cycles %0d",
             n_pages, n_evict, n_sel, n_reuse, n_rkv, n_share, n_stall);
    checks += 7;
    if (n_pages == 0) begin failures++; $display("no page pop"); end
    if (n_evict == 0) begin failures++; $display("no eviction"); end
    if (n_sel   == 0) begin failures++; $display("no selection"); end
    if (n_reuse == 0) begin failures++; $display("no selection reuse"); end
    if (n_rkv   == 0) begin failures++; $display("no interleaved KV store"); end
    if (n_share == 0) begin failures++; $display("no shared partial"); end
    if (n_stall == 0) begin failures++; $display("no stall"); end
    $display("cycles %0d", ($time - t0) / 10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
