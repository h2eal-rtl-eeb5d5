// h2eal_top: the logic die of the hybrid-bonded accelerator.
//
// NX x NY logic banks (default 4 x 4 = 16), each sitting under its own
// memory-die bank, linked by a 2-D mesh NoC (noc_mesh). Every bank runs one
// KV head (head parallelism); groups of banks form tiles in which one
// retrieval head shares its KV storage and attention work with the streaming
// heads of the tile. The memory-die banks are outside this module: each
// bank's 256-bit memory port is a port of the top (mem_*), to be connected to
// the bonded DRAM bank. The head-to-bank mapping and the tiling are computed
// offline and arrive as static configuration (cfg_*), one entry per bank.
//
// Per bank the host drives one token at a time (cmd_*) and receives the int8
// attention output of decode steps (out_*). All other parts of the
// transformer (projections, FFN, all-reduce) are not part of this RTL.
//
// Parameters are those of logic_bank; their defaults are the full-size
// configuration.
module h2eal_top #(
  parameter int unsigned NX      = h2eal_pkg::MESH_X,
  parameter int unsigned NY      = h2eal_pkg::MESH_Y,
  parameter int unsigned D       = h2eal_pkg::HEAD_DIM,
  parameter int unsigned PAGE    = h2eal_pkg::PAGE,
  parameter int unsigned N_SINK  = h2eal_pkg::N_SINK,
  parameter int unsigned WIN     = h2eal_pkg::WIN_DEPTH,
  parameter int unsigned LOCP    = h2eal_pkg::LOC_PAGES,
  parameter int unsigned NPAGES  = h2eal_pkg::MAX_PAGES,
  parameter int unsigned K       = h2eal_pkg::TOPK,
  parameter int unsigned SELI    = h2eal_pkg::SEL_INTERVAL,
  parameter int unsigned TMAX    = h2eal_pkg::TILE_MAX,
  localparam int unsigned NB     = NX * NY,
  localparam int unsigned TB     = 2 * (D / h2eal_pkg::BEAT_B),
  localparam int unsigned AW     = $clog2(NPAGES * TB + NPAGES * PAGE * TB + LOCP * PAGE * TB),
  localparam int unsigned TLW    = $clog2(TMAX) + 1,
  localparam int unsigned IW     = $clog2(D)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          cfg_is_ret  [NB],
  input  logic [TLW-1:0]                cfg_tile_lg [NB],
  input  logic [h2eal_pkg::ID_W-1:0]    cfg_member  [NB][TMAX],
  input  logic                          cmd_valid [NB],
  output logic                          cmd_ready [NB],
  input  h2eal_pkg::op_e                cmd_op    [NB],
  input  logic [D*8-1:0]                cmd_q     [NB],
  input  logic [D*8-1:0]                cmd_k     [NB],
  input  logic [D*8-1:0]                cmd_v     [NB],
  output logic                          out_valid [NB],
  output logic [IW-1:0]                 out_idx   [NB],
  output logic signed [7:0]             out_val   [NB],
  output logic                          out_done  [NB],
  output logic                          mem_req_valid [NB],
  input  logic                          mem_req_ready [NB],
  output logic                          mem_req_we    [NB],
  output logic [AW-1:0]                 mem_req_addr  [NB],
  output logic [h2eal_pkg::BEAT_W-1:0]  mem_req_wdata [NB],
  input  logic                          mem_rsp_valid [NB],
  input  logic [h2eal_pkg::BEAT_W-1:0]  mem_rsp_rdata [NB],
  output logic [31:0]                   st_pages     [NB],
  output logic [31:0]                   st_evict     [NB],
  output logic [31:0]                   st_select    [NB],
  output logic [31:0]                   st_reuse     [NB],
  output logic [31:0]                   st_remote_kv [NB],
  output logic [31:0]                   st_share     [NB],
  output logic [31:0]                   st_stall     [NB]
);
  import h2eal_pkg::*;

  logic  inj_valid [NB];
  logic  inj_ready [NB];
  flit_t inj_flit  [NB];
  logic  ej_valid  [NB];
  logic  ej_ready  [NB];
  flit_t ej_flit   [NB];

  noc_mesh #(.NX(NX), .NY(NY)) u_noc (
    .clk, .rst_n,
    .inj_valid, .inj_ready, .inj_flit,
    .ej_valid, .ej_ready, .ej_flit);

  for (genvar b = 0; b < NB; b++) begin : g_bank
    logic_bank #(
      .MY_ID(b), .D(D), .PAGE(PAGE), .N_SINK(N_SINK), .WIN(WIN), .LOCP(LOCP),
      .NPAGES(NPAGES), .K(K), .SELI(SELI), .TMAX(TMAX)
    ) u_bank (
      .clk, .rst_n,
      .cfg_is_ret (cfg_is_ret[b]),
      .cfg_tile_lg(cfg_tile_lg[b]),
      .cfg_member (cfg_member[b]),
      .cmd_valid(cmd_valid[b]), .cmd_ready(cmd_ready[b]), .cmd_op(cmd_op[b]),
      .cmd_q(cmd_q[b]), .cmd_k(cmd_k[b]), .cmd_v(cmd_v[b]),
      .out_valid(out_valid[b]), .out_idx(out_idx[b]), .out_val(out_val[b]),
      .out_done(out_done[b]),
      .mem_req_valid(mem_req_valid[b]), .mem_req_ready(mem_req_ready[b]),
      .mem_req_we(mem_req_we[b]), .mem_req_addr(mem_req_addr[b]),
      .mem_req_wdata(mem_req_wdata[b]),
      .mem_rsp_valid(mem_rsp_valid[b]), .mem_rsp_rdata(mem_rsp_rdata[b]),
      .inj_valid(inj_valid[b]), .inj_ready(inj_ready[b]), .inj_flit(inj_flit[b]),
      .ej_valid(ej_valid[b]), .ej_ready(ej_ready[b]), .ej_flit(ej_flit[b]),
      .st_pages(st_pages[b]), .st_evict(st_evict[b]), .st_select(st_select[b]),
      .st_reuse(st_reuse[b]), .st_remote_kv(st_remote_kv[b]),
      .st_share(st_share[b]), .st_stall(st_stall[b]));
  end
endmodule
