// noc_router: one node of the 2-D mesh that links the logic banks.
//
// Five ports: 0 local bank, 1 north (y-1), 2 east (x+1), 3 south (y+1),
// 4 west (x-1). Every flit is a single 256-bit-payload packet (h2eal_pkg::flit_t)
// that carries its destination bank id. Each input has a FIFO of IN_DEPTH
// flits; the head flit is routed dimension-ordered (X first, then Y), which is
// deadlock-free on a mesh and keeps flits between one pair of banks in order.
// Every output has a round-robin arbiter over the inputs that request it.
//
// Handshake: valid/ready on every port; a flit moves when both are high.
// in_ready depends only on the FIFO fill level, so there is no combinational
// path from out_ready to in_ready across a link.
// Timing: a flit spends at least one cycle in each router it crosses.
//
// The paper gives only "4x4 2-d mesh, 256 bits bandwidth"; routing,
// buffering and arbitration are this design's choices.
module noc_router #(
  parameter int unsigned X        = 0,
  parameter int unsigned Y        = 0,
  parameter int unsigned NX       = h2eal_pkg::MESH_X,
  parameter int unsigned IN_DEPTH = 2
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid [5],
  output logic                in_ready [5],
  input  h2eal_pkg::flit_t    in_flit  [5],
  output logic                out_valid [5],
  input  logic                out_ready [5],
  output h2eal_pkg::flit_t    out_flit  [5]
);
  import h2eal_pkg::*;
  localparam int unsigned AW = (IN_DEPTH > 1) ? $clog2(IN_DEPTH) : 1;

  flit_t         buf_q [5][IN_DEPTH];
  logic [AW-1:0] rp [5], wp [5];
  logic [AW:0]   cnt [5];
  flit_t         head [5];
  logic [2:0]    route [5];
  logic [4:0]    req [5];       // req[o][i]
  logic [4:0]    gnt [5];       // gnt[o][i]
  logic [2:0]    ptr [5];
  logic [4:0]    pop;

  function automatic logic [2:0] xy_route(input logic [ID_W-1:0] dst);
    int dx, dy;
    dx = int'(dst) % int'(NX);
    dy = int'(dst) / int'(NX);
    if (dx > int'(X)) return 3'd2;
    if (dx < int'(X)) return 3'd4;
    if (dy > int'(Y)) return 3'd3;
    if (dy < int'(Y)) return 3'd1;
    return 3'd0;
  endfunction

  always_comb begin
    for (int i = 0; i < 5; i++) begin
      head[i]     = buf_q[i][rp[i]];
      route[i]    = xy_route(head[i].dst);
    end
    for (int o = 0; o < 5; o++)
      for (int i = 0; i < 5; i++)
        req[o][i] = (cnt[i] != 0) && (route[i] == 3'(o));
    // round-robin grant starting at ptr[o]
    for (int o = 0; o < 5; o++) begin
      gnt[o] = '0;
      for (int k = 0; k < 5; k++) begin
        automatic int unsigned i = (int'(ptr[o]) + k) % 5;
        if (req[o][i] && gnt[o] == 0) gnt[o][i] = 1'b1;
      end
      out_valid[o] = (gnt[o] != 0);
      out_flit[o]  = '0;
      for (int i = 0; i < 5; i++)
        if (gnt[o][i]) out_flit[o] = head[i];
    end
  end

  for (genvar i = 0; i < 5; i++) begin : g_rdy
    assign in_ready[i] = (cnt[i] != (AW+1)'(IN_DEPTH));
  end

  always_comb begin
    pop = '0;
    for (int o = 0; o < 5; o++)
      if (out_valid[o] && out_ready[o]) pop = pop | gnt[o];
  end

  always_ff @(posedge clk) begin
    for (int i = 0; i < 5; i++)
      if (in_valid[i] && in_ready[i]) buf_q[i][wp[i]] <= in_flit[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 5; i++) begin
        rp[i]  <= '0;
        wp[i]  <= '0;
        cnt[i] <= '0;
        ptr[i] <= '0;
      end
    end else begin
      for (int i = 0; i < 5; i++) begin
        automatic logic push = in_valid[i] && in_ready[i];
        if (push)   wp[i] <= (wp[i] == AW'(IN_DEPTH - 1)) ? '0 : wp[i] + 1'b1;
        if (pop[i]) rp[i] <= (rp[i] == AW'(IN_DEPTH - 1)) ? '0 : rp[i] + 1'b1;
        cnt[i] <= cnt[i] + (AW+1)'(push) - (AW+1)'(pop[i]);
      end
      for (int o = 0; o < 5; o++)
        if (out_valid[o] && out_ready[o])
          for (int i = 0; i < 5; i++)
            if (gnt[o][i]) ptr[o] <= (i == 4) ? 3'd0 : 3'(i + 1);
    end
  end
endmodule
