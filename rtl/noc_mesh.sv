// noc_mesh: the NX x NY 2-D mesh network on the logic die.
//
// Instantiates one noc_router per logic bank and links neighbours with
// 256-bit-payload channels in both directions. Bank b sits at x = b % NX,
// y = b / NX. Each bank sees one valid/ready flit port pair (inject/eject).
// Ports on the edge of the mesh are tied off: dimension-ordered routing never
// sends a flit off the array as long as destinations are valid bank ids.
//
// The 4x4 mesh with 256-bit links is the paper's (Table II); the rest is this
// design's choice (see noc_router).
module noc_mesh #(
  parameter int unsigned NX = h2eal_pkg::MESH_X,
  parameter int unsigned NY = h2eal_pkg::MESH_Y,
  localparam int unsigned NB = NX * NY
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             inj_valid [NB],
  output logic             inj_ready [NB],
  input  h2eal_pkg::flit_t inj_flit  [NB],
  output logic             ej_valid  [NB],
  input  logic             ej_ready  [NB],
  output h2eal_pkg::flit_t ej_flit   [NB]
);
  import h2eal_pkg::*;

  logic  iv [NB][5];
  logic  ir [NB][5];
  flit_t ifl [NB][5];
  logic  ov [NB][5];
  logic  orr [NB][5];
  flit_t ofl [NB][5];

  // neighbour of router b through port p (p = 1..4), -1 at the edge
  function automatic int nbr(input int b, input int p);
    int x, y;
    x = b % int'(NX);
    y = b / int'(NX);
    case (p)
      1: return (y > 0)            ? b - int'(NX) : -1;
      2: return (x < int'(NX) - 1) ? b + 1        : -1;
      3: return (y < int'(NY) - 1) ? b + int'(NX) : -1;
      4: return (x > 0)            ? b - 1        : -1;
      default: return -1;
    endcase
  endfunction

  // port on the neighbour that faces back
  function automatic int opp(input int p);
    return (p == 1) ? 3 : (p == 3) ? 1 : (p == 2) ? 4 : 2;
  endfunction

  for (genvar b = 0; b < NB; b++) begin : g_node
    noc_router #(.X(b % NX), .Y(b / NX), .NX(NX)) u_rt (
      .clk, .rst_n,
      .in_valid (iv[b]),  .in_ready (ir[b]),  .in_flit (ifl[b]),
      .out_valid(ov[b]),  .out_ready(orr[b]), .out_flit(ofl[b])
    );
    assign iv[b][0]    = inj_valid[b];
    assign ifl[b][0]   = inj_flit[b];
    assign inj_ready[b] = ir[b][0];
    assign ej_valid[b] = ov[b][0];
    assign ej_flit[b]  = ofl[b][0];
    assign orr[b][0]   = ej_ready[b];
    for (genvar p = 1; p < 5; p++) begin : g_port
      if (nbr(b, p) >= 0) begin : g_link
        assign iv[b][p]  = ov[nbr(b, p)][opp(p)];
        assign ifl[b][p] = ofl[nbr(b, p)][opp(p)];
        assign orr[b][p] = ir[nbr(b, p)][opp(p)];
      end else begin : g_edge
        assign iv[b][p]  = 1'b0;
        assign ifl[b][p] = '0;
        assign orr[b][p] = 1'b0;
      end
    end
  end
endmodule
