// sink_token_mem: on-die storage of the attention-sink tokens of one head.
//
// The first N_SINK tokens of a sequence are written here (wr_en while !full);
// afterwards the memory is read-only until `clear` starts a new sequence.
// Stored tokens are read combinationally by index for the attention sweep.
//
// The paper keeps all sink tokens in the logic bank; the count of four sink
// tokens is this design's choice (it is the usual StreamingLLM setting).
module sink_token_mem #(
  parameter int unsigned D      = h2eal_pkg::HEAD_DIM,
  parameter int unsigned N_SINK = h2eal_pkg::N_SINK,
  localparam int unsigned AW    = (N_SINK > 1) ? $clog2(N_SINK) : 1,
  localparam int unsigned CW    = $clog2(N_SINK + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clear,
  input  logic           wr_en,
  input  logic [D*8-1:0] wr_k,
  input  logic [D*8-1:0] wr_v,
  output logic           full,
  output logic [CW-1:0]  count,
  input  logic [AW-1:0]  rd_idx,
  output logic [D*8-1:0] rd_k,
  output logic [D*8-1:0] rd_v
);
  logic [D*8-1:0] kmem [N_SINK];
  logic [D*8-1:0] vmem [N_SINK];

  assign full = (count == CW'(N_SINK));
  assign rd_k = kmem[rd_idx];
  assign rd_v = vmem[rd_idx];

  always_ff @(posedge clk) begin
    if (wr_en && !full) begin
      kmem[AW'(count)] <= wr_k;
      vmem[AW'(count)] <= wr_v;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                 count <= '0;
    else if (clear)             count <= '0;
    else if (wr_en && !full)    count <= count + 1'b1;
  end
endmodule
