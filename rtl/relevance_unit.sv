// relevance_unit: page relevance score max(q.tau_min, q.tau_max).
//
// The metadata of a page is read from the memory die as 2*BPV beats of 256
// bits: BPV beats of tau_min followed by BPV beats of tau_max (BPV = D/32).
// Each beat is multiplied lane-wise with the matching slice of the held query
// (32 int8 multipliers and an adder tree) and accumulated into one of two
// dot products. After the last beat of a page the larger of the two is output
// with score_valid for one cycle, together with the page tag that came with
// the first beat. Beats of consecutive pages may follow back to back.
//
// The score formula is the paper's; the beat-serial datapath sized to one
// memory beat per cycle is this design's choice.
module relevance_unit #(
  parameter int unsigned D     = h2eal_pkg::HEAD_DIM,
  parameter int unsigned TAG_W = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [D*8-1:0]           q,
  input  logic                     beat_valid,
  input  logic [h2eal_pkg::BEAT_W-1:0] beat_data,
  input  logic [TAG_W-1:0]         beat_tag,
  output logic                     score_valid,
  output logic signed [31:0]       score,
  output logic [TAG_W-1:0]         score_tag
);
  import h2eal_pkg::*;
  localparam int unsigned BPV = D / BEAT_B;
  localparam int unsigned BW  = $clog2(2 * BPV);

  logic [BW-1:0]       bcnt;
  logic signed [31:0]  acc_min, acc_max, prod, cur_max;
  logic [BEAT_W-1:0]   qslice;
  logic [TAG_W-1:0]    tag_r;

  always_comb begin
    qslice = q[BEAT_W * ((bcnt >= BW'(BPV)) ? int'(bcnt) - int'(BPV) : int'(bcnt)) +: BEAT_W];
    prod   = dot_beat(qslice, beat_data);
    cur_max = (bcnt == BW'(BPV)) ? prod : acc_max + prod;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bcnt        <= '0;
      acc_min     <= '0;
      acc_max     <= '0;
      score_valid <= 1'b0;
      score       <= '0;
      score_tag   <= '0;
      tag_r       <= '0;
    end else begin
      score_valid <= 1'b0;
      if (beat_valid) begin
        if (bcnt == 0) tag_r <= beat_tag;
        if (bcnt < BW'(BPV)) acc_min <= (bcnt == 0) ? prod : acc_min + prod;
        else                 acc_max <= cur_max;
        if (bcnt == BW'(2 * BPV - 1)) begin
          bcnt        <= '0;
          score_valid <= 1'b1;
          score       <= (cur_max > acc_min) ? cur_max : acc_min;
          score_tag   <= tag_r;
        end else begin
          bcnt <= bcnt + 1'b1;
        end
      end
    end
  end
endmodule
