// topk_select: streaming top-k selection of pages by relevance score.
//
// Candidates (score, id) arrive one per cycle. The unit keeps the K best seen
// since `clear`, sorted by descending score, in a register array: every
// candidate is compared with all K entries in parallel, entries below its
// position shift down by one and the candidate is written in (a systolic
// insertion sorter). Equal scores keep arrival order. `count` is the number
// of valid entries, min(candidates, K).
//
// Timing: one candidate per cycle, result valid the cycle after the last one.
// The paper names top-k page selection; the insertion sorter is this
// design's choice.
module topk_select #(
  parameter int unsigned K    = h2eal_pkg::TOPK,
  parameter int unsigned ID_W = 13,
  localparam int unsigned CW  = $clog2(K + 1)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clear,
  input  logic                   in_valid,
  input  logic signed [31:0]     in_score,
  input  logic [ID_W-1:0]        in_id,
  output logic [CW-1:0]          count,
  output logic [ID_W-1:0]        out_id    [K],
  output logic signed [31:0]     out_score [K]
);
  logic [K-1:0] below;   // entry i is ranked below the candidate

  always_comb begin
    for (int i = 0; i < K; i++)
      below[i] = (CW'(i) >= count) || (in_score > out_score[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0;
      for (int i = 0; i < K; i++) begin
        out_id[i]    <= '0;
        out_score[i] <= '0;
      end
    end else if (clear) begin
      count <= '0;
    end else if (in_valid) begin
      if (count != CW'(K)) count <= count + 1'b1;
      for (int i = 0; i < K; i++) begin
        if (below[i]) begin
          if (i == 0 || !below[(i == 0) ? 0 : i - 1]) begin
            out_id[i]    <= in_id;
            out_score[i] <= in_score;
          end else begin
            out_id[i]    <= out_id[(i == 0) ? 0 : i - 1];
            out_score[i] <= out_score[(i == 0) ? 0 : i - 1];
          end
        end
      end
    end
  end
endmodule
