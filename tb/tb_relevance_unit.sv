// tb_relevance_unit: feeds page metadata (D/32 beats of the element-wise
// minimum followed by D/32 beats of the maximum) with random gaps and
// checks score = max(q.min, q.max) and the page tag. A page streamed
// back-to-back must produce its score one cycle after its last beat, so the
// unit sustains one metadata beat per cycle.
module tb_relevance_unit;
  import h2eal_pkg::*;
  localparam int D = 128, BPV = D / 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [D*8-1:0] q = '0;
  logic beat_valid = 0, score_valid;
  logic [255:0] beat_data = '0;
  logic [15:0] beat_tag = '0, score_tag;
  logic signed [31:0] score;

  relevance_unit #(.D(D)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int exp_s [$], exp_t [$], scored = 0;
  always @(negedge clk) if (rst_n && score_valid) begin
    checks++;
    if (exp_s.size() == 0) begin failures++; $display("unexpected score"); end
    else begin
      int s, t;
      s = exp_s.pop_front();
      t = exp_t.pop_front();
      if (score != s || score_tag != 16'(t)) begin
        failures++;
        $display("score %0d tag %0d, expected %0d tag %0d", score, score_tag, s, t);
      end
    end
    scored++;
  end

  task automatic run_test();
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < D; i++) q[8*i +: 8] = 8'($urandom);
    for (int p = 0; p < 200; p++) begin
      logic [D*8-1:0] mn, mx;
      int smin = 0, smax = 0;
      bit gaps = (p >= 20);
      for (int i = 0; i < D; i++) begin
        int a = int'($urandom % 256) - 128, b = int'($urandom % 256) - 128;
        if (p % 7 == 0) begin a = 127; b = 127; end   // extreme values
        if (a > b) begin int t = a; a = b; b = t; end
        mn[8*i +: 8] = 8'(a); mx[8*i +: 8] = 8'(b);
        smin += $signed(q[8*i +: 8]) * a;
        smax += $signed(q[8*i +: 8]) * b;
      end
      exp_s.push_back(smin > smax ? smin : smax);
      exp_t.push_back(p);
      for (int bt = 0; bt < 2 * BPV; bt++) begin
        while (gaps && $urandom % 3 == 0) begin beat_valid = 0; @(negedge clk); end
        beat_valid = 1;
        beat_tag = 16'(p);
        beat_data = (bt < BPV) ? mn[256*bt +: 256] : mx[256*(bt - BPV) +: 256];
        @(negedge clk);
      end
      if (!gaps) begin
        beat_valid = 0;
        // the score of page p is already out at this sample point
        checks++;
        if (!score_valid) begin failures++; $display("page %0d not scored one cycle after its last beat", p); end
      end
    end
    beat_valid = 0;
    repeat (4) @(negedge clk);
    checks++;
    if (scored != 200) begin failures++; $display("%0d scores", scored); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial run_test();
endmodule
