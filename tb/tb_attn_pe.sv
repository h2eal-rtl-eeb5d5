// tb_attn_pe: self-checking test of the attention PE.
//
// Case 1 streams random tokens (D=64, two beats per vector) and compares the
// normalised int8 output with a floating-point softmax (+-3).
// Case 2 splits another token set in two halves, computes the second half in
// a second PE, and merges that partial state into the first PE through the
// F_ML/F_O style absorb port; the result must match the full-set reference.
// The normalisation must emit one lane per cycle (D cycles).
module tb_attn_pe;
  import h2eal_pkg::*;
  localparam int D = 64, BPV = D / 32, IW = $clog2(D), TOL = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic            clr [2], bv [2], mlv, ovv, ns [2], nb [2], outv [2], nd [2];
  logic [D*8-1:0]  q;
  logic [255:0]    bd [2];
  logic [IW-1:0]   ovb, oi [2];
  logic signed [63:0] ovin [4];
  logic signed [7:0]  oval [2];
  logic signed [31:0] m [2];
  logic [L_W-1:0]     l [2];
  logic signed [O_W-1:0] o [2][D];
  logic [31:0]        ntok [2];

  for (genvar b = 0; b < 2; b++) begin : g_pe
    attn_pe #(.D(D)) dut (
      .clk, .rst_n, .clear(clr[b]), .q(q), .beat_valid(bv[b]), .beat_data(bd[b]),
      .ml_valid(b == 0 ? mlv : 1'b0), .m_in(m[1]), .l_in(l[1]),
      .ov_valid(b == 0 ? ovv : 1'b0), .ov_base(ovb), .ov_in(ovin),
      .norm_start(ns[b]), .norm_busy(nb[b]), .out_valid(outv[b]), .out_idx(oi[b]),
      .out_val(oval[b]), .norm_done(nd[b]), .m_out(m[b]), .l_out(l[b]), .o_out(o[b]),
      .tokens(ntok[b]));
  end

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int qa[D], ka[64][D], va[64][D];

  function automatic int dotq(int t);
    int s = 0;
    for (int i = 0; i < D; i++) s += qa[i] * ka[t][i];
    return s;
  endfunction

  task automatic feed(int b, int t);
    for (int j = 0; j < 2 * BPV; j++) begin
      for (int i = 0; i < 32; i++)
        bd[b][8*i +: 8] = (j < BPV) ? 8'(ka[t][j*32 + i]) : 8'(va[t][(j-BPV)*32 + i]);
      bv[b] = 1;
      @(negedge clk);
      bv[b] = 0;
    end
  endtask

  task automatic check_out(int n, string what);
    int got[D], cyc = 0, bad = 0;
    real x[64], mx, w, lsum, osum;
    ns[0] = 1;
    @(negedge clk);
    ns[0] = 0;
    while (!nd[0]) begin
      if (outv[0]) got[oi[0]] = oval[0];
      cyc++;
      @(negedge clk);
    end
    if (outv[0]) got[oi[0]] = oval[0];
    mx = -1e30;
    for (int t = 0; t < n; t++) begin
      x[t] = $itor(dotq(t)) * 33.0 / 256.0;
      if (x[t] > mx) mx = x[t];
    end
    for (int i = 0; i < D; i++) begin
      int r;
      lsum = 0; osum = 0;
      for (int t = 0; t < n; t++) begin
        w = 2.0 ** (x[t] - mx);
        lsum += w;
        osum += w * va[t][i];
      end
      r = $rtoi(osum / lsum);
      if (got[i] - r > TOL || r - got[i] > TOL) begin
        if (bad == 0) $display("%s lane %0d got %0d expected %0d", what, i, got[i], r);
        bad++;
      end
    end
    checks++;
    if (bad != 0) failures++;
    checks++;
    if (cyc != D) begin
      failures++;
      $display("%s: normalisation took %0d cycles, expected %0d", what, cyc, D);
    end
  endtask

  task automatic run_test();
    for (int b = 0; b < 2; b++) begin clr[b] = 0; bv[b] = 0; ns[b] = 0; bd[b] = '0; end
    mlv = 0; ovv = 0; ovb = '0; q = '0;
    for (int i = 0; i < 4; i++) ovin[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 3; c++) begin
      int n = (c == 0) ? 1 : 24;
      for (int i = 0; i < D; i++) begin
        qa[i] = int'($urandom % 16) - 8;
        q[8*i +: 8] = 8'(qa[i]);
      end
      for (int t = 0; t < n; t++)
        for (int i = 0; i < D; i++) begin
          ka[t][i] = int'($urandom % 16) - 8;
          va[t][i] = int'($urandom % 201) - 100;
        end
      clr[0] = 1; clr[1] = 1;
      @(negedge clk);
      clr[0] = 0; clr[1] = 0;
      if (c < 2) begin
        for (int t = 0; t < n; t++) feed(0, t);
        checks++;
        if (ntok[0] != 32'(n)) failures++;
        check_out(n, "single");
      end else begin
        for (int t = 0; t < n / 2; t++) feed(0, t);
        for (int t = n / 2; t < n; t++) feed(1, t);
        mlv = 1;
        @(negedge clk);
        mlv = 0;
        for (int f = 0; f < D / 4; f++) begin
          ovb = IW'(f * 4);
          for (int i = 0; i < 4; i++) ovin[i] = 64'(o[1][f*4 + i]);
          ovv = 1;
          @(negedge clk);
          ovv = 0;
        end
        check_out(n, "merged");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial run_test();
endmodule
