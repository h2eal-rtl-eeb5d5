// tb_noc_router: one router in the middle of a 4x4 mesh (x=1, y=1) with
// random traffic on all five inputs and random back-pressure on all five
// outputs. Every flit must leave on the port given by X-then-Y routing,
// exactly once, and flits from one input to one output must keep their
// order. A single uncontended stream must move one 256-bit flit per cycle.
module tb_noc_router;
  import h2eal_pkg::*;
  localparam int NX = 4, X = 1, Y = 1, NFLIT = 400;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic  in_valid [5], in_ready [5], out_valid [5], out_ready [5];
  flit_t in_flit [5], out_flit [5];

  noc_router #(.X(X), .Y(Y), .NX(NX)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int exp_port(int dst);
    int dx = dst % NX, dy = dst / NX;
    if (dx > X) return 2;
    if (dx < X) return 4;
    if (dy > Y) return 3;
    if (dy < Y) return 1;
    return 0;
  endfunction

  int sent [5], seq_next [5][5], got_total = 0;
  int in_pct = 60, out_pct = 70;
  bit only_local = 0;
  int fixed_dst = -1;

  function automatic flit_t make(int i);
    flit_t f;
    int dst = (fixed_dst >= 0) ? fixed_dst : int'($urandom % 16);
    f = '0;
    f.dst = ID_W'(dst);
    f.src = ID_W'(i);
    f.ftype = F_KV;
    f.aux = 32'(seq_next[i][exp_port(dst)]);
    seq_next[i][exp_port(dst)]++;
    f.data = {8{$urandom}};
    return f;
  endfunction

  int exp_seq [5][5];
  bit acc [5];
  // receive side
  always @(negedge clk) if (rst_n) begin
    for (int o = 0; o < 5; o++) begin
      out_ready[o] = ($urandom % 100) < out_pct;
      if (out_valid[o] && out_ready[o]) begin
        int s, e;
        s = int'(out_flit[o].src);
        checks++;
        got_total++;
        e = exp_port(int'(out_flit[o].dst));
        if (e != o) begin failures++; $display("flit to %0d left on port %0d, expected %0d", out_flit[o].dst, o, e); end
        else if (int'(out_flit[o].aux) != exp_seq[s][o]) begin
          failures++;
          $display("port %0d->%0d: seq %0d, expected %0d", s, o, out_flit[o].aux, exp_seq[s][o]);
        end
        if (e == o) exp_seq[s][o] = int'(out_flit[o].aux) + 1;
      end
    end
  end

  task automatic drive(int i, int n);
    for (int c = 0; c < n; c++) begin
      while (($urandom % 100) >= in_pct) @(negedge clk);
      in_flit[i] = make(i);
      in_valid[i] = 1;
      do begin
        acc[i] = in_ready[i];
        @(negedge clk);
      end while (!acc[i]);
      in_valid[i] = 0;
      sent[i]++;
    end
  endtask

  task automatic run_test();
    int total, t0;
    for (int i = 0; i < 5; i++) begin in_valid[i] = 0; in_flit[i] = '0; out_ready[i] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 5; i++) begin
      automatic int ii = i;
      fork drive(ii, NFLIT); join_none
    end
    wait fork;
    repeat (40) @(negedge clk);
    total = 5 * NFLIT;
    checks++;
    if (got_total != total) begin failures++; $display("received %0d of %0d flits", got_total, total); end
    // throughput: 100 flits local -> east with no contention
    in_pct = 100; out_pct = 100; fixed_dst = Y * NX + X + 1;
    got_total = 0;
    t0 = int'($time / 10);
    drive(0, 100);
    while (got_total < 100 && int'($time / 10) - t0 < 1000) @(negedge clk);
    checks++;
    if (int'($time / 10) - t0 > 102) begin
      failures++;
      $display("100 flits took %0d cycles", int'($time / 10) - t0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial run_test();
endmodule
