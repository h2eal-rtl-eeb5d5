// tb_kv_window_fifo: random push/pop traffic on the local-token window.
// A queue model gives the expected head entry, occupancy, full flag and the
// age-indexed read port (rd_idx 0 = oldest token) after every cycle. Pushes
// are suppressed when full unless a pop happens in the same cycle. One
// push and one pop can be accepted per cycle; the test checks that a full
// window drains in exactly DEPTH cycles.
module tb_kv_window_fifo;
  localparam int D = 32, DEPTH = 8, AW = $clog2(DEPTH), CW = $clog2(DEPTH + 1);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic push = 0, pop = 0, full;
  logic [D*8-1:0] push_k = '0, push_v = '0, pop_k, pop_v, rd_k, rd_v;
  logic [CW-1:0] count;
  logic [AW-1:0] rd_idx = '0;

  kv_window_fifo #(.D(D), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [D*8-1:0] qk [$], qv [$];

  task automatic check_state();
    checks++;
    if (count != CW'(qk.size()) || full != (qk.size() == DEPTH)) begin
      failures++;
      $display("count %0d full %0d, expected %0d", count, full, qk.size());
    end
    if (qk.size() > 0) begin
      checks++;
      if (pop_k != qk[0] || pop_v != qv[0]) begin failures++; $display("head entry wrong"); end
      begin
        int i = $urandom % qk.size();
        rd_idx = AW'(i);
        #1;
        checks++;
        if (rd_k != qk[i] || rd_v != qv[i]) begin failures++; $display("rd_idx %0d wrong", i); end
      end
    end
  endtask

  task automatic run_test();
    int n;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 2000; c++) begin
      bit p, q;
      @(negedge clk);
      check_state();
      // alternate between fill-biased and drain-biased phases
      p = ($urandom % 100) < (((c / 100) % 2 == 0) ? 70 : 30);
      q = ($urandom % 100) < (((c / 100) % 2 == 0) ? 30 : 70);
      if (qk.size() == DEPTH && !q) p = 0;
      if (qk.size() == 0) q = 0;
      push = p; pop = q;
      push_k = {8{$urandom}}; push_v = {8{$urandom}};
      @(posedge clk);
      #1;
      if (q) begin void'(qk.pop_front()); void'(qv.pop_front()); end
      if (p) begin qk.push_back(push_k); qv.push_back(push_v); end
      push = 0; pop = 0;
    end
    // fill, then time a full drain
    @(negedge clk);
    while (qk.size() < DEPTH) begin
      push = 1; push_k = {8{$urandom}}; push_v = push_k;
      @(posedge clk); #1;
      qk.push_back(push_k); qv.push_back(push_v);
      push = 0;
      @(negedge clk);
    end
    check_state();
    n = 0;
    pop = 1;
    while (count != 0) begin @(posedge clk); #1; n++; void'(qk.pop_front()); void'(qv.pop_front()); end
    pop = 0;
    checks++;
    if (n != DEPTH) begin failures++; $display("drain took %0d cycles, expected %0d", n, DEPTH); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial run_test();
endmodule
