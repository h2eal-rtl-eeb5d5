// tb_sink_token_mem: writes more tokens than the sink memory holds and
// checks that exactly the first N_SINK are kept, in order, that count and
// full follow the writes, that later writes are ignored, and that clear
// empties the memory for the next sequence.
module tb_sink_token_mem;
  localparam int D = 32, NS = 4, AW = $clog2(NS), CW = $clog2(NS + 1);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear = 0, wr_en = 0, full;
  logic [D*8-1:0] wr_k = '0, wr_v = '0, rd_k, rd_v;
  logic [CW-1:0] count;
  logic [AW-1:0] rd_idx = '0;

  sink_token_mem #(.D(D), .N_SINK(NS)) dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [D*8-1:0] ek [NS], ev [NS];

  task automatic run_test();
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int seq = 0; seq < 5; seq++) begin
      int n = 0;
      for (int t = 0; t < NS + 3; t++) begin
        @(negedge clk);
        checks++;
        if (count != CW'(n) || full != (n == NS)) begin failures++; $display("seq %0d: count %0d expected %0d", seq, count, n); end
        wr_en = ($urandom % 4 != 0);
        wr_k = {8{$urandom}}; wr_v = {8{$urandom}};
        if (wr_en && n < NS) begin ek[n] = wr_k; ev[n] = wr_v; n++; end
        if (!wr_en) t--;
      end
      @(negedge clk);
      wr_en = 0;
      @(negedge clk);
      for (int i = 0; i < NS; i++) begin
        rd_idx = AW'(i);
        #1;
        checks++;
        if (rd_k != ek[i] || rd_v != ev[i]) begin failures++; $display("seq %0d: sink %0d wrong", seq, i); end
      end
      clear = 1;
      @(negedge clk);
      clear = 0;
      checks++;
      if (count != 0 || full) begin failures++; $display("clear did not empty the memory"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial run_test();
endmodule
