// tb_page_minmax: streams random keys, with gaps, into the page min/max unit.
// After every PAGE accepted keys out_valid must pulse exactly once, in the
// cycle after the last key, with out_min/out_max equal to the element-wise
// minimum and maximum of that page's keys. The unit accepts one key per
// cycle. A clear in the middle of a page must restart the page.
module tb_page_minmax;
  localparam int D = 64, PAGE = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear = 0, in_valid = 0, out_valid;
  logic [D*8-1:0] in_k = '0, out_min, out_max;

  page_minmax #(.D(D), .PAGE(PAGE)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int emin [D], emax [D], cnt = 0, pulses = 0;
  bit expect_pulse = 0;

  task automatic run_test();
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      // sample the result of the previous cycle
      checks++;
      if (out_valid != expect_pulse) begin failures++; $display("cycle %0d: out_valid %0d expected %0d", c, out_valid, expect_pulse); end
      if (out_valid) begin
        bit bad = 0;
        pulses++;
        for (int i = 0; i < D; i++)
          if ($signed(out_min[8*i +: 8]) != emin[i] || $signed(out_max[8*i +: 8]) != emax[i]) bad = 1;
        checks++;
        if (bad) begin failures++; $display("page %0d min/max wrong", pulses); end
      end
      expect_pulse = 0;
      clear = (c == 1000 || c == 1003);
      in_valid = !clear && ($urandom % 100 < 75);
      for (int i = 0; i < D; i++) in_k[8*i +: 8] = 8'($urandom);
      if (clear) cnt = 0;
      else if (in_valid) begin
        for (int i = 0; i < D; i++) begin
          int k = $signed(in_k[8*i +: 8]);
          if (cnt == 0 || k < emin[i]) emin[i] = k;
          if (cnt == 0 || k > emax[i]) emax[i] = k;
        end
        cnt++;
        if (cnt == PAGE) begin cnt = 0; expect_pulse = 1; end
      end
    end
    checks++;
    if (pulses < 100) begin failures++; $display("only %0d pages", pulses); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial run_test();
endmodule
