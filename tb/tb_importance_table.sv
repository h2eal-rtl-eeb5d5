// tb_importance_table: random accumulate/overwrite traffic on the page
// importance table, with saturating adds, followed by victim scans.
// A scan over n_valid entries must finish n_valid+2 cycles after the
// start and report the lowest score (first one on ties) and its index.
module tb_importance_table;
  localparam int NP = 16, SW = 16, AW = $clog2(NP), CW = $clog2(NP + 1);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [CW-1:0] n_valid = '0;
  logic acc_en = 0, set_en = 0, scan_start = 0, scan_busy, scan_done;
  logic [AW-1:0] acc_idx = '0, set_idx = '0, rd_idx = '0, victim_idx;
  logic signed [SW-1:0] acc_val = '0, set_val = '0, rd_val, victim_val;

  importance_table #(.NPAGES(NP), .SW(SW)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int m [NP];
  int smax = (1 << (SW - 1)) - 1, smin = -(1 << (SW - 1));

  task automatic run_test();
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NP; i++) begin
      set_en = 1; set_idx = AW'(i); set_val = 0; m[i] = 0;
      @(negedge clk);
    end
    set_en = 0;
    for (int round = 0; round < 40; round++) begin
      int nv, cyc, bi, bv;
      for (int c = 0; c < 60; c++) begin
        int r = $urandom % 10, i = $urandom % NP, v;
        v = (round % 4 == 3) ? int'($urandom % 65536) - 32768 : int'($urandom % 2001) - 1000;
        acc_en = (r < 7); set_en = (r == 7);
        acc_idx = AW'(i); set_idx = AW'(i); acc_val = SW'(v); set_val = SW'(v);
        @(negedge clk);
        if (set_en) m[i] = v;
        else if (acc_en) begin
          m[i] += v;
          if (m[i] > smax) m[i] = smax;
          if (m[i] < smin) m[i] = smin;
        end
      end
      acc_en = 0; set_en = 0;
      for (int i = 0; i < NP; i++) begin
        rd_idx = AW'(i);
        #1;
        checks++;
        if (rd_val != SW'(m[i])) begin failures++; $display("entry %0d: %0d expected %0d", i, rd_val, m[i]); end
      end
      nv = 1 + $urandom % NP;
      n_valid = CW'(nv);
      bi = 0; bv = m[0];
      for (int i = 1; i < nv; i++) if (m[i] < bv) begin bv = m[i]; bi = i; end
      @(negedge clk);
      scan_start = 1;
      @(negedge clk);
      scan_start = 0;
      cyc = 1;
      while (!scan_done) begin @(negedge clk); cyc++; end
      checks += 2;
      if (victim_idx != AW'(bi) || victim_val != SW'(bv)) begin
        failures++;
        $display("victim %0d (%0d), expected %0d (%0d)", victim_idx, victim_val, bi, bv);
      end
      if (cyc != nv + 2) begin failures++; $display("scan of %0d took %0d cycles", nv, cyc); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial run_test();
endmodule
