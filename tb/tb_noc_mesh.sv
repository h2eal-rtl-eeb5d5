// tb_noc_mesh: the 4x4 mesh with random all-to-all traffic from every
// bank and random back-pressure at every ejection port. Each flit must
// arrive exactly once at its destination, and flits between one pair of
// banks must keep their order. On an idle mesh, the latency of a single
// flit must grow by the same number of cycles for every extra hop.
module tb_noc_mesh;
  import h2eal_pkg::*;
  localparam int NX = 4, NY = 4, NB = NX * NY, NFLIT = 200;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic  inj_valid [NB], inj_ready [NB], ej_valid [NB], ej_ready [NB];
  flit_t inj_flit [NB], ej_flit [NB];

  noc_mesh #(.NX(NX), .NY(NY)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int seq_next [NB][NB], exp_seq [NB][NB], got_total = 0, in_pct = 40, out_pct = 70;
  int fixed_dst = -1;
  longint last_arrival;
  bit acc [NB];

  always @(negedge clk) if (rst_n) begin
    for (int b = 0; b < NB; b++) begin
      ej_ready[b] = ($urandom % 100) < out_pct;
      if (ej_valid[b] && ej_ready[b]) begin
        int s;
        s = int'(ej_flit[b].src);
        checks++;
        got_total++;
        last_arrival = $time / 10;
        if (int'(ej_flit[b].dst) != b) begin failures++; $display("flit for %0d ejected at %0d", ej_flit[b].dst, b); end
        else if (int'(ej_flit[b].aux) != exp_seq[s][b]) begin
          failures++;
          $display("%0d->%0d: seq %0d, expected %0d", s, b, ej_flit[b].aux, exp_seq[s][b]);
        end
        if (int'(ej_flit[b].dst) == b) exp_seq[s][b] = int'(ej_flit[b].aux) + 1;
      end
    end
  end

  task automatic drive(int b, int n);
    for (int c = 0; c < n; c++) begin
      int dst;
      while (($urandom % 100) >= in_pct) @(negedge clk);
      dst = (fixed_dst >= 0) ? fixed_dst : int'($urandom % NB);
      inj_flit[b] = '0;
      inj_flit[b].dst = ID_W'(dst);
      inj_flit[b].src = ID_W'(b);
      inj_flit[b].ftype = F_O;
      inj_flit[b].aux = 32'(seq_next[b][dst]);
      inj_flit[b].data = {8{$urandom}};
      seq_next[b][dst]++;
      inj_valid[b] = 1;
      do begin
        acc[b] = inj_ready[b];
        @(negedge clk);
      end while (!acc[b]);
      inj_valid[b] = 0;
    end
  endtask

  task automatic run_test();
    int lat [7];
    for (int b = 0; b < NB; b++) begin inj_valid[b] = 0; inj_flit[b] = '0; ej_ready[b] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < NB; b++) begin
      automatic int bb = b;
      fork drive(bb, NFLIT); join_none
    end
    wait fork;
    repeat (100) @(negedge clk);
    checks++;
    if (got_total != NB * NFLIT) begin failures++; $display("received %0d of %0d", got_total, NB * NFLIT); end
    // latency from bank 0 to banks at 0..6 hops on an idle mesh
    in_pct = 100; out_pct = 100;
    for (int h = 0; h <= 6; h++) begin
      longint t0;
      int cnt0 = got_total;
      fixed_dst = (h <= 3) ? h : 3 + (h - 3) * NX;
      repeat (5) @(negedge clk);
      t0 = $time / 10;
      drive(0, 1);
      while (got_total == cnt0) @(negedge clk);
      lat[h] = int'(last_arrival - t0);
    end
    for (int h = 1; h <= 6; h++) begin
      checks++;
      if (lat[h] - lat[h - 1] != lat[1] - lat[0] || lat[1] <= lat[0]) begin
        failures++;
        $display("latency %0d hops: %0d cycles, %0d hops: %0d", h - 1, lat[h - 1], h, lat[h]);
      end
    end
    $display("idle latency: %0d cycles + %0d per hop", lat[0], lat[1] - lat[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial run_test();
endmodule
