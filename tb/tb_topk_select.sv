// tb_topk_select: streams random page scores, including many ties, into the
// top-k sorter and checks after every insertion that the K entries are the
// K highest scores seen since clear, sorted from highest to lowest, with
// equal scores kept in arrival order. One candidate is accepted per cycle.
module tb_topk_select;
  localparam int K = 8, IDW = 13, CW = $clog2(K + 1);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear = 0, in_valid = 0;
  logic signed [31:0] in_score = '0;
  logic [IDW-1:0] in_id = '0;
  logic [CW-1:0] count;
  logic [IDW-1:0] out_id [K];
  logic signed [31:0] out_score [K];

  topk_select #(.K(K), .ID_W(IDW)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { int s; int id; } ent_t;
  ent_t ref_l [$];

  task automatic run_test();
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 30; run++) begin
      int n = 1 + $urandom % 40;
      clear = 1;
      @(negedge clk);
      clear = 0;
      ref_l = {};
      for (int c = 0; c < n; c++) begin
        ent_t e;
        int pos;
        e.s = (run % 2) ? int'($urandom % 5) : int'($urandom) ;
        e.id = c;
        in_valid = ($urandom % 4 != 0);
        in_score = e.s; in_id = IDW'(e.id);
        @(negedge clk);
        if (in_valid) begin
          pos = ref_l.size();
          for (int i = 0; i < ref_l.size(); i++) if (e.s > ref_l[i].s) begin pos = i; break; end
          ref_l.insert(pos, e);
          if (ref_l.size() > K) void'(ref_l.pop_back());
        end
        in_valid = 0;
        checks++;
        if (count != CW'(ref_l.size())) begin failures++; $display("count %0d expected %0d", count, ref_l.size()); end
        for (int i = 0; i < ref_l.size(); i++) begin
          checks++;
          if (out_score[i] != ref_l[i].s || out_id[i] != IDW'(ref_l[i].id)) begin
            failures++;
            $display("run %0d slot %0d: id %0d score %0d, expected id %0d score %0d",
                     run, i, out_id[i], out_score[i], ref_l[i].id, ref_l[i].s);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial run_test();
endmodule
