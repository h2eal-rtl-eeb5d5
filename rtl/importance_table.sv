// importance_table: the accumulated importance score of every page of a
// retrieval head, kept in the logic bank, and the search for the page to evict.
//
// Each page slot holds a signed score. `acc_en` adds a relevance score to a
// slot (saturating), `set_en` overwrites one (used when a new page takes a
// slot). `scan_start` walks slots 0..n_valid-1, one per cycle, and reports the
// slot with the lowest score (the first one on ties) on victim_idx with
// scan_done. Accumulate/set and scan must not overlap (asserted).
//
// Timing: acc/set are single-cycle read-modify-writes; a scan takes n_valid+2
// cycles from scan_start (sampled) to scan_done (one per slot plus one to
// start and one to finish).
//
// Follows the paper: accumulated scores per page, evict the lowest one when
// the page budget is reached. The sequential scan, the saturating add and the
// score width are choices of this design.
module importance_table #(
  parameter int unsigned NPAGES = h2eal_pkg::MAX_PAGES,
  parameter int unsigned SW     = 32,
  localparam int unsigned AW    = $clog2(NPAGES),
  localparam int unsigned CW    = $clog2(NPAGES + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [CW-1:0]        n_valid,
  input  logic                 acc_en,
  input  logic [AW-1:0]        acc_idx,
  input  logic signed [SW-1:0] acc_val,
  input  logic                 set_en,
  input  logic [AW-1:0]        set_idx,
  input  logic signed [SW-1:0] set_val,
  input  logic [AW-1:0]        rd_idx,
  output logic signed [SW-1:0] rd_val,
  input  logic                 scan_start,
  output logic                 scan_busy,
  output logic                 scan_done,
  output logic [AW-1:0]        victim_idx,
  output logic signed [SW-1:0] victim_val
);
  logic signed [SW-1:0] mem [NPAGES];
  logic [CW-1:0]        scan_ptr;
  logic signed [SW:0]   sum;
  logic signed [SW-1:0] sum_sat, scan_val;

  localparam logic signed [SW-1:0] SMAX = {1'b0, {(SW-1){1'b1}}};
  localparam logic signed [SW-1:0] SMIN = {1'b1, {(SW-1){1'b0}}};

  assign rd_val   = mem[rd_idx];
  assign scan_val = mem[AW'(scan_ptr)];
  assign sum      = (SW+1)'(mem[acc_idx]) + (SW+1)'(acc_val);
  always_comb begin
    if (sum > (SW+1)'(SMAX))      sum_sat = SMAX;
    else if (sum < (SW+1)'(SMIN)) sum_sat = SMIN;
    else                          sum_sat = SW'(sum);
  end

  always_ff @(posedge clk) begin
    if (set_en)      mem[set_idx] <= set_val;
    else if (acc_en) mem[acc_idx] <= sum_sat;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      scan_busy  <= 1'b0;
      scan_done  <= 1'b0;
      scan_ptr   <= '0;
      victim_idx <= '0;
      victim_val <= SMAX;
    end else begin
      scan_done <= 1'b0;
      if (scan_start && !scan_busy) begin
        scan_busy  <= 1'b1;
        scan_ptr   <= '0;
        victim_idx <= '0;
        victim_val <= SMAX;
      end else if (scan_busy) begin
        if (scan_ptr >= n_valid) begin
          scan_busy <= 1'b0;
          scan_done <= 1'b1;
        end else begin
          if (scan_ptr == 0 || scan_val < victim_val) begin
            victim_val <= scan_val;
            victim_idx <= AW'(scan_ptr);
          end
          scan_ptr <= scan_ptr + 1'b1;
        end
      end
    end
  end

  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n)
                                 scan_busy |-> !(acc_en || set_en));
endmodule
