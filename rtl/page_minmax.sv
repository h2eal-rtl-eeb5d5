// page_minmax: the min and max units that turn a page of keys into metadata.
//
// Keys of one page arrive one per cycle (in_valid). Each element of the key is
// compared, as a signed int8, with a running minimum and maximum; after PAGE
// keys the element-wise minimum (tau_min) and maximum (tau_max) of the page
// are presented on out_min/out_max with a one-cycle out_valid pulse, and the
// unit restarts for the next page. `clear` abandons a partial page.
//
// Timing: out_valid is asserted in the cycle after the PAGE-th key is taken.
// The element-wise min/max definition of the metadata is the paper's; the
// one-key-per-cycle interface is this design's.
module page_minmax #(
  parameter int unsigned D    = h2eal_pkg::HEAD_DIM,
  parameter int unsigned PAGE = h2eal_pkg::PAGE
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clear,
  input  logic           in_valid,
  input  logic [D*8-1:0] in_k,
  output logic           out_valid,
  output logic [D*8-1:0] out_min,
  output logic [D*8-1:0] out_max
);
  localparam int unsigned CW = $clog2(PAGE + 1);
  logic [CW-1:0]  cnt;
  logic [D*8-1:0] nmin, nmax;

  always_comb begin
    for (int i = 0; i < D; i++) begin
      logic signed [7:0] k, mn, mx;
      k  = $signed(in_k[8*i +: 8]);
      mn = (cnt == 0) ? 8'sd127  : $signed(out_min[8*i +: 8]);
      mx = (cnt == 0) ? -8'sd128 : $signed(out_max[8*i +: 8]);
      nmin[8*i +: 8] = (k < mn) ? k : mn;
      nmax[8*i +: 8] = (k > mx) ? k : mx;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      out_valid <= 1'b0;
      out_min   <= '0;
      out_max   <= '0;
    end else begin
      out_valid <= 1'b0;
      if (clear) begin
        cnt <= '0;
      end else if (in_valid) begin
        out_min <= nmin;
        out_max <= nmax;
        if (cnt == CW'(PAGE - 1)) begin
          cnt       <= '0;
          out_valid <= 1'b1;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
    end
  end
endmodule
