// hb_dram_model: behavioural model of one hybrid-bonded DRAM bank (the
// memory-die side of a logic bank). Not synthesizable logic: the real part is
// a stack of DRAM macros bonded face to face with the logic die.
//
// One 256-bit beat per cycle in each direction. Requests are accepted when
// req_ready is high (optionally withheld at random to exercise stalls);
// reads return in order LAT cycles later. The contents are a sparse
// associative array, so the full address space costs nothing until written;
// unwritten words read as zero.
module hb_dram_model #(
  parameter int unsigned AW      = 24,
  parameter int unsigned LAT     = 4,
  parameter int unsigned STALL_PCT = 0
) (
  input  logic          clk,
  input  logic          req_valid,
  output logic          req_ready,
  input  logic          req_we,
  input  logic [AW-1:0] req_addr,
  input  logic [255:0]  req_wdata,
  output logic          rsp_valid,
  output logic [255:0]  rsp_rdata
);
  logic [255:0] mem [logic [AW-1:0]];
  logic         pv [LAT];
  logic [255:0] pd [LAT];
  int unsigned  writes = 0, reads = 0;

  initial begin
    for (int i = 0; i < LAT; i++) begin
      pv[i] = 1'b0;
      pd[i] = '0;
    end
    req_ready = 1'b1;
  end

  always @(posedge clk) begin
    for (int i = LAT - 1; i > 0; i--) begin
      pv[i] <= pv[i-1];
      pd[i] <= pd[i-1];
    end
    pv[0] <= req_valid && req_ready && !req_we;
    pd[0] <= (req_valid && req_ready && !req_we && mem.exists(req_addr)) ? mem[req_addr] : '0;
    if (req_valid && req_ready) begin
      if (req_we) begin
        mem[req_addr] = req_wdata;
        writes++;
      end else begin
        reads++;
      end
    end
    req_ready <= (STALL_PCT == 0) ? 1'b1 : (($urandom % 100) >= STALL_PCT);
  end

  assign rsp_valid = pv[LAT-1];
  assign rsp_rdata = pd[LAT-1];
endmodule
