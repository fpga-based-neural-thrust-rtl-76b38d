// main_memory: the on-chip main memory shared by the processor and the
// accelerator, one word-wide synchronous port.
//
// A request with we low reads mem[addr]; the word appears on rdata with
// rvalid one clock later. A request with we high writes wdata at the clock
// edge. The memory is always ready; arbitration happens in front of it in
// the interconnect. The paper only names the main memory; its size, width
// and single port are this design's choices (64 KiB of 32-bit words by
// default). Address bits above log2(DEPTH) are ignored. Contents are not
// reset, as in a block RAM.
module main_memory
  import nn_pkg::*;
#(
  parameter int DEPTH = 16384
) (
  input  logic     clk,
  input  logic     rst_n,
  input  mem_req_t req,
  output logic     rvalid,
  output fxp_t     rdata
);
  localparam int AW = $clog2(DEPTH);
  fxp_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (req.req && req.we) mem[AW'(req.addr)] <= req.wdata;
    rdata <= mem[AW'(req.addr)];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rvalid <= 1'b0;
    else        rvalid <= req.req && !req.we;
  end
endmodule
