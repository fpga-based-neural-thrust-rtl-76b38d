// tb_mem_model: behavioural memory slave for testbenches. It speaks the
// design's memory bus: a request is granted in a cycle where gnt is high,
// and read data returns with rvalid one cycle after the grant. When
// STALL_PCT is above zero the grant is withheld at random in that share of
// cycles, to exercise the masters' stall handling. The contents are public
// (mem) so the testbench can fill and inspect them.
module tb_mem_model
  import nn_pkg::*;
#(
  parameter int DEPTH = 65536,
  parameter int STALL_PCT = 0
) (
  input  logic     clk,
  input  mem_req_t req,
  output mem_rsp_t rsp
);
  fxp_t mem [DEPTH];
  logic gnt_en = 1'b1;
  int   grants = 0;

  always @(negedge clk) gnt_en = ($urandom_range(99) >= STALL_PCT);

  always_comb begin
    rsp.gnt = req.req && gnt_en;
  end

  initial begin
    rsp.rvalid = 0;
    rsp.rdata  = 0;
  end

  always @(posedge clk) begin
    rsp.rvalid <= rsp.gnt && !req.we;
    if (rsp.gnt) begin
      grants <= grants + 1;
      if (req.we) mem[int'(req.addr)] <= req.wdata;
      else        rsp.rdata <= mem[int'(req.addr)];
    end
  end
endmodule
