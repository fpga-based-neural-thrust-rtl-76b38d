// thrust_controller_top: the neural-network side of the FPGA on the
// Lighthouse-FPGA deck, without the processor itself.
//
// Main memory is shared through an interconnect by four masters:
//   master 0  the processor side (core cache), brought out as cpu_req/cpu_rsp,
//   master 1  accelerator cache 0, in front of the weight port,
//   master 2  accelerator cache 1, in front of the observation port,
//   master 3  accelerator cache 2, in front of the result port.
// Writes accepted by the interconnect are broadcast on the coherence bus,
// which the three accelerator caches watch and which is also brought out
// (snoop) for the processor's cache. The accelerator's control registers sit
// on the peripheral bus (pb_*), and irq pulses when a control step is done.
//
// A control step as the processor sees it: write the weight image and the
// observations into main memory, set WBASE/IN_BASE/OUT_BASE, write CTRL=1,
// wait for irq, read a and f from OUT_BASE. The thrust values are also
// available on thrust_out. The block arrangement (main memory, interconnect,
// coherence bus, core cache port, three accelerator caches, accelerator on
// the peripheral bus) follows the paper's block diagram; the processor, its
// cache and the positioning function are outside this module.
module thrust_controller_top
  import nn_pkg::*;
#(
  parameter int MEM_WORDS    = 16384,
  parameter int WCACHE_LINES = 2048,
  parameter int OCACHE_LINES = 64,
  parameter int RCACHE_LINES = 64
) (
  input  logic       clk,
  input  logic       rst_n,
  // processor-side memory port (from the core cache)
  input  mem_req_t   cpu_req,
  output mem_rsp_t   cpu_rsp,
  // coherence bus, for the core cache
  output snoop_t     snoop,
  // peripheral bus to the accelerator registers
  input  logic       pb_sel,
  input  logic       pb_we,
  input  logic [2:0] pb_addr,
  input  fxp_t       pb_wdata,
  output fxp_t       pb_rdata,
  output logic       irq,
  // results of the latest step
  output fxp_t       thrust_out [N_ACT],
  output fxp_t       action_out [N_ACT],
  // event counters
  output logic [31:0] wcache_hits,
  output logic [31:0] wcache_misses,
  output logic [31:0] mean_adds
);
  mem_req_t ic_req [4];
  mem_rsp_t ic_rsp [4];
  mem_req_t acc_req [3];
  mem_rsp_t acc_rsp [3];
  mem_req_t mem_req;
  logic     mem_rvalid;
  fxp_t     mem_rdata;
  logic [31:0] ohits, omiss, rhits, rmiss;

  assign ic_req[0] = cpu_req;
  assign cpu_rsp   = ic_rsp[0];

  main_memory #(.DEPTH(MEM_WORDS)) u_mem (
    .clk, .rst_n,
    .req    (mem_req),
    .rvalid (mem_rvalid),
    .rdata  (mem_rdata)
  );

  mem_interconnect #(.NM(4)) u_ic (
    .clk, .rst_n,
    .m_req    (ic_req),
    .m_rsp    (ic_rsp),
    .s_req    (mem_req),
    .s_rvalid (mem_rvalid),
    .s_rdata  (mem_rdata),
    .snoop    (snoop)
  );

  accel_cache #(.LINES(WCACHE_LINES), .ID(1)) u_cache_w (
    .clk, .rst_n,
    .up_req (acc_req[0]), .up_rsp (acc_rsp[0]),
    .dn_req (ic_req[1]),  .dn_rsp (ic_rsp[1]),
    .snoop, .hits (wcache_hits), .misses (wcache_misses)
  );

  accel_cache #(.LINES(OCACHE_LINES), .ID(2)) u_cache_o (
    .clk, .rst_n,
    .up_req (acc_req[1]), .up_rsp (acc_rsp[1]),
    .dn_req (ic_req[2]),  .dn_rsp (ic_rsp[2]),
    .snoop, .hits (ohits), .misses (omiss)
  );

  accel_cache #(.LINES(RCACHE_LINES), .ID(3)) u_cache_r (
    .clk, .rst_n,
    .up_req (acc_req[2]), .up_rsp (acc_rsp[2]),
    .dn_req (ic_req[3]),  .dn_rsp (ic_rsp[3]),
    .snoop, .hits (rhits), .misses (rmiss)
  );

  nn_accelerator u_acc (
    .clk, .rst_n,
    .pb_sel, .pb_we, .pb_addr, .pb_wdata, .pb_rdata, .irq,
    .m_req     (acc_req),
    .m_rsp     (acc_rsp),
    .a_out     (action_out),
    .f_out     (thrust_out),
    .mean_adds (mean_adds)
  );
endmodule
