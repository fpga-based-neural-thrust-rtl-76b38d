// tb_layer_engine: runs every layer shape of the network through the layer
// engine with random weights and inputs, against the reference layer in
// nn_ref_pkg. The memory model first grants every cycle, where the run must
// take exactly OUT*(IN+1) + 2 cycles from start to done, and then withholds
// grants at random (stalls), where only the results are checked. The
// scratchpad is modelled in the testbench.
module tb_layer_engine;
  import nn_pkg::*;
  import nn_ref_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  layer_t layer;
  addr_t wbase;
  mem_req_t mreq;
  mem_rsp_t mrsp_free, mrsp_stall, mrsp;
  logic [SP_AW-1:0] sp_raddr, sp_waddr;
  fxp_t sp_rdata, sp_wdata, out_val;
  logic sp_we, out_valid;
  logic [7:0] out_idx;
  bit stall_mode = 0;
  fxp_t sp [SP_WORDS];
  int checks = 0, failures = 0, n_outs = 0, n_stall = 0;

  tb_mem_model #(.DEPTH(4096), .STALL_PCT(0))  m_free  (.clk, .req(mreq), .rsp(mrsp_free));
  tb_mem_model #(.DEPTH(4096), .STALL_PCT(40)) m_stall (.clk, .req(stall_mode ? mreq : '0), .rsp(mrsp_stall));
  assign mrsp = stall_mode ? mrsp_stall : mrsp_free;

  layer_engine dut (
    .clk, .rst_n, .start, .layer, .wbase, .busy, .done,
    .mem_req (mreq), .mem_rsp (mrsp),
    .sp_raddr, .sp_rdata, .sp_we, .sp_waddr, .sp_wdata,
    .out_valid, .out_idx, .out_val
  );

  assign sp_rdata = sp[sp_raddr];
  always @(posedge clk) begin
    if (sp_we) sp[sp_waddr] <= sp_wdata;
    if (out_valid) n_outs++;
    if (mreq.req && !mrsp.gnt) n_stall++;
  end

  always #5 clk = ~clk;

  int w[];

  task automatic run_layer(input int li, input bit stalls);
    layer_t l;
    ivec_t x, y;
    int t0, dur, base, nw;
    l = layer_desc(li);
    nw = int'(l.in_len) * int'(l.out_len) + int'(l.out_len);
    base = 100 + li;
    x = new[l.in_len];
    foreach (x[i]) begin
      x[i] = (li == L_EQ1 || li == L_B1) ? rnd(2 << FRAC_BITS) : int'($urandom_range(2 << FRAC_BITS));
      sp[int'(l.in_off) + i] = x[i];
    end
    w = new[4096];
    foreach (w[i]) w[i] = 0;
    for (int i = 0; i < nw; i++) begin
      int a = base + int'(l.w_off) + i;
      int v = rnd(1 << FRAC_BITS);
      w[a] = v;
      m_free.mem[a]  = v;
      m_stall.mem[a] = v;
    end
    y = ref_layer(w, base + int'(l.w_off), x, l.in_len, l.out_len, l.relu);
    stall_mode = stalls;
    @(negedge clk);
    layer = l; wbase = addr_t'(base); start = 1;
    t0 = $time;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    dur = ($time - t0) / 10;
    if (!stalls) begin
      checks++;
      if (dur != l.out_len * (l.in_len + 1) + 2) begin
        failures++;
        $display("FAIL: layer %0d took %0d cycles, expected %0d", li, dur, l.out_len * (l.in_len + 1) + 2);
      end
    end
    for (int j = 0; j < l.out_len; j++) begin
      checks++;
      if (sp[int'(l.out_off) + j] !== y[j]) begin
        failures++;
        $display("FAIL: layer %0d stalls %0d y[%0d]=%0d expected %0d", li, stalls, j,
                 sp[int'(l.out_off) + j], y[j]);
      end
    end
    @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("FAIL: busy after done"); end
  endtask

  initial begin
    foreach (sp[i]) sp[i] = 0;
    layer = '0; wbase = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 2; rep++)
      for (int li = 0; li < N_LAYERS; li++) run_layer(li, rep == 1);
    checks++;
    if (n_stall == 0) begin failures++; $display("FAIL: no stall exercised"); end
    $display("outputs=%0d stalled cycles=%0d", n_outs, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
