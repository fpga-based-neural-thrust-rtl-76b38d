// tb_thrust_controller_top: end-to-end test of the whole accelerator
// subsystem at its default sizes (K = 6 neighbours, full layer sizes).
//
// Acting as the processor, it writes a random weight image and observations
// into main memory through the processor port, programs the accelerator over
// the peripheral bus, starts it, waits for irq and reads a and f back from
// memory. Expected values come from the behavioural reference in nn_ref_pkg.
// It runs several control steps; between steps it overwrites the
// observations the accelerator cached, so the coherence bus must invalidate
// them, and during one step it keeps the processor port busy so the
// accelerator's caches are stalled by arbitration. It counts, and requires,
// each mechanism: weight-cache hits and misses, arbitration stalls,
// coherence invalidations, ReLU clamping, thrust clipping at both ends and
// in range, and the mean accumulations.
module tb_thrust_controller_top;
  import nn_pkg::*;
  import nn_ref_pkg::*;

  localparam int STEPS = 4;
  localparam int WBASE = 'h0100, INB = 'h1000, OUTB = 'h1100;
  localparam int SCHED = 2409;                          // stall-free schedule
  localparam int OBS_WORDS = SELF_OBS + K_NEIGH * NB_OBS;

  logic clk = 0, rst_n = 0;
  mem_req_t cpu_req;
  mem_rsp_t cpu_rsp;
  snoop_t   snoop;
  logic pb_sel, pb_we, irq;
  logic [2:0] pb_addr;
  fxp_t pb_wdata, pb_rdata;
  fxp_t thrust_out [N_ACT], action_out [N_ACT];
  logic [31:0] wh, wm, madds;

  thrust_controller_top dut (
    .clk, .rst_n, .cpu_req, .cpu_rsp, .snoop,
    .pb_sel, .pb_we, .pb_addr, .pb_wdata, .pb_rdata, .irq,
    .thrust_out, .action_out,
    .wcache_hits (wh), .wcache_misses (wm), .mean_adds (madds)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_stall = 0, n_inval = 0, n_relu0 = 0, n_clip_hi = 0, n_clip_lo = 0, n_inrange = 0;
  int cycle = 0;

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n) begin
      for (int m = 1; m < 4; m++)
        if (dut.ic_req[m].req && !dut.ic_rsp[m].gnt) n_stall++;
      if (dut.u_cache_o.snp_match || dut.u_cache_w.snp_match || dut.u_cache_r.snp_match) n_inval++;
      if (dut.u_acc.u_engine.sp_we && dut.u_acc.u_engine.lay_q.relu
          && dut.u_acc.u_engine.pre_act < 0) n_relu0++;
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic cpu_write(input int addr, input int data);
    @(negedge clk);
    cpu_req.req = 1; cpu_req.we = 1; cpu_req.addr = addr_t'(addr); cpu_req.wdata = data;
    @(posedge clk);
    while (!cpu_rsp.gnt) @(posedge clk);
    @(negedge clk);
    cpu_req = '0;
  endtask

  task automatic cpu_read(input int addr, output int data);
    @(negedge clk);
    cpu_req.req = 1; cpu_req.we = 0; cpu_req.addr = addr_t'(addr);
    @(posedge clk);
    while (!cpu_rsp.gnt) @(posedge clk);
    @(negedge clk);
    cpu_req = '0;
    @(posedge clk);
    data = cpu_rsp.rdata;
  endtask

  task automatic pb_write(input int a, input int d);
    @(negedge clk);
    pb_sel = 1; pb_we = 1; pb_addr = 3'(a); pb_wdata = d;
    @(negedge clk);
    pb_sel = 0; pb_we = 0;
  endtask

  task automatic pb_read(input int a, output int d);
    @(negedge clk);
    pb_addr = 3'(a);
    #1 d = pb_rdata;
  endtask

  int w[];
  ivec_t obs, expv;
  bit busy_traffic;

  // processor traffic to an unrelated address while the accelerator runs
  initial begin
    forever begin
      @(negedge clk);
      if (busy_traffic && !cpu_req.req) begin
        cpu_req.req = 1; cpu_req.we = ($urandom_range(1) == 1);
        cpu_req.addr = addr_t'('h2000 + $urandom_range(15)); cpu_req.wdata = int'($urandom);
        @(posedge clk);
        while (!cpu_rsp.gnt) @(posedge clk);
        @(negedge clk);
        cpu_req = '0;
      end
    end
  end

  initial begin
    int d, t0, st, dur;
    cpu_req = '0; pb_sel = 0; pb_we = 0; pb_addr = 0; pb_wdata = 0; busy_traffic = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    w = new[W_WORDS];
    for (int i = 0; i < W_WORDS; i++) w[i] = rnd(1 << (FRAC_BITS - 1));
    for (int i = 0; i < W_WORDS; i++) cpu_write(WBASE + i, w[i]);
    pb_write(2, WBASE); pb_write(3, INB); pb_write(4, OUTB);
    pb_read(2, d); check(d == WBASE, "WBASE readback");

    for (int s = 0; s < STEPS; s++) begin
      obs = new[SELF_OBS + K_NEIGH * NB_OBS];
      // the third step scales inputs up so that the outputs saturate
      foreach (obs[i]) obs[i] = rnd((s == 2) ? (8 << FRAC_BITS) : (1 << FRAC_BITS));
      foreach (obs[i]) cpu_write(INB + i, obs[i]);
      expv = ref_forward(w, obs, K_NEIGH);

      busy_traffic = (s == 1);
      t0 = cycle;
      pb_write(0, 1);
      pb_read(1, st); check(st[0] == 1'b1, "busy after start");
      while (!irq) @(posedge clk);
      dur = cycle - t0;
      busy_traffic = 0;
      repeat (3) @(posedge clk);
      pb_read(1, st); check(st == 2, "STATUS done, not busy");

      for (int j = 0; j < 2*N_ACT; j++) begin
        cpu_read(OUTB + j, d);
        check(d == expv[j], $sformatf("step %0d word %0d got %0d expected %0d", s, j, d, expv[j]));
      end
      for (int j = 0; j < N_ACT; j++) begin
        check(thrust_out[j] == expv[N_ACT + j], "thrust_out port");
        if (expv[j] > (1 << FRAC_BITS)) n_clip_hi++;
        else if (expv[j] < -(1 << FRAC_BITS)) n_clip_lo++;
        else n_inrange++;
      end
      pb_read(5, d);
      $display("step %0d: %0d cycles (CYCLES=%0d), a = %0d %0d %0d %0d, weight cache hits %0d misses %0d",
               s, dur, d, expv[0], expv[1], expv[2], expv[3], wh, wm);
      // step timing: the 2409-cycle schedule plus two cycles per cache miss.
      // Every observation word misses (it was rewritten, so invalidated); in
      // step 0 every distinct weight word misses as well. Step 1 also has
      // processor traffic competing for the interconnect.
      if (s == 1) check(d > SCHED + 2 * OBS_WORDS, "contended step is longer");
      else check(d == SCHED + 2 * OBS_WORDS + ((s == 0) ? 2 * W_WORDS : 0),
                 $sformatf("step %0d took %0d cycles", s, d));
    end
    check(madds == 32'(STEPS * K_NEIGH * B_HID), "mean accumulations");

    $display("mechanisms: stalls=%0d invalidations=%0d relu_clamps=%0d clip_hi=%0d clip_lo=%0d in_range=%0d wc_hits=%0d wc_misses=%0d",
             n_stall, n_inval, n_relu0, n_clip_hi, n_clip_lo, n_inrange, wh, wm);
    check(n_stall > 0, "arbitration stall happened");
    check(n_inval > 0, "coherence invalidation happened");
    check(n_relu0 > 0, "ReLU clamp happened");
    check(n_clip_hi > 0 && n_clip_lo > 0, "thrust clipping at both ends happened");
    check(n_inrange > 0, "unclipped thrust happened");
    check(wh > 0 && wm > 0, "weight cache hits and misses happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
