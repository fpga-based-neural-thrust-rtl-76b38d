// tb_flight_setpoints: runs the whole subsystem, at its default sizes,
// through sequences of control steps shaped like three test flights:
//   a) a start point and three setpoints in different directions,
//   b) a rectangle flown corner to corner, ending back near the start,
//   c) a spiral that climbs to z = 0.8 m above the start.
// The trained weights are not available, so the weights are random and the
// drone is not closed-loop controlled by them: a simple kinematic model moves
// the drone toward the current setpoint at a fixed speed each step, and the
// observations (position error, velocity, level attitude, zero body rates,
// six distant static neighbours) are formed from it as the firmware would.
// Every step's a and f are checked against the behavioural reference, f
// must lie in [0, 1], and every step must finish in the cache-warm cycle
// budget after the first.
module tb_flight_setpoints;
  import nn_pkg::*;
  import nn_ref_pkg::*;

  localparam int WBASE = 'h0100, INB = 'h1000, OUTB = 'h1100;
  localparam int ONE = 1 << FRAC_BITS;
  localparam int STEPS_PER_LEG = 4;

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

  int checks = 0, failures = 0, steps = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
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

  int w[];
  real pos [3], vel [3];

  function automatic int fx(input real r);
    return int'($floor(r * real'(ONE)));
  endfunction

  // one control step: observations from the model, accelerator run, checks
  task automatic control_step(input real tgt [3]);
    ivec_t obs, expv;
    int d, cyc;
    real step_len = 0.1;    // metres moved per step in the model
    real dlen, dir [3];
    obs = new[SELF_OBS + K_NEIGH * NB_OBS];
    for (int i = 0; i < 3; i++) begin
      obs[i]     = fx(pos[i] - tgt[i]);     // position relative to target
      obs[3 + i] = fx(vel[i]);              // velocity
      obs[15 + i] = 0;                      // body rates
    end
    for (int r = 0; r < 3; r++)             // level attitude: R = I, row-wise
      for (int c = 0; c < 3; c++) obs[6 + 3*r + c] = (r == c) ? ONE : 0;
    for (int l = 0; l < K_NEIGH; l++)       // distant, hovering neighbours
      for (int i = 0; i < 3; i++) begin
        obs[SELF_OBS + l*NB_OBS + i]     = fx(pos[i] - (real'(l) - 2.5) * 1.5);
        obs[SELF_OBS + l*NB_OBS + 3 + i] = fx(vel[i]);
      end
    foreach (obs[i]) cpu_write(INB + i, obs[i]);
    expv = ref_forward(w, obs, K_NEIGH);
    pb_write(0, 1);
    while (!irq) @(posedge clk);
    @(negedge clk);
    pb_addr = 3'd5; #1 cyc = pb_rdata;
    for (int j = 0; j < 2 * N_ACT; j++) begin
      cpu_read(OUTB + j, d);
      check(d == expv[j], $sformatf("step %0d word %0d: %0d expected %0d", steps, j, d, expv[j]));
    end
    for (int j = 0; j < N_ACT; j++)
      check(thrust_out[j] >= 0 && thrust_out[j] <= ONE, "thrust within [0, 1]");
    if (steps > 0) check(cyc < 2600, $sformatf("warm step took %0d cycles", cyc));
    steps++;
    // kinematic model: move toward the target
    dlen = 0;
    for (int i = 0; i < 3; i++) dlen += (tgt[i] - pos[i]) ** 2;
    dlen = $sqrt(dlen);
    for (int i = 0; i < 3; i++) begin
      dir[i] = (dlen > step_len) ? (tgt[i] - pos[i]) / dlen * step_len : (tgt[i] - pos[i]);
      vel[i] = dir[i] * 10.0;
      pos[i] = pos[i] + dir[i];
    end
  endtask

  task automatic fly_to(input real x, input real y, input real z);
    real t [3];
    t[0] = x; t[1] = y; t[2] = z;
    for (int s = 0; s < STEPS_PER_LEG; s++) control_step(t);
  endtask

  initial begin
    cpu_req = '0; pb_sel = 0; pb_we = 0; pb_addr = 0; pb_wdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    w = new[W_WORDS];
    foreach (w[i]) w[i] = rnd(1 << (FRAC_BITS - 1));
    foreach (w[i]) cpu_write(WBASE + i, w[i]);
    pb_write(2, WBASE); pb_write(3, INB); pb_write(4, OUTB);

    // a) setpoints in different directions (own coordinates)
    pos = '{0.0, 0.0, 1.0}; vel = '{0.0, 0.0, 0.0};
    fly_to(-1.0, 0.4, 1.0); fly_to(-0.5, -0.6, 1.0); fly_to(1.0, 0.4, 1.0);
    // b) rectangle (own coordinates), ending at the start corner
    pos = '{0.3, 0.3, 1.0}; vel = '{0.0, 0.0, 0.0};
    fly_to(-0.8, 0.3, 1.0); fly_to(-0.8, -0.6, 1.0); fly_to(0.3, -0.6, 1.0); fly_to(0.3, 0.3, 1.0);
    // c) spiral: one turn of radius 0.5 m climbing to z = 0.8 m
    pos = '{0.5, 0.0, 0.0}; vel = '{0.0, 0.0, 0.0};
    for (int i = 1; i <= 8; i++) begin
      automatic real ang = 2.0 * 3.14159265 * real'(i) / 8.0;
      real t [3];
      t[0] = 0.5 * $cos(ang); t[1] = 0.5 * $sin(ang); t[2] = 0.8 * real'(i) / 8.0;
      control_step(t);
    end
    $display("flown %0d control steps, weight cache hits %0d misses %0d", steps, wh, wm);
    check(madds == 32'(steps * K_NEIGH * B_HID), "mean accumulations");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
