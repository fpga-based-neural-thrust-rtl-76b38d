// tb_nn_accelerator: the accelerator alone, its three memory ports served by
// memory models (weights, observations, results). Several control steps
// with random weights and observations are run: the first with memories
// that grant every cycle, where the step length must equal the schedule
// worked out below, then with random grant stalls. Results in the result
// memory, on a_out/f_out and the STATUS/CYCLES registers are checked
// against the behavioural reference.
//
// Stall-free schedule, in cycles from the start write to done:
//   load o^q       SELF_OBS + 1 + 1
//   each layer     OUT*(IN+1) + 2, plus 1 to launch it
//   each neighbour NB_OBS + 2 for the load, then B1 and B2
//   mean copy      B_HID
//   store          2*N_ACT + 1
module tb_nn_accelerator;
  import nn_pkg::*;
  import nn_ref_pkg::*;

  localparam int WB = 'h100, INB = 'h1000, OUTB = 'h1100;
  logic clk = 0, rst_n = 0;
  logic pb_sel = 0, pb_we = 0, irq;
  logic [2:0] pb_addr = 0;
  fxp_t pb_wdata = 0, pb_rdata;
  mem_req_t m_req [3], r0, r1, r2;
  mem_rsp_t m_rsp [3], f0, f1, f2, s0, s1, s2;
  fxp_t a_out [N_ACT], f_out [N_ACT];
  logic [31:0] mean_adds;
  bit stall = 0;
  int checks = 0, failures = 0;

  nn_accelerator dut (.*);

  tb_mem_model #(.DEPTH(8192), .STALL_PCT(0))  mw (.clk, .req(stall ? '0 : m_req[0]), .rsp(f0));
  tb_mem_model #(.DEPTH(8192), .STALL_PCT(0))  mo (.clk, .req(stall ? '0 : m_req[1]), .rsp(f1));
  tb_mem_model #(.DEPTH(8192), .STALL_PCT(0))  mr (.clk, .req(stall ? '0 : m_req[2]), .rsp(f2));
  tb_mem_model #(.DEPTH(8192), .STALL_PCT(30)) sw (.clk, .req(stall ? m_req[0] : '0), .rsp(s0));
  tb_mem_model #(.DEPTH(8192), .STALL_PCT(30)) so (.clk, .req(stall ? m_req[1] : '0), .rsp(s1));
  tb_mem_model #(.DEPTH(8192), .STALL_PCT(30)) sr (.clk, .req(stall ? m_req[2] : '0), .rsp(s2));
  assign m_rsp[0] = stall ? s0 : f0;
  assign m_rsp[1] = stall ? s1 : f1;
  assign m_rsp[2] = stall ? s2 : f2;

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic pb_write(input int a, input int d);
    @(negedge clk);
    pb_sel = 1; pb_we = 1; pb_addr = 3'(a); pb_wdata = d;
    @(negedge clk);
    pb_sel = 0; pb_we = 0;
  endtask

  function automatic int lat(int i, int o);
    return o * (i + 1) + 2 + 1;
  endfunction

  int w[];
  ivec_t obs, expv;

  initial begin
    int exp_cycles, t0, dur;
    exp_cycles = (SELF_OBS + 2) + lat(SELF_OBS, EQ_HID) + lat(EQ_HID, EQ_HID)
               + K_NEIGH * ((NB_OBS + 2) + lat(NB_OBS, B_HID) + lat(B_HID, B_HID))
               + B_HID + lat(E_LEN, H_HID) + lat(H_HID, N_ACT) + (2 * N_ACT + 1);
    repeat (2) @(negedge clk);
    rst_n = 1;
    w = new[W_WORDS];
    foreach (w[i]) begin
      w[i] = rnd(1 << (FRAC_BITS - 1));
      mw.mem[WB + i] = w[i];
      sw.mem[WB + i] = w[i];
    end
    pb_write(2, WB); pb_write(3, INB); pb_write(4, OUTB);
    for (int s = 0; s < 4; s++) begin
      stall = (s >= 2);
      obs = new[SELF_OBS + K_NEIGH * NB_OBS];
      foreach (obs[i]) begin
        obs[i] = rnd((s == 1) ? (6 << FRAC_BITS) : (1 << FRAC_BITS));
        mo.mem[INB + i] = obs[i];
        so.mem[INB + i] = obs[i];
      end
      expv = ref_forward(w, obs, K_NEIGH);
      @(negedge clk);
      pb_sel = 1; pb_we = 1; pb_addr = 0; pb_wdata = 1;
      t0 = $time;
      @(negedge clk);
      pb_sel = 0; pb_we = 0;
      while (!irq) @(negedge clk);
      dur = ($time - t0) / 10;
      pb_addr = 1; #1;
      check(pb_rdata == 2, "STATUS done");
      pb_addr = 5; #1;
      $display("step %0d: %0d cycles (CYCLES=%0d, schedule %0d)", s, dur, pb_rdata, exp_cycles);
      // irq is registered, so it is seen one cycle after the last store
      if (!stall) check(dur == exp_cycles + 1 && pb_rdata == exp_cycles,
                        $sformatf("step length %0d, expected %0d", pb_rdata, exp_cycles));
      else        check(pb_rdata > exp_cycles, "stalls lengthen the step");
      $display("result port grants %0d %0d", mr.grants, sr.grants);
      for (int j = 0; j < 2 * N_ACT; j++) begin
        automatic fxp_t got = stall ? sr.mem[OUTB + j] : mr.mem[OUTB + j];
        check(got == expv[j], $sformatf("step %0d word %0d: %0d expected %0d", s, j, got, expv[j]));
      end
      for (int j = 0; j < N_ACT; j++) begin
        check(a_out[j] == expv[j], "a_out");
        check(f_out[j] == expv[N_ACT + j], "f_out");
      end
    end
    check(mean_adds == 32'(4 * K_NEIGH * B_HID), "mean accumulations");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
