// tb_mem_interconnect: four masters issue random reads and writes, each to
// its own address range, through the interconnect onto a memory model.
// Checks: at most one grant per cycle and only to a requester; read data
// routed back to the right master one cycle after its grant; a master that
// keeps requesting is granted within NM cycles (round-robin fairness); every
// granted write appears on the coherence bus the next cycle with the right
// master and address.
module tb_mem_interconnect;
  import nn_pkg::*;
  localparam int NM = 4;
  logic clk = 0, rst_n = 0;
  mem_req_t m_req [NM];
  mem_rsp_t m_rsp [NM];
  mem_req_t s_req;
  logic s_rvalid = 0;
  fxp_t s_rdata = 0;
  snoop_t snoop;
  int checks = 0, failures = 0;
  fxp_t mem [1024];
  int wait_cnt [NM];
  bit pend_rd [NM];
  int pend_addr [NM];
  bit exp_snoop;
  int exp_src, exp_addr;
  int n_conflict = 0;

  mem_interconnect #(.NM(NM)) dut (.*);

  always #5 clk = ~clk;

  // memory model behind the interconnect
  always @(posedge clk) begin
    s_rvalid <= s_req.req && !s_req.we;
    if (s_req.req && s_req.we) mem[int'(s_req.addr) % 1024] <= s_req.wdata;
    s_rdata <= mem[int'(s_req.addr) % 1024];
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // checker, sampled just before each rising edge
  always @(negedge clk) if (rst_n) begin
    automatic int ng = 0, nr = 0;
    #4;
    for (int m = 0; m < NM; m++) begin
      if (m_req[m].req) nr++;
      if (m_rsp[m].gnt) begin
        ng++;
        check(m_req[m].req, "grant without request");
      end
      if (m_rsp[m].rvalid) begin
        check(pend_rd[m] && m_rsp[m].rdata == mem[pend_addr[m] % 1024],
              $sformatf("read data to master %0d", m));
      end
    end
    if (nr > 1) n_conflict++;
    check(ng <= 1, "more than one grant");
    check(ng == 1 || nr == 0, "requests but no grant");
    check(snoop.valid == exp_snoop && (!exp_snoop ||
          (int'(snoop.src) == exp_src && int'(snoop.addr) == exp_addr)), "coherence broadcast");
  end

  // bookkeeping at the edge
  always @(posedge clk) if (rst_n) begin
    exp_snoop = 0;
    for (int m = 0; m < NM; m++) begin
      pend_rd[m] = 0;
      if (m_req[m].req && m_rsp[m].gnt) begin
        wait_cnt[m] = 0;
        if (m_req[m].we) begin exp_snoop = 1; exp_src = m; exp_addr = int'(m_req[m].addr); end
        else begin pend_rd[m] = 1; pend_addr[m] = int'(m_req[m].addr); end
      end else if (m_req[m].req) begin
        wait_cnt[m]++;
        check(wait_cnt[m] < NM, $sformatf("master %0d starved", m));
      end
    end
  end

  // one driver per master: hold a request until granted
  for (genvar g = 0; g < NM; g++) begin : g_m
    initial begin
      m_req[g] = '0;
      wait (rst_n);
      forever begin
        @(negedge clk);
        if (!m_req[g].req && $urandom_range(3) != 0) begin
          m_req[g].req   = 1;
          m_req[g].we    = ($urandom_range(2) == 0);
          m_req[g].addr  = addr_t'(g * 256 + $urandom_range(255));
          m_req[g].wdata = int'($urandom);
        end
        @(posedge clk);
        if (m_rsp[g].gnt) begin
          @(negedge clk);
          m_req[g] = '0;
        end
      end
    end
  end

  initial begin
    foreach (mem[i]) mem[i] = 0;
    foreach (wait_cnt[i]) begin wait_cnt[i] = 0; pend_rd[i] = 0; pend_addr[i] = 0; end
    exp_snoop = 0; exp_src = 0; exp_addr = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (3000) @(posedge clk);
    check(n_conflict > 0, "contention exercised");
    $display("conflict cycles=%0d", n_conflict);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
