// tb_accel_cache: a small cache (16 lines) in front of a memory model that
// withholds grants at random. An upstream master issues random reads and
// writes over 64 words, so lines conflict and are evicted; a second,
// foreign master writes the same words directly into memory and announces
// each write on the coherence bus the cycle after, as the interconnect does.
// Every read must return the value the word had at the read's grant, which
// fails if a stale line survives a foreign write. Hits, misses and
// invalidations must all occur.
module tb_accel_cache;
  import nn_pkg::*;
  localparam int LINES = 16, WORDS = 64;
  logic clk = 0, rst_n = 0;
  mem_req_t up_req, dn_req;
  mem_rsp_t up_rsp, dn_rsp;
  snoop_t snoop;
  logic [31:0] hits, misses;
  int checks = 0, failures = 0, n_inval = 0;
  int refm [WORDS];
  int exp_q [$];
  bit fw_pend = 0;
  int fw_addr, fw_data;

  tb_mem_model #(.DEPTH(WORDS), .STALL_PCT(30)) mem (.clk, .req(dn_req), .rsp(dn_rsp));
  accel_cache #(.LINES(LINES), .ID(1)) dut (.clk, .rst_n, .up_req, .up_rsp, .dn_req, .dn_rsp,
                                            .snoop, .hits, .misses);

  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (rst_n) begin
      if (dut.snp_match) n_inval++;
      // 1. value seen by a read granted at this edge
      if (up_req.req && up_rsp.gnt && !up_req.we) exp_q.push_back(refm[int'(up_req.addr)]);
      // 2. writes at this edge
      if (up_req.req && up_rsp.gnt && up_req.we) refm[int'(up_req.addr)] = up_req.wdata;
      snoop <= '0;
      if (fw_pend && !(dn_req.req && dn_rsp.gnt)) begin
        mem.mem[fw_addr] <= fw_data;
        refm[fw_addr] = fw_data;
        snoop <= '{valid: 1'b1, src: 2'd0, addr: addr_t'(fw_addr)};
        fw_pend = 0;
      end
      // 3. read data returning in this cycle
      if (up_rsp.rvalid) begin
        automatic int e = exp_q.pop_front();
        checks++;
        if (up_rsp.rdata !== e) begin
          failures++;
          $display("FAIL: read data %0h expected %0h", up_rsp.rdata, e);
        end
      end
    end
  end

  // foreign writer
  initial begin
    wait (rst_n);
    forever begin
      repeat ($urandom_range(12)) @(negedge clk);
      if (!fw_pend) begin
        fw_addr = int'($urandom_range(WORDS - 1));
        fw_data = int'($urandom);
        fw_pend = 1;
      end
    end
  end

  initial begin
    snoop = '0;
    up_req = '0;
    for (int i = 0; i < WORDS; i++) begin
      refm[i] = int'($urandom);
      mem.mem[i] = refm[i];
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      up_req.req   = 1;
      up_req.we    = ($urandom_range(5) == 0);
      up_req.addr  = addr_t'($urandom_range((n % 500 < 250) ? 15 : WORDS - 1));
      up_req.wdata = int'($urandom);
      @(posedge clk);
      while (!up_rsp.gnt) @(posedge clk);
      @(negedge clk);
      up_req = '0;
      if ($urandom_range(2) == 0) @(negedge clk);
    end
    repeat (3) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL: reads without data"); end
    checks++;
    if (hits == 0 || misses == 0 || n_inval == 0) begin
      failures++;
      $display("FAIL: mechanism missing");
    end
    $display("hits=%0d misses=%0d invalidations=%0d", hits, misses, n_inval);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
