// tb_main_memory: writes random words to random addresses, reads them back
// in random order and checks data and that rvalid comes exactly one cycle
// after a read request (and never after a write).
module tb_main_memory;
  import nn_pkg::*;
  localparam int DEPTH = 1024;
  logic clk = 0, rst_n = 0;
  mem_req_t req;
  logic rvalid;
  fxp_t rdata;
  int checks = 0, failures = 0;
  int model [DEPTH];

  main_memory #(.DEPTH(DEPTH)) dut (.clk, .rst_n, .req, .rvalid, .rdata);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    req = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < DEPTH; i++) begin
      model[i] = int'($urandom);
      req.req = 1; req.we = 1; req.addr = addr_t'(i); req.wdata = model[i];
      @(negedge clk);
      check(!rvalid, "no rvalid after a write");
    end
    req = '0;
    @(negedge clk);
    for (int n = 0; n < 2000; n++) begin
      automatic int a = int'($urandom_range(DEPTH - 1));
      if ($urandom_range(4) == 0) begin
        model[a] = int'($urandom);
        req.req = 1; req.we = 1; req.addr = addr_t'(a); req.wdata = model[a];
        @(negedge clk);
        check(!rvalid, "no rvalid after a write");
      end else begin
        req.req = 1; req.we = 0; req.addr = addr_t'(a);
        @(negedge clk);
        req = '0;
        check(rvalid && rdata == model[a], $sformatf("read %0d got %0h expected %0h", a, rdata, model[a]));
      end
      req = '0;
      if ($urandom_range(3) == 0) begin
        @(negedge clk);
        check(!rvalid, "no rvalid when idle");
      end
    end
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
