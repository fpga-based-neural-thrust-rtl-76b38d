// tb_relu_act: checks y = max(0, x) with enable high and y = x with enable
// low, for edge values and random words.
module tb_relu_act;
  import nn_pkg::*;
  logic en;
  fxp_t x, y;
  int checks = 0, failures = 0;

  relu_act dut (.enable(en), .x, .y);

  task automatic try(input bit e, input int v);
    int expv;
    en = e; x = v;
    #1;
    expv = (e && v < 0) ? 0 : v;
    checks++;
    if (y !== expv) begin
      failures++;
      $display("FAIL: en=%0d x=%0d y=%0d expected %0d", e, v, y, expv);
    end
  endtask

  initial begin
    try(1, 0); try(1, -1); try(1, 1); try(1, 32'h8000_0000); try(1, 32'h7fff_ffff);
    try(0, -1); try(0, -12345);
    for (int i = 0; i < 200; i++) try($urandom_range(1), int'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
