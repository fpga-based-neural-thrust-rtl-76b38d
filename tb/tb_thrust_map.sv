// tb_thrust_map: checks f = (clip(a,-1,1)+1)/2 in fixed point for the
// end points, values just inside and outside the clip range, and random
// values. Expected values are worked out with real numbers and floored.
module tb_thrust_map;
  import nn_pkg::*;
  fxp_t a, f;
  int checks = 0, failures = 0;
  localparam int ONE = 1 << FRAC_BITS;

  thrust_map dut (.a, .f);

  task automatic try(input int v);
    real r, c;
    int expv;
    a = v;
    #1;
    r = real'(v) / real'(ONE);
    c = (r > 1.0) ? 1.0 : (r < -1.0) ? -1.0 : r;
    expv = int'($floor((c + 1.0) / 2.0 * real'(ONE)));
    checks++;
    if (f !== expv) begin
      failures++;
      $display("FAIL: a=%0d f=%0d expected %0d", v, f, expv);
    end
  endtask

  initial begin
    try(0); try(ONE); try(-ONE); try(ONE + 1); try(-ONE - 1); try(ONE - 1); try(-ONE + 1);
    try(32'h7fff_ffff); try(32'h8000_0001); try(1); try(-1); try(3);
    for (int i = 0; i < 300; i++) try(int'($urandom_range(6 * ONE)) - 3 * ONE);
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
