// tb_mean_unit: feeds K random vectors of N elements (element by element, in
// shuffled gaps), then checks every element of the mean against sum/K and
// the vector count; repeats after clear, including negative values.
module tb_mean_unit;
  import nn_pkg::*;
  localparam int N = B_HID, K = K_NEIGH;
  logic clk = 0, rst_n = 0, clear = 0, add_valid = 0;
  logic [$clog2(N)-1:0] add_idx = 0, rd_idx = 0;
  fxp_t add_val = 0, mean;
  logic [7:0] count;
  int checks = 0, failures = 0;
  longint sum [N];

  mean_unit #(.N(N), .K(K)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 4; round++) begin
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      foreach (sum[j]) sum[j] = 0;
      for (int l = 0; l < K; l++) begin
        for (int j = 0; j < N; j++) begin
          automatic int v = (round < 2) ? int'($urandom_range(1 << 20))
                              : int'($urandom_range(1 << 21)) - (1 << 20);
          if ($urandom_range(3) == 0) @(negedge clk);   // idle gap
          add_valid = 1; add_idx = j[$clog2(N)-1:0]; add_val = v;
          sum[j] += v;
          @(negedge clk);
          add_valid = 0;
        end
      end
      checks++;
      if (count != 8'(K)) begin failures++; $display("FAIL: count %0d", count); end
      for (int j = 0; j < N; j++) begin
        rd_idx = j[$clog2(N)-1:0];
        #1;
        checks++;
        if (mean !== int'(sum[j] / K)) begin
          failures++;
          $display("FAIL: round %0d mean[%0d]=%0d expected %0d", round, j, mean, sum[j] / K);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
