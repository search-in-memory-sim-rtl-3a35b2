// Self-checking testbench for sim_failed_bit_accumulator with M = 16 groups:
// random counter outputs are captured; the bitmap must be the inverted
// mismatch vector and the total the sum of the counts; without capture both
// outputs must hold.
module tb_sim_failed_bit_accumulator;
  localparam int M = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic              capture;
  logic [M-1:0]      mismatch, bitmap;
  logic [M-1:0][6:0] count;
  logic [$clog2(M*64+1)-1:0] failed_bits;

  sim_failed_bit_accumulator #(.M(M)) dut (.*);

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int sum;
  logic [M-1:0] exp_bm;
  initial begin
    capture = 0; mismatch = 0; count = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 60; it++) begin
      sum = 0;
      for (int g = 0; g < M; g++) begin
        count[g]    = ($urandom % 3 == 0) ? 7'($urandom % 65) : 7'd0;
        mismatch[g] = (count[g] != 0);
        sum += int'(count[g]);
      end
      exp_bm = ~mismatch;
      capture = 1;
      @(negedge clk); capture = 0;
      checks++; if (bitmap !== exp_bm) begin failures++; $display("FAIL bitmap %h exp %h", bitmap, exp_bm); end
      checks++; if (int'(failed_bits) != sum) begin failures++; $display("FAIL total %0d exp %0d", failed_bits, sum); end
      mismatch = ~mismatch; count = '1;
      @(negedge clk);
      checks++; if (bitmap !== exp_bm) begin failures++; $display("FAIL hold"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
