// Self-checking testbench for sim_fbc_counter: random switch patterns, the
// count compared with a bit-by-bit reference and the comparator output with
// count != 0.
module tb_sim_fbc_counter;
  int checks = 0, failures = 0;
  logic [63:0] sw;
  logic [6:0]  count;
  logic        mismatch;

  sim_fbc_counter dut (.*);

  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int ref_cnt;
  initial begin
    for (int it = 0; it < 400; it++) begin
      unique case (it % 4)
        0: sw = {$urandom, $urandom};
        1: sw = 64'd1 << ($urandom % 64);
        2: sw = '0;
        default: sw = {$urandom, $urandom} & {$urandom, $urandom} & {$urandom, $urandom};
      endcase
      if (it == 3) sw = '1;
      #1;
      ref_cnt = 0;
      for (int i = 0; i < 64; i++) if (sw[i]) ref_cnt++;
      checks++;
      if (int'(count) != ref_cnt) begin failures++; $display("FAIL count %0d exp %0d", count, ref_cnt); end
      checks++;
      if (mismatch != (ref_cnt != 0)) begin failures++; $display("FAIL mismatch"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
