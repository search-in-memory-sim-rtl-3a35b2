// Self-checking testbench for sim_page_buffer: one 64-bitline group.
// Loads Latch 1 from sensing and from bus bytes, moves it to Latch 2, loads
// Latch 4, forms Latch 3 and checks the FBC switch outputs against a
// reference for masked match mode and for Enable FBC (storage mode).
module tb_sim_page_buffer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic sense_to_l1, sense_to_l4, din_we, l1_to_l2, l4_we, xor_en, en_fbc;
  logic [63:0] sense_data, l4_data, mask, l1_q, l2_q, fbc_sw;
  logic [2:0] din_lane;
  logic [7:0] din_byte;

  sim_page_buffer dut (.*);

  task automatic chk(input logic [63:0] got, exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %h exp %h", what, got, exp); end
  endtask

  task automatic idle();
    sense_to_l1 = 0; sense_to_l4 = 0; din_we = 0; l1_to_l2 = 0; l4_we = 0; xor_en = 0;
  endtask

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [63:0] d, k, m, exp_l1;
  initial begin
    idle(); en_fbc = 0; mask = 0; sense_data = 0; l4_data = 0; din_lane = 0; din_byte = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 50; it++) begin
      d = {$urandom, $urandom}; k = {$urandom, $urandom}; m = {$urandom, $urandom};
      if (it % 5 == 0) k = d;                         // exact match case
      @(negedge clk); idle(); sense_data = d; sense_to_l1 = 1;
      @(negedge clk); idle(); chk(l1_q, d, "L1 after sense");
      l1_to_l2 = 1;
      @(negedge clk); idle(); chk(l2_q, d, "L2 after transfer");
      l4_data = k; l4_we = 1;
      @(negedge clk); idle(); xor_en = 1;
      @(negedge clk); idle();
      en_fbc = 0; mask = m; #1;
      chk(fbc_sw, (d ^ k) & m, "match-mode switch");
      mask = 0; #1;
      chk(fbc_sw, 64'd0, "no mask, no enable: switch off");
      en_fbc = 1; #1;
      chk(fbc_sw, d ^ k, "storage-mode FBC enable");
      en_fbc = 0;
    end
    // bus byte writes into Latch 1, lane 0 = most significant byte
    exp_l1 = l1_q;
    for (int lane = 0; lane < 8; lane++) begin
      @(negedge clk); idle(); din_we = 1; din_lane = 3'(lane); din_byte = 8'(8'h10 + lane);
      exp_l1[(7-lane)*8 +: 8] = 8'(8'h10 + lane);
    end
    @(negedge clk); idle(); chk(l1_q, exp_l1, "L1 byte writes");
    chk(l1_q, 64'h1011121314151617, "L1 byte order");
    // verify path: sensed data into Latch 4, L2 unchanged
    sense_data = l2_q ^ 64'h0000_0000_0000_0101; sense_to_l4 = 1;
    @(negedge clk); idle(); xor_en = 1;
    @(negedge clk); idle(); en_fbc = 1; #1;
    chk(fbc_sw, 64'h0000_0000_0000_0101, "verify failed bits");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
