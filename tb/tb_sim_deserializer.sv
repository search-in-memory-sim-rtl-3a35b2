// Self-checking testbench for sim_deserializer with 32 slots (4 chunks).
// A key load must write Latch 4 of slot s of every chunk in cycle s, each copy
// XORed with that chunk's scrambler word, computed here by an independent
// reference (xorshift 13/7/17 seeded from row address and chunk index), and
// raise key_done 9 cycles after the load. The storage-mode byte path must
// number bytes from 0 after din_start.
module tb_sim_deserializer;
  import sim_pkg::*;
  localparam int M = 32, NC = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic key_load, key_busy, key_done, din_start, din_valid, pb_we;
  logic [63:0] key;
  row_addr_t row;
  logic [7:0] l4_slot_we;
  logic [NC-1:0][63:0] l4_word;
  logic [7:0] din_byte, pb_byte;
  logic [$clog2(M*8 + 24 + 4*NC)-1:0] pb_col;

  sim_deserializer #(.M(M)) dut (.*);

  function automatic logic [63:0] ref_step(input logic [63:0] v);
    logic [63:0] a;
    a = v ^ {v[50:0], 13'd0};
    a = a ^ {7'd0, a[63:7]};
    a = a ^ {a[46:0], 17'd0};
    return a;
  endfunction
  function automatic logic [63:0] ref_seed(input logic [15:0] r, input int c);
    return 64'h9E3779B97F4A7C15 ^ (64'(r) << 10) ^ (64'(c) << 4) ^ 64'hB;
  endfunction

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [63:0] st [NC];
  int cyc;
  initial begin
    key_load = 0; key = 0; row = 0; din_start = 0; din_valid = 0; din_byte = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 6; it++) begin
      key = {$urandom, $urandom}; row = 16'($urandom);
      for (int c = 0; c < NC; c++) st[c] = ref_step(ref_seed(row, c));
      @(negedge clk); key_load = 1;
      @(negedge clk); key_load = 0;
      for (int s = 0; s < 8; s++) begin
        checks++;
        if (l4_slot_we != 8'(1 << s)) begin failures++; $display("FAIL slot we %b at %0d", l4_slot_we, s); end
        for (int c = 0; c < NC; c++) begin
          checks++;
          if (l4_word[c] !== (key ^ st[c])) begin failures++; $display("FAIL word c%0d s%0d", c, s); end
          st[c] = ref_step(st[c]);
        end
        checks++;
        if (key_done) begin failures++; $display("FAIL early done"); end
        @(negedge clk);
      end
      checks++;
      if (!key_done || l4_slot_we != 0) begin failures++; $display("FAIL done timing"); end
    end
    // storage-mode bytes
    @(negedge clk); din_start = 1;
    @(negedge clk); din_start = 0;
    for (int b = 0; b < 20; b++) begin
      din_valid = 1; din_byte = 8'(b * 3);
      #1; checks++;
      if (!pb_we || int'(pb_col) != b || pb_byte != 8'(b * 3)) begin failures++; $display("FAIL din %0d", b); end
      @(negedge clk);
    end
    din_valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
