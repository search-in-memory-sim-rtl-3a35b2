// Self-checking testbench for sim_oec_checker. Builds page-open responses
// (timestamp, magic, CRC, 64-byte chunk) with a bit-serial CRC-64/ECMA-182
// reference and checks the verdict for a clean page, a corrupted chunk, a
// wrong magic number and an aged page, and that the verdict comes one cycle
// after the last byte.
module tb_sim_oec_checker;
  localparam logic [63:0] MAGIC = 64'h5349_4D5F_5041_4745, AGE = 64'd1000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [63:0] now;
  logic in_valid, done, ok, full_read, read_retry, refresh;
  logic [7:0] in_byte;

  sim_oec_checker #(.MAGIC(MAGIC), .MAX_AGE(AGE)) dut (.*);

  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [63:0] crc_bits(input byte unsigned msg [$]);
    logic [63:0] c = 0;
    logic fb;
    foreach (msg[i])
      for (int b = 7; b >= 0; b--) begin
        fb = c[63] ^ msg[i][b];
        c = {c[62:0], 1'b0};
        if (fb) c ^= 64'h42F0E1EBA9EA3693;
      end
    return c;
  endfunction

  task automatic send(input logic [63:0] ts, input logic [63:0] mg, input int corrupt,
                      input logic exp_ok, exp_full, exp_retry, exp_ref);
    byte unsigned msg [$];
    byte unsigned chunk [64];
    logic [63:0] crc;
    foreach (chunk[i]) chunk[i] = 8'($urandom);
    for (int i = 7; i >= 0; i--) msg.push_back(ts[i*8 +: 8]);
    for (int i = 7; i >= 0; i--) msg.push_back(mg[i*8 +: 8]);
    foreach (chunk[i]) msg.push_back(chunk[i]);
    crc = crc_bits(msg);
    if (corrupt != 0) chunk[5] ^= 8'(corrupt);
    msg.delete();
    for (int i = 7; i >= 0; i--) msg.push_back(ts[i*8 +: 8]);
    for (int i = 7; i >= 0; i--) msg.push_back(mg[i*8 +: 8]);
    for (int i = 7; i >= 0; i--) msg.push_back(crc[i*8 +: 8]);
    foreach (chunk[i]) msg.push_back(chunk[i]);
    foreach (msg[i]) begin
      in_valid = 1; in_byte = msg[i];
      @(negedge clk);
      if (i < msg.size() - 1) begin checks++; if (done) begin failures++; $display("FAIL early done"); end end
    end
    in_valid = 0;
    checks++;
    if (!done || ok != exp_ok || full_read != exp_full || read_retry != exp_retry || refresh != exp_ref) begin
      failures++;
      $display("FAIL verdict done=%b ok=%b full=%b retry=%b refresh=%b", done, ok, full_read, read_retry, refresh);
    end
    @(negedge clk);
  endtask

  initial begin
    in_valid = 0; in_byte = 0; now = 64'd5000;
    repeat (2) @(negedge clk); rst_n = 1;
    send(64'd4500, MAGIC, 0,     1, 0, 0, 0);
    send(64'd4500, MAGIC, 8'h10, 0, 1, 0, 0);
    send(64'd4500, MAGIC ^ 64'h1, 0, 0, 0, 1, 0);
    send(64'd3000, MAGIC, 0,     0, 0, 0, 1);
    send(64'd4999, MAGIC, 0,     1, 0, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
