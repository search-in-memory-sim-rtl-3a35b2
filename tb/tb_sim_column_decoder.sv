// Self-checking testbench for sim_column_decoder with 32 slots (4 chunks,
// 40 spare bytes). Random page and spare images; checks the byte sequence,
// the valid/last flags and the length of gather (several chunk bitmaps),
// page-open (header then chunk 0) and full-page transfers.
module tb_sim_column_decoder;
  import sim_pkg::*;
  localparam int M = 32, NC = 4, SP = 24 + 4*NC, PB = M*8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start_gather, start_open, start_page, busy, dout_valid, dout_last;
  logic [63:0] chunks;
  logic [M-1:0][63:0] page;
  logic [SP-1:0][7:0] spare;
  logic [7:0] dout;

  sim_column_decoder #(.M(M)) dut (.*);

  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  byte unsigned img [PB + SP];
  int exp_q [$];

  task automatic run_and_check(input string what);
    int n = 0;
    @(negedge clk); start_gather = 0; start_open = 0; start_page = 0;
    while (dout_valid) begin
      checks++;
      if (n >= exp_q.size() || dout != 8'(exp_q[n])) begin
        failures++; $display("FAIL %s byte %0d got %h", what, n, dout);
      end
      checks++;
      if (dout_last != (n == exp_q.size() - 1)) begin failures++; $display("FAIL %s last at %0d", what, n); end
      n++;
      @(negedge clk);
    end
    checks++;
    if (n != exp_q.size()) begin failures++; $display("FAIL %s length %0d exp %0d", what, n, exp_q.size()); end
  endtask

  initial begin
    start_gather = 0; start_open = 0; start_page = 0; chunks = 0;
    for (int b = 0; b < PB + SP; b++) img[b] = 8'($urandom);
    for (int s = 0; s < M; s++)
      for (int l = 0; l < 8; l++) page[s][(7-l)*8 +: 8] = img[s*8 + l];
    for (int b = 0; b < SP; b++) spare[b] = img[PB + b];
    repeat (2) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 12; it++) begin
      chunks = (it == 0) ? 64'hF : (it == 1) ? 64'h8 : 64'($urandom % 16) | 64'hF0;
      exp_q.delete();
      for (int c = 0; c < NC; c++) if (chunks[c]) begin
        for (int b = 0; b < 64; b++) exp_q.push_back(img[c*64 + b]);
        for (int b = 0; b < 4; b++)  exp_q.push_back(img[PB + 24 + c*4 + b]);
      end
      start_gather = 1;
      run_and_check("gather");
    end
    exp_q.delete();
    for (int b = 0; b < 24; b++) exp_q.push_back(img[PB + b]);
    for (int b = 0; b < 64; b++) exp_q.push_back(img[b]);
    start_open = 1;
    run_and_check("open");
    exp_q.delete();
    for (int b = 0; b < PB + SP; b++) exp_q.push_back(img[b]);
    start_page = 1;
    run_and_check("page");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
