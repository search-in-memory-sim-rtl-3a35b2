// Self-checking testbench for the sim_cell_array behavioural model with a
// small array (4 blocks x 4 pages, 64-bit pages, short latencies): erased
// pages read as ones, program can only clear bits, erase restores a block,
// and busy lasts exactly the configured number of cycles.
module tb_sim_cell_array;
  localparam int W = 64, TR = 7, TP = 11, TE = 17;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [3:0] blk_sel, wl_sel;
  logic read, prog, erase, sense_valid, busy, done;
  logic [W-1:0] prog_data, sense_data;

  sim_cell_array #(.PAGE_W(W), .BLK(4), .PGS(4), .T_READ(TR), .T_PROG(TP), .T_ERASE(TE)) dut (.*);

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic op(input int kind, input int b, input int p, input logic [W-1:0] d,
                    input int lat, output logic [W-1:0] q);
    int n = 0;
    blk_sel = 4'(1 << b); wl_sel = 4'(1 << p); prog_data = d;
    read = (kind == 0); prog = (kind == 1); erase = (kind == 2);
    @(negedge clk); read = 0; prog = 0; erase = 0;
    while (!done) begin n++; @(negedge clk); end
    q = sense_data;
    checks++;
    if (n != lat) begin failures++; $display("FAIL latency %0d exp %0d", n, lat); end
  endtask

  logic [W-1:0] q, a, b2;
  initial begin
    read = 0; prog = 0; erase = 0; blk_sel = 1; wl_sel = 1; prog_data = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    op(0, 1, 2, 0, TR, q);
    checks++; if (q !== '1) begin failures++; $display("FAIL erased read"); end
    a = {$urandom, $urandom}; b2 = {$urandom, $urandom};
    op(1, 1, 2, a, TP, q);
    op(0, 1, 2, 0, TR, q);
    checks++; if (q !== a) begin failures++; $display("FAIL program/read"); end
    op(0, 1, 3, 0, TR, q);
    checks++; if (q !== '1) begin failures++; $display("FAIL neighbour page"); end
    op(1, 1, 2, b2, TP, q);
    op(0, 1, 2, 0, TR, q);
    checks++; if (q !== (a & b2)) begin failures++; $display("FAIL reprogram AND"); end
    op(1, 2, 2, b2, TP, q);
    op(2, 1, 0, 0, TE, q);
    op(0, 1, 2, 0, TR, q);
    checks++; if (q !== '1) begin failures++; $display("FAIL erase"); end
    op(0, 2, 2, 0, TR, q);
    checks++; if (q !== b2) begin failures++; $display("FAIL other block kept"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
