// tb_sim_chip: self-checking testbench of the chip (I/O control, control
// logic, deserializer and both dies) at 16 slots per page with the data
// randomizer turned off, so search keys compare against stored bytes
// directly. Covers erase, program + verify, storage read, status, page open
// response, searches with latency check (12 cycles from the last mask byte to
// the first bitmap byte: 10 search cycles + decode + bitmap load), gathers
// from Latch 2 / Latch 1 / array, page close hand-over, search rejection,
// back-to-back searches on both dies and program-verify failure. The page
// open timing is checked: the response starts after the array read time.
`timescale 1ns/1ps
module tb_sim_chip;
  import sim_pkg::*;
  localparam int M = 16;
  localparam bit TB_RAND = 1'b0;
  localparam logic [63:0] TB_MAGIC = 64'h0123_4567_89AB_CDEF;
  localparam int TR = 25;

  logic clk = 0, rst_n = 0, cle = 0, ale = 0, we = 0;
  logic [7:0] dq_in = 0, dq_out;
  logic dq_valid, dq_last, rdy, match_mode;
  dkind_e dq_kind;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  sim_chip #(.NDIE(2), .M(M), .BLK(2), .PGS(8), .T_READ(TR), .T_PROG(35), .T_ERASE(45),
             .RANDOMIZE(TB_RAND)) dut (.*);

  `include "tb_sim_bus.svh"

  logic [63:0] v0 [], v1 [], v2 [];
  img_t i0, i1, i2;
  logic [7:0] st;
  logic [M-1:0] bm;
  int lat, t0, t_first;
  localparam logic [15:0] R0 = 16'h0000, R1 = 16'h0087, R2 = 16'h1001;

  initial begin : watchdog
    #5ms;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    v0 = new[M]; v1 = new[M]; v2 = new[M];
    for (int s = 0; s < M; s++) begin
      v0[s] = 64'(s % 4);
      v1[s] = {$urandom, $urandom};
      v2[s] = {32'hCAFE_0000 | 32'(s), $urandom};
    end
    make_image(R0, v0, 64'd1, i0);
    make_image(R1, v1, 64'd2, i1);
    make_image(R2, v2, 64'd3, i2);
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    op_status(st); tb_chk(st == 8'hC0, "status after reset");
    op_erase(16'h0000); op_erase(16'h0080); op_erase(16'h1000);
    op_program(R0, i0); op_status(st); tb_chk(st == 8'hC0, "program R0 ok");
    op_program(R1, i1); op_status(st); tb_chk(st == 8'hC0, "program R1 ok");
    op_program(R2, i2); op_status(st); tb_chk(st == 8'hC0, "program R2 ok");
    op_read_check(R1, i1);

    // page open timing: first response byte no earlier than the read time
    t0 = cyc;
    op_open_check(R0, i0);
    tb_chk(cyc - t0 > TR + 88, "page open response after the read time");
    op_status(st); tb_chk(st == 8'hE8, "status: match mode, active");
    // stored bytes are plain: slot value s%4
    for (int k = 0; k < 4; k++) begin
      op_search(R0, 64'(k), '1, bm, lat);
      tb_chk(bm == {4{4'b0001 << k}}, $sformatf("search value %0d", k));
      tb_chk(lat == 12, $sformatf("search latency %0d", lat));
    end
    op_search(R0, 64'd0, ~64'd1, bm, lat);
    tb_chk(bm == 16'h3333, "search with low bit masked");
    op_gather_check(R0, 64'b11, v0, i0, "gather both chunks from latch 2");

    // die 1 page open and search, interleaved with die 0
    op_open_check(R2, i2);
    op_search(R2, 64'hCAFE_0005_0000_0000, 64'hFFFF_FFFF_0000_0000, bm, lat);
    tb_chk(bm == 16'h0020, "die 1 masked search");
    op_search(R0, 64'd3, '1, bm, lat);
    tb_chk(bm == 16'h8888, "die 0 search after die 1");

    // stage R1 behind R0, gather from latch 1, then close R0
    op_open_check(R1, i1);
    op_status(st); tb_chk(st[4] && st[5], "R1 staged");
    op_gather_check(R1, 64'b10, v1, i1, "gather from latch 1");
    op_search_reject(R1, v1[0], st); tb_chk(st[0], "search on staged page sets fail");
    bus_cmd(OP_PAGE_CLOSE, R0);
    op_status(st); tb_chk(st[5] && !st[4] && !st[0], "R1 now active");
    op_search(R1, v1[9], '1, bm, lat);
    tb_chk(bm == ref_search(v1, v1[9], '1), "search R1 after hand-over");
    // gather of a page that is not open goes through the array
    t0 = cyc;
    op_gather_check(R0, 64'b01, v0, i0, "gather via array");
    tb_chk(cyc - t0 > TR, "array gather waits for the read");
    bus_cmd(OP_PAGE_CLOSE, R1);
    bus_cmd(OP_PAGE_CLOSE, R2);
    op_status(st); tb_chk(!st[5] && !st[4], "all closed");
    // reprogramming a written page cannot set bits: verify fails
    begin
      automatic img_t ib = i0;
      ib[8*5 + 7] = 8'hFF;     // slot 5 (value 1) -> set bits
      op_program(R0, ib);
      op_status(st); tb_chk(st == 8'hC1, "program verify failure reported");
      op_program(16'h0005, i2);
      op_status(st); tb_chk(st == 8'hC0, "fail bit cleared by next good program");
    end
    repeat (10) @(negedge clk);
    tb_chk(rx.size() == 0, "no stray output");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
