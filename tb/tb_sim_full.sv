// tb_sim_full: full-size run of sim_top with every parameter at its default
// (512 slots = 4 KiB pages, 2 dies x 32 blocks x 128 pages, read/program/
// erase = 528/2640/33000 cycles, i.e. 16 us/80 us/1 ms at 33 MHz). One pass
// of each main operation: erase, program with verify, storage read, page open
// with header check, searches (latency checked at 12 cycles: 10 search
// cycles + decode + bitmap load), gather, and a search on the second die.
// Checked against the reference model in tb_sim_bus.svh.
`timescale 1ns/1ps
module tb_sim_full;
  import sim_pkg::*;
  localparam int M = PAGE_SLOTS;
  localparam bit TB_RAND = 1'b1;
  localparam logic [63:0] TB_MAGIC = 64'h5349_4D5F_5041_4745;

  logic clk = 0, rst_n = 0, cle = 0, ale = 0, we = 0;
  logic [7:0] dq_in = 0, dq_out;
  logic dq_valid, dq_last, rdy, match_mode;
  dkind_e dq_kind;
  logic [63:0] now = 64'd100000;
  logic oec_done, oec_ok, oec_full_read, oec_read_retry, oec_refresh;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  sim_top dut (.*);

  `include "tb_sim_bus.svh"

  logic [63:0] va [], vc [];
  img_t ia, ic;
  logic [7:0] st;
  logic [M-1:0] bm;
  int lat;
  int t_start;
  int n_ok = 0;
  localparam logic [15:0] RA = 16'h0105, RC = 16'h1F7F;   // die 0 blk 2 pg 5; die 1 blk 30 pg 127

  always @(posedge clk) if (rst_n && oec_done && oec_ok) n_ok++;

  initial begin : watchdog
    #50ms;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    va = new[M]; vc = new[M];
    for (int s = 0; s < M; s++) begin
      va[s] = {$urandom, $urandom};
      vc[s] = 64'(s * 3);
    end
    va[100] = va[7]; va[511] = va[7];
    make_image(RA, va, 64'd99000, ia);
    make_image(RC, vc, 64'd99500, ic);
    repeat (4) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    t_start = cyc;
    op_erase(16'h0100);
    tb_chk(cyc - t_start >= T_ERASE_CYC, $sformatf("erase takes >= %0d cycles (%0d)", T_ERASE_CYC, cyc - t_start));
    op_erase(16'h1F00);
    t_start = cyc;
    op_program(RA, ia);
    tb_chk(cyc - t_start >= PAGE_BYTES + T_PROG_CYC + T_READ_CYC, "program + verify duration");
    op_status(st); tb_chk(!st[0], "program verify pass");
    op_program(RC, ic);
    op_read_check(RA, ia);

    op_open_check(RA, ia);
    op_search(RA, va[7], '1, bm, lat);
    tb_chk(bm == ref_search(va, va[7], '1), "full-size search, 3 matches");
    tb_chk(lat == 12, $sformatf("full-size search latency %0d", lat));
    op_search(RA, 64'd0, 64'hFFFF_0000_0000_0000, bm, lat);
    tb_chk(bm == ref_search(va, 64'd0, 64'hFFFF_0000_0000_0000), "full-size masked search");
    op_gather_check(RA, 64'h8000_0000_0000_0011, va, ia, "full-size gather of 3 chunks");
    op_open_check(RC, ic);
    op_search(RC, 64'd300, '1, bm, lat);
    tb_chk(bm == ref_search(vc, 64'd300, '1) && bm[100], "full-size search on die 1");
    repeat (5) @(negedge clk);
    tb_chk(n_ok == 2, "header checks ok");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
