// tb_sim_top: end-to-end self-checking testbench of the SiM chip with its
// controller-side header checker, at reduced size (32 slots per page, 2 dies,
// 4 blocks x 4 pages, short array times) so that every mechanism runs within
// seconds. Each mechanism is counted and the count is checked to be non-zero:
// erase, program + verify pass, program-verify failure (reprogramming a page
// can only clear bits), storage-mode page read, page open with its header +
// first chunk response, header check verdicts (ok, CRC failure -> full read,
// magic mismatch -> read retry, stale timestamp -> refresh), searches in a batch, the Fig. 9 style range
// query (upper bound AND NOT lower bound), the Fig. 4 style column query
// (user id | gender | country | job packed in a slot, only the gender byte
// compared), a search overlapping a background
// page open, a staged page taking over at page close, gathers from Latch 2,
// from Latch 1 and via an array fetch, a rejected search, search latency,
// searches on the second die and mode switching. Data is checked against an
// independent reference model (tb_sim_bus.svh).
// Timing check: first bitmap byte 12 cycles after the last search byte =
// 10 search cycles (8 key-fill, 1 XOR, 1 capture) + 1 command decode + 1
// bitmap load.
`timescale 1ns/1ps
module tb_sim_top;
  import sim_pkg::*;
  localparam int M = 32;
  localparam bit TB_RAND = 1'b1;
  localparam logic [63:0] TB_MAGIC = 64'h5349_4D5F_5041_4745;
  localparam int SEARCH_LAT = 12;

  logic clk = 0, rst_n = 0, cle = 0, ale = 0, we = 0;
  logic [7:0] dq_in = 0, dq_out;
  logic dq_valid, dq_last, rdy, match_mode;
  dkind_e dq_kind;
  logic [63:0] now = 64'd5000;
  logic oec_done, oec_ok, oec_full_read, oec_read_retry, oec_refresh;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  sim_top #(.NDIE(2), .M(M), .BLK(4), .PGS(4), .T_READ(20), .T_PROG(30), .T_ERASE(40),
            .RANDOMIZE(TB_RAND), .MAGIC(TB_MAGIC), .MAX_AGE(64'd1000)) dut (.*);

  `include "tb_sim_bus.svh"

  // verdict capture of the header checker
  logic [3:0] verdict [$];
  always @(posedge clk) if (rst_n && oec_done) verdict.push_back({oec_ok, oec_full_read, oec_read_retry, oec_refresh});

  // mechanism counters
  int n_erase = 0, n_prog = 0, n_vfail = 0, n_read = 0, n_open = 0, n_oec_ok = 0, n_oec_full = 0, n_oec_retry = 0, n_oec_refresh = 0, n_search = 0,
      n_range = 0, n_gender = 0, n_overlap = 0, n_handover = 0, n_g_l2 = 0, n_g_l1 = 0, n_g_arr = 0, n_reject = 0, n_lat = 0, n_die1 = 0, n_mode = 0;

  logic [63:0] va [], vb [], vc [], vs [], vg [];
  img_t ia, ib, ic, is, ibad, ig, imag;
  logic [7:0] st;
  logic [M-1:0] bm, bm_hi, bm_lo;
  int lat;
  byte unsigned q [$];

  localparam logic [15:0] RA = 16'h0001, RB = 16'h0082, RC = 16'h1003, RS = 16'h0003, RBAD = 16'h0002, RG = 16'h0083,
                          RMAG = 16'h1000;

  task automatic check_verdict(input logic [3:0] exp, input string what);
    int w = 0;
    while (verdict.size() == 0 && w < 100) begin @(negedge clk); w++; end
    tb_chk(verdict.size() > 0 && verdict[0] == exp, what);
    if (verdict.size() > 0) void'(verdict.pop_front());
  endtask

  task automatic search_check(input logic [15:0] r, input logic [63:0] v [], input logic [63:0] key,
                              input logic [63:0] mask, input string what);
    op_search(r, key, mask, bm, lat);
    tb_chk(bm == ref_search(v, key, mask), what);
    tb_chk(lat == SEARCH_LAT, $sformatf("%s latency %0d", what, lat));
    n_search++; n_lat++;
  endtask

  initial begin : watchdog
    #20ms;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    va = new[M]; vb = new[M]; vc = new[M]; vs = new[M]; vg = new[M];
    for (int s = 0; s < M; s++) begin
      va[s] = {$urandom, $urandom};
      vb[s] = {$urandom, $urandom};
      vc[s] = {$urandom, $urandom};
      vs[s] = 64'(500 + 97 * s);
      // {user id 32 | gender 8 | country 8 | job 8 | unused 8}, gender 2..9
      vg[s] = {$urandom, 8'(2 + s % 8), 8'($urandom), 8'($urandom), 8'h00};
    end
    va[3] = va[9]; va[20] = va[9];             // repeated keys -> multi-bit matches
    va[17] = va[9] ^ 64'hFF00_0000_0000_0000;  // matches only with the top byte masked
    // Fig. 9 salaries in slots 0..2
    vs[0] = 64'd800; vs[1] = 64'd4000; vs[2] = 64'd12000;
    make_image(RA, va, 64'd4900, ia);
    make_image(RB, vb, 64'd4950, ib);
    make_image(RC, vc, 64'd3000, ic);   // old: 2000 cycles > MAX_AGE
    make_image(RS, vs, 64'd4990, is);
    // the three records of the published column-query example
    vg[0] = {32'h3456, 8'h00, 8'h12, 8'h03, 8'h00};
    vg[1] = {32'h7890, 8'h01, 8'h32, 8'h07, 8'h00};
    vg[2] = {32'h1234, 8'h00, 8'h08, 8'h01, 8'h00};
    vg[13] = {32'h4242, 8'h01, 8'h01, 8'h01, 8'h00};
    make_image(RG, vg, 64'd4990, ig);
    make_image(RBAD, vb, 64'd4990, ibad);
    ibad[PB + 16] ^= 8'h40;                   // corrupt stored CRC
    // foreign magic number with a CRC that matches it -> read retry only
    make_image(RMAG, vb, 64'd4990, imag);
    begin
      automatic byte unsigned msg [$];
      automatic logic [63:0] crc;
      for (int i = 0; i < 16; i++) msg.push_back((i >= 8) ? (imag[PB + i] ^ 8'h5A) : imag[PB + i]);
      for (int b = 0; b < 64; b++) msg.push_back(imag[b]);
      crc = ref_crc(msg);
      for (int i = 8; i < 16; i++) imag[PB + i] ^= 8'h5A;
      for (int i = 0; i < 8; i++) imag[PB + 16 + i] = crc[(7-i)*8 +: 8];
    end

    repeat (4) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    op_status(st);
    tb_chk(st == 8'b1100_0000, "status after reset");

    // ---------------------------------------------------- storage mode
    op_erase(16'h0000); n_erase++;
    op_erase(16'h1000); n_erase++;
    op_erase(16'h0080); n_erase++;
    op_program(RA, ia); op_status(st); tb_chk(!st[0], "program A verify pass"); n_prog++;
    op_program(RB, ib); op_status(st); tb_chk(!st[0], "program B verify pass"); n_prog++;
    op_program(RC, ic); op_status(st); tb_chk(!st[0], "program C verify pass"); n_prog++;
    op_program(RS, is); op_status(st); tb_chk(!st[0], "program S verify pass"); n_prog++;
    op_program(RG, ig); op_status(st); tb_chk(!st[0], "program G verify pass"); n_prog++;
    op_program(RBAD, ibad); op_status(st); tb_chk(!st[0], "program BAD verify pass"); n_prog++;
    op_program(RMAG, imag); op_status(st); tb_chk(!st[0], "program MAG verify pass"); n_prog++;
    op_read_check(RA, ia); n_read++;
    op_read_check(RC, ic); n_read++;
    // unwritten page reads as erased
    begin
      automatic img_t ones;
      foreach (ones[i]) ones[i] = 8'hFF;
      op_read_check(16'h0000, ones); n_read++;
    end

    // ---------------------------------------------------- match mode
    op_open_check(RA, ia); n_open++;
    check_verdict(4'b1000, "header check ok"); n_oec_ok++;
    op_status(st);
    tb_chk(st[3] && st[5] && !st[4], "match mode, active page"); n_mode++;

    // batch of searches on the active page
    search_check(RA, va, va[9], '1, "search exact repeated key");
    search_check(RA, va, va[9], 64'h00FF_FFFF_FFFF_FFFF, "search masked top byte");
    search_check(RA, va, va[5], '1, "search single key");
    search_check(RA, va, 64'h0123_4567_89AB_CDEF, '1, "search absent key");
    search_check(RA, va, 64'd0, 64'd0, "search all-masked (all match)");
    for (int k = 0; k < 6; k++) begin
      automatic logic [63:0] key = va[$urandom_range(0, M-1)];
      search_check(RA, va, key, {$urandom, $urandom} | 64'hF, "search random mask");
    end

    // gather from Latch 2 (active page)
    op_gather_check(RA, 64'b1010, va, ia, "gather from latch 2"); n_g_l2++;

    // background open of S while searches continue on A
    bus_cmd(OP_PAGE_OPEN, RS);
    op_status(st); tb_chk(!st[6], "array busy during background open");
    search_check(RA, va, va[1], '1, "search overlapping page open");
    tb_chk(rx.size() == 0, "open response not yet sent during overlap");
    n_overlap++;
    bus_get(88, DK_OPEN, q);
    begin
      int bad = 0;
      foreach (q[i]) if (q[i] != ((i < 24) ? is[PB + i] : is[i - 24])) bad++;
      tb_chk(bad == 0 && q.size() == 88, "background open response");
    end
    n_open++;
    check_verdict(4'b1000, "header check ok (S)"); n_oec_ok++;
    op_status(st); tb_chk(st[5] && st[4], "S staged while A active");
    // gather from Latch 1 (staged page)
    op_gather_check(RS, 64'b0101, vs, is, "gather from latch 1"); n_g_l1++;
    // search on the staged page is rejected
    op_search_reject(RS, 64'd800, st);
    tb_chk(st[0], "search on staged page rejected"); n_reject++;
    // page close: S takes over Latch 2
    bus_cmd(OP_PAGE_CLOSE, RA);
    op_status(st); tb_chk(st[5] && !st[4] && !st[0], "staged page now active"); n_handover++;

    // Fig. 9 range query: 1000 <= salary < 8192 via two masked searches
    op_search(RS, 64'd0, ~64'd8191, bm_hi, lat);  // salary < 8192  -> upper bits zero
    op_search(RS, 64'd0, ~64'd1023, bm_lo, lat);  // salary < 1024
    tb_chk(bm_hi[2:0] == 3'b011, "range query upper bound (paper 110)");
    tb_chk(bm_lo[2:0] == 3'b001, "range query lower bound (paper 100)");
    tb_chk((bm_hi & ~bm_lo) == (ref_search(vs, 0, ~64'd8191) & ~ref_search(vs, 0, ~64'd1023)),
           "range query result vs reference");
    tb_chk((bm_hi[2:0] & ~bm_lo[2:0]) == 3'b010, "range query picks 4000 (paper 010)");
    n_range++; n_search += 2;

    // gather of a page that is not open: array fetch into Latch 1
    op_gather_check(RB, 64'b0011, vb, ib, "gather via array fetch"); n_g_arr++;
    search_check(RS, vs, 64'd12000, '1, "search after array-fetch gather");

    // second die: open C (stale), search, close
    op_open_check(RC, ic); n_open++;
    check_verdict(4'b0001, "header check refresh"); n_oec_refresh++;
    search_check(RC, vc, vc[7], '1, "search die 1"); n_die1++;
    search_check(RS, vs, vs[1], '1, "search die 0 while die 1 open");
    bus_cmd(OP_PAGE_CLOSE, RC);

    // corrupted header -> full read
    bus_cmd(OP_PAGE_CLOSE, RS);
    op_open_check(RBAD, ibad); n_open++;
    check_verdict(4'b0100, "header check CRC fail -> full read"); n_oec_full++;
    bus_cmd(OP_PAGE_CLOSE, RBAD);
    op_open_check(RMAG, imag); n_open++;
    check_verdict(4'b0010, "header check magic mismatch -> read retry"); n_oec_retry++;
    bus_cmd(OP_PAGE_CLOSE, RMAG);

    // column query: gender == 1, every other byte masked out
    op_open_check(RG, ig); n_open++;
    check_verdict(4'b1000, "header check ok (G)"); n_oec_ok++;
    op_search(RG, 64'h0000_0000_0100_0000, 64'h0000_0000_FF00_0000, bm, lat);
    tb_chk(bm == ref_search(vg, 64'h0000_0000_0100_0000, 64'h0000_0000_FF00_0000), "gender query vs reference");
    tb_chk(bm[2:0] == 3'b010 && bm[13], "gender query picks user 0x7890 (and 0x4242)");
    op_gather_check(RG, 64'b11, vg, ig, "gather the matching records' chunks"); n_g_l2++;
    n_gender++; n_search++;
    bus_cmd(OP_PAGE_CLOSE, RG);

    // back to storage mode: reprogramming A must fail verify
    begin
      automatic img_t ia2 = ia;
      ia2[0] = ~ia[0];
      op_program(RA, ia2);
      op_status(st);
      tb_chk(st[0] && !st[3], "reprogram fails verify (storage mode)"); n_vfail++; n_mode++;
    end
    op_read_check(RS, is); n_read++;

    repeat (10) @(negedge clk);
    tb_chk(rx.size() == 0, "no stray output");
    $display("MECH erase=%0d program=%0d verify_fail=%0d read=%0d open=%0d oec_ok=%0d oec_full_read=%0d oec_read_retry=%0d oec_refresh=%0d search=%0d range_query=%0d gender_query=%0d overlap=%0d handover=%0d gather_l2=%0d gather_l1=%0d gather_array=%0d reject=%0d latency=%0d die1=%0d mode_switch=%0d",
             n_erase, n_prog, n_vfail, n_read, n_open, n_oec_ok, n_oec_full, n_oec_retry, n_oec_refresh, n_search,
             n_range, n_gender, n_overlap, n_handover, n_g_l2, n_g_l1, n_g_arr, n_reject, n_lat, n_die1, n_mode);
    tb_chk(n_erase > 0 && n_prog > 0 && n_vfail > 0 && n_read > 0 && n_open > 0 && n_oec_ok > 0 &&
           n_oec_full > 0 && n_oec_retry > 0 && n_oec_refresh > 0 && n_search > 0 && n_range > 0 && n_gender > 0 && n_overlap > 0 &&
           n_handover > 0 && n_g_l2 > 0 && n_g_l1 > 0 && n_g_arr > 0 && n_reject > 0 && n_lat > 0 &&
           n_die1 > 0 && n_mode > 0, "every mechanism exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
