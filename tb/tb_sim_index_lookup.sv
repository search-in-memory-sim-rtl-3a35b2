// tb_sim_index_lookup: primary-index workload at full size (sim_top with its
// default parameters). A B+tree leaf of 512 entries is stored as two pages of
// die 0: a key page (512 sorted 8-byte keys) and a value page (the matching
// 8-byte values, same slot order). A lookup is one masked-free search on the
// key page and, if a bit is set, one gather of the value chunk that holds the
// answer. The value page is opened right after the key page; its array read
// overlaps a search, and the gathers then read it from Latch 1.
// Checks per lookup: the bitmap has exactly the expected bit (none for an
// absent key), the de-randomized gathered value is right, the first bitmap
// byte comes 12 cycles after the last search byte, and the bytes moved on the
// bus (64 bitmap + 68 chunk) are counted against the 8192 bytes of reading
// both pages. Also a batched lookup: 4 searches, merged bitmaps, one gather.
`timescale 1ns/1ps
module tb_sim_index_lookup;
  import sim_pkg::*;
  localparam int M = PAGE_SLOTS;
  localparam bit TB_RAND = 1'b1;
  localparam logic [63:0] TB_MAGIC = 64'h5349_4D5F_5041_4745;
  localparam int LOOKUPS = 40;

  logic clk = 0, rst_n = 0, cle = 0, ale = 0, we = 0;
  logic [7:0] dq_in = 0, dq_out;
  logic dq_valid, dq_last, rdy, match_mode;
  dkind_e dq_kind;
  logic [63:0] now = 64'd200000;
  logic oec_done, oec_ok, oec_full_read, oec_read_retry, oec_refresh;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  sim_top dut (.*);

  `include "tb_sim_bus.svh"

  localparam logic [15:0] RK = 16'h0200, RV = 16'h0201;   // block 4, pages 0 and 1
  logic [63:0] keys [], vals [];
  img_t ik, iv;
  logic [7:0] st;
  logic [M-1:0] bm, merged;
  int lat, n_ok = 0, bytes_out = 0, n_hit = 0, n_miss = 0;

  always @(posedge clk) if (rst_n && oec_done && oec_ok) n_ok++;
  always @(posedge clk) if (rst_n && dq_valid && (dq_kind == DK_BITMAP || dq_kind == DK_CHUNK)) bytes_out++;

  // gather one chunk and return slot `s` of it, de-randomized
  task automatic gather_slot(input int slot, output logic [63:0] v);
    byte unsigned q [$];
    logic [63:0] ch = 64'd1 << (slot / 8);
    bus_cmd(OP_GATHER, RV);
    for (int i = 0; i < 8; i++) bus_put(0, 0, ch[i*8 +: 8]);
    bus_get(68, DK_CHUNK, q);
    v = '0;
    for (int l = 0; l < 8 && q.size() == 68; l++) v[(7-l)*8 +: 8] = q[(slot % 8)*8 + l];
    v ^= ref_rand(RV, slot);
  endtask

  initial begin : watchdog
    #50ms;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    keys = new[M]; vals = new[M];
    keys[0] = 64'd1000;
    for (int s = 1; s < M; s++) keys[s] = keys[s-1] + 64'(1 + $urandom_range(0, 50));   // sorted, unique
    for (int s = 0; s < M; s++) vals[s] = {32'hA000_0000 | 32'(s), keys[s][31:0] ^ 32'h5A5A_5A5A};
    make_image(RK, keys, 64'd199000, ik);
    make_image(RV, vals, 64'd199000, iv);
    repeat (4) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    op_erase(16'h0200);
    op_program(RK, ik); op_status(st); tb_chk(!st[0], "key page programmed");
    op_program(RV, iv); op_status(st); tb_chk(!st[0], "value page programmed");

    op_open_check(RK, ik);
    bus_cmd(OP_PAGE_OPEN, RV);          // array read of the value page runs behind this search
    op_search(RK, keys[3], '1, bm, lat);
    tb_chk(bm == (M'(1) << 3) && lat == 12, "search while the value page is sensed");
    begin
      byte unsigned q [$];
      bus_get(88, DK_OPEN, q);          // value page response once its read ends
      tb_chk(q.size() == 88, "value page open response");
    end
    bytes_out = 0;
    for (int n = 0; n < LOOKUPS; n++) begin
      automatic int want = $urandom_range(0, M - 1);
      automatic bit miss = (n % 5 == 4);
      automatic logic [63:0] key = keys[want];
      automatic logic [63:0] v;
      if (miss) key = (want == 0) ? 64'd5 : keys[want] + 64'h1_0000_0000;  // not stored
      op_search(RK, key, '1, bm, lat);
      tb_chk(lat == 12, $sformatf("lookup %0d search latency %0d", n, lat));
      if (miss) begin
        tb_chk(bm == '0, $sformatf("lookup %0d: absent key, empty bitmap", n));
        n_miss++;
      end else begin
        tb_chk(bm == (M'(1) << want), $sformatf("lookup %0d: one bit at slot %0d", n, want));
        gather_slot(want, v);
        tb_chk(v == vals[want], $sformatf("lookup %0d: value", n));
        n_hit++;
      end
    end
    tb_chk(bytes_out == n_hit * (64 + 68) + n_miss * 64,
           $sformatf("bus bytes %0d for %0d hits, %0d misses", bytes_out, n_hit, n_miss));
    $display("lookup bytes on the bus: %0d per hit (reading both pages: %0d)", 64 + 68, 2 * PAGE_BYTES);

    // batched lookup: 4 keys, merged bitmap, one gather
    merged = '0;
    for (int k = 0; k < 4; k++) begin
      op_search(RK, keys[k * 100 + 7], '1, bm, lat);
      merged |= bm;
    end
    begin : batch
      automatic logic [63:0] ch = '0;
      for (int s = 0; s < M; s++) if (merged[s]) ch[s / 8] = 1'b1;
      tb_chk($countones(merged) == 4 && $countones(ch) == 4, "batched lookup bitmaps merged");
      op_gather_check(RV, ch, vals, iv, "batched gather of 4 value chunks");
    end
    repeat (5) @(negedge clk);
    tb_chk(n_ok == 2, "both pages passed the header check");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
