// tb_sim_control_logic: self-checking testbench of the command sequencer with
// two dies replaced by behavioural stand-ins (array busy for 5 cycles then a
// done pulse; column decoder busy 6 cycles per stream; bitmap shifter busy 4
// cycles; deserializer raises key_done 9 cycles after key_load, i.e. in the
// cycle after its 8th Latch 4 write). Every strobe is time-stamped by the
// clock edge that samples it and the sequences are checked cycle by cycle:
//   search      key_load at the command edge c, xor_en at c+9, acc_capture
//               with the search mask at c+10 (10 search cycles), bm_start c+11;
//   page open   array read at c, Latch1->Latch2 move and DK_OPEN stream after
//               done when no page is active; otherwise the page is staged and
//               moved at page close; searches overlap the background read;
//   gather      from Latch 2 (active), Latch 1 (staged) or after an array read;
//   program     L1->L2 at c, program at c+1, verify read into Latch 4, XOR,
//               capture with Enable FBC; fail iff failed bits > limit;
//   erase/read  array op, then (read) full page stream;
//   rejects     search on a non-active page, array op on an invalid row.
`timescale 1ns/1ps
module tb_sim_control_logic;
  import sim_pkg::*;
  localparam int ND = 2, TW = 11, TA = 5;

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0;
  cmd_t cmd = '0;
  logic rdy, match_mode;
  status_t status;
  logic [0:0] op_die;
  logic [ND-1:0] arr_busy, arr_done, row_valid = '1;
  logic [ND-1:0] arr_read, arr_prog, arr_erase, sense_to_l4, l1_to_l2, xor_en, acc_capture;
  logic en_fbc;
  logic [63:0] mask;
  logic [TW-1:0] failed_bits = 0;
  logic key_load, key_done;
  logic [ND-1:0] key_die;
  logic [ND-1:0] cd_start_gather, cd_start_open, cd_start_page, cd_busy;
  logic cd_src_l2;
  dkind_e cd_kind;
  logic bm_start, bm_busy;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  sim_control_logic #(.NDIE(ND), .TW(TW), .FAIL_LIMIT(0)) dut (.*);

  // ---------------------------------------------------------- stand-ins
  int acnt [ND], ccnt [ND], bcnt, kcnt;
  always_ff @(posedge clk) begin
    for (int d = 0; d < ND; d++) begin
      if (arr_read[d] || arr_prog[d] || arr_erase[d]) acnt[d] <= TA;
      else if (acnt[d] > 0) acnt[d] <= acnt[d] - 1;
      if (cd_start_gather[d] || cd_start_open[d] || cd_start_page[d]) ccnt[d] <= 6;
      else if (ccnt[d] > 0) ccnt[d] <= ccnt[d] - 1;
    end
    if (bm_start) bcnt <= 4; else if (bcnt > 0) bcnt <= bcnt - 1;
    if (key_load) kcnt <= 9; else if (kcnt > 0) kcnt <= kcnt - 1;
  end
  always_comb for (int d = 0; d < ND; d++) begin
    arr_busy[d] = acnt[d] != 0;
    arr_done[d] = acnt[d] == 1;
    cd_busy[d]  = ccnt[d] != 0;
  end
  assign bm_busy  = bcnt != 0;
  assign key_done = kcnt == 1;

  // ---------------------------------------------------------- event stamps
  int cyc = 0;
  int t_kl, t_xor, t_cap, t_bm, t_prog, t_erase, t_page, t_vread;
  int t_rd [ND], t_l12 [ND], t_open [ND], t_gat [ND];
  logic cap_fbc, g_src;
  logic [63:0] cap_mask;
  dkind_e open_kind;
  always @(posedge clk) begin
    cyc++;
    if (key_load) t_kl = cyc;
    if (|xor_en) t_xor = cyc;
    if (|acc_capture) begin t_cap = cyc; cap_fbc = en_fbc; cap_mask = mask; end
    if (bm_start) t_bm = cyc;
    if (|arr_prog) t_prog = cyc;
    if (|arr_erase) t_erase = cyc;
    if (|cd_start_page) t_page = cyc;
    for (int d = 0; d < ND; d++) begin
      if (arr_read[d]) begin t_rd[d] = cyc; if (sense_to_l4[d]) t_vread = cyc; end
      if (l1_to_l2[d]) t_l12[d] = cyc;
      if (cd_start_open[d]) t_open[d] = cyc;
      if (cd_start_gather[d]) t_gat[d] = cyc;
      if (cd_start_gather[d] || cd_start_open[d]) g_pend = 1;
    end
  end
  // sense_to_l4 is registered: stamp verify reads by the state seen next cycle
  always @(posedge clk) if (|(sense_to_l4 & arr_busy) && t_vread == 0) t_vread = cyc;
  // the source select is registered with the command and is read by the
  // column decoder from the cycle after its start strobe
  logic g_pend = 0;
  always @(negedge clk) if (g_pend) begin g_src = cd_src_l2; open_kind = cd_kind; g_pend = 0; end

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", what, cyc); end
  endtask

  // issue a command; returns the stamp of the edge that samples it
  task automatic issue(input opcode_e op, input logic [15:0] r, input logic [63:0] key,
                       input logic [63:0] m, input logic [63:0] ch, output int c);
    while (!rdy) @(negedge clk);
    cmd_valid = 1; cmd.op = op; cmd.row = r; cmd.key = key; cmd.mask = m; cmd.chunks = ch;
    @(negedge clk);
    c = cyc;
    cmd_valid = 0;
  endtask

  // wait until the sequencer and all stand-ins have been quiet for 3 cycles
  task automatic idle();
    int quiet = 0;
    while (quiet < 3) begin
      @(negedge clk);
      if (rdy && !(|arr_busy) && !(|cd_busy) && !bm_busy && kcnt == 0) quiet++;
      else quiet = 0;
    end
  endtask

  task automatic check_search(input int c, input logic [63:0] m, input string what);
    chk(t_kl == c, {what, ": key_load at command edge"});
    chk(t_xor == c + 9, $sformatf("%s: xor at +%0d", what, t_xor - c));
    chk(t_cap == c + 10 && !cap_fbc && cap_mask == m, $sformatf("%s: capture at +%0d", what, t_cap - c));
    chk(t_bm == c + 11, $sformatf("%s: bitmap start at +%0d", what, t_bm - c));
  endtask

  initial begin : watchdog
    #200us;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int c, c2;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(rdy && status == 8'hC0, "idle after reset");

    // page open with nothing active: read, move, response
    issue(OP_PAGE_OPEN, 16'h0001, 0, 0, 0, c);
    chk(t_rd[0] == c, "open: array read at command edge");
    #1;
    chk(rdy && !status.ardy, $sformatf("chip ready while the array reads (rdy %b st %h)", rdy, status));
    idle();
    chk(t_l12[0] == c + TA + 1, $sformatf("open: move to latch 2 at +%0d", t_l12[0] - c));
    chk(t_open[0] == c + TA + 2 && open_kind == DK_OPEN, $sformatf("open: response at +%0d kind %0d", t_open[0] - c, open_kind));
    chk(status.active && !status.staged && status.match_mode, "open: page active");

    // search on the active page
    issue(OP_SEARCH, 16'h0001, 64'h55, 64'hF0F0, 0, c);
    idle();
    check_search(c, 64'hF0F0, "search");
    // rejected search
    t_kl = 0;
    issue(OP_SEARCH, 16'h0002, 64'h55, '1, 0, c);
    idle();
    chk(t_kl == 0 && status.fail, "search on non-active page rejected");

    // background open of 0x0002 overlapped by a search on 0x0001
    issue(OP_PAGE_OPEN, 16'h0002, 0, 0, 0, c);
    issue(OP_SEARCH, 16'h0001, 64'h1, 64'hFF, 0, c2);
    chk(c2 < c + TA, "search issued during the background read");
    idle();
    check_search(c2, 64'hFF, "overlapped search");
    chk(t_rd[0] == c && t_l12[0] < c, "open while active: no move");
    chk(t_open[0] > c + TA, "open while active: response sent");
    chk(status.active && status.staged, "open while active: staged");

    // gathers: staged page from latch 1, active page from latch 2
    issue(OP_GATHER, 16'h0002, 0, 0, 64'h3, c); idle();
    chk(t_gat[0] == c && !g_src, "gather from latch 1");
    issue(OP_GATHER, 16'h0001, 0, 0, 64'h3, c); idle();
    chk(t_gat[0] == c && g_src, "gather from latch 2");
    // page close hands latch 2 to the staged page
    issue(OP_PAGE_CLOSE, 16'h0001, 0, 0, 0, c); idle();
    chk(t_l12[0] == c && status.active && !status.staged, "page close hand-over");
    issue(OP_SEARCH, 16'h0002, 64'h2, '1, 0, c); idle();
    check_search(c, '1, "search after hand-over");
    // gather on die 1, page not open: read then stream from latch 1
    issue(OP_GATHER, 16'h1005, 0, 0, 64'h1, c); idle();
    chk(t_rd[1] == c && t_gat[1] == c + TA + 1 && !g_src, "gather via array read on die 1");
    chk(!status.rdy || status.ardy, "status consistent");

    // program with verify: pass, then fail
    failed_bits = 0;
    issue(OP_PROGRAM, 16'h0003, 0, 0, 0, c);
    chk(!rdy, "program blocks the bus");
    idle();
    chk(t_l12[0] == c && t_prog == c + 1, "program: copy then program strobe");
    chk(t_rd[0] == c + 1 + TA + 1, $sformatf("program: verify read at +%0d", t_rd[0] - c));
    chk(t_xor == t_rd[0] + TA + 1 && t_cap == t_xor + 1 && cap_fbc, "program: verify compare with FBC");
    chk(!status.fail && !status.match_mode && !status.active, "program passes verify");
    failed_bits = 3;
    issue(OP_PROGRAM, 16'h0003, 0, 0, 0, c); idle();
    chk(status.fail, "program with failed bits reports fail");
    failed_bits = 0;

    // erase and read
    issue(OP_ERASE, 16'h0080, 0, 0, 0, c);
    chk(!rdy, "erase blocks the bus");
    idle();
    chk(t_erase == c && !status.fail, "erase strobe");
    issue(OP_READ, 16'h0004, 0, 0, 0, c); idle();
    chk(t_rd[0] == c && t_page == c + TA + 1, "read then page stream");
    row_valid = 2'b10;
    t_rd[0] = 0;
    issue(OP_READ, 16'h0FFF, 0, 0, 0, c); idle();
    chk(t_rd[0] == 0 && status.fail, "read of invalid row rejected");
    row_valid = '1;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
