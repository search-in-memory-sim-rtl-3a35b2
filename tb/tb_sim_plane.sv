// tb_sim_plane: self-checking testbench of one die/plane (row decoder, cell
// array, page buffers with their failed-bit counters, accumulator, spare
// latches and column decoder) at 16 slots per page, 2 blocks x 4 pages and
// short array times (read 6, program 9, erase 12 cycles). It drives the
// plane's control strobes directly, as the control logic would:
//   storage path  - data bytes into Latch 1, copy to Latch 2, program, read
//                   back through the column decoder (full page stream);
//   program verify- sense into Latch 4, XOR with Latch 2, count with FBC
//                   enabled: 0 failed bits after a clean program, and exactly
//                   popcount(new & ~old) after programming over old data;
//   search        - key written into Latch 4 one slot position per cycle (8
//                   cycles), XOR, masked count, capture: bitmap and failed-bit
//                   total compared with a reference;
//   gather / open - column decoder streams of chunks + parity and of the
//                   header + chunk 0, from Latch 2 and Latch 1.
// Array latencies are checked: done pulses T cycles after the strobe.
`timescale 1ns/1ps
module tb_sim_plane;
  import sim_pkg::*;
  localparam int M = 16, NC = 2, SP = 24 + 4*NC, PB = M*8, PI = PB + SP;
  localparam int COLW = $clog2(PI);
  localparam int TW = $clog2(M*64+1);
  localparam int TR = 6, TP = 9, TE = 12;

  logic clk = 0, rst_n = 0;
  row_addr_t row = 0;
  logic arr_read = 0, arr_prog = 0, arr_erase = 0, sense_to_l4 = 0;
  logic arr_busy, arr_done, row_valid;
  logic din_we = 0;
  logic [COLW-1:0] din_col = 0;
  logic [7:0] din_byte = 0;
  logic l1_to_l2 = 0;
  logic [7:0] l4_slot_we = 0;
  logic [NC-1:0][63:0] l4_word = '0;
  logic xor_en = 0, en_fbc = 0, acc_capture = 0;
  logic [63:0] mask = 0;
  logic [M-1:0] bitmap;
  logic [TW-1:0] failed_bits;
  logic cd_start_gather = 0, cd_start_open = 0, cd_start_page = 0, cd_src_l2 = 0;
  logic [63:0] cd_chunks = 0;
  logic cd_busy;
  logic [7:0] dout;
  logic dout_valid, dout_last;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  sim_plane #(.M(M), .BLK(2), .PGS(4), .T_READ(TR), .T_PROG(TP), .T_ERASE(TE)) dut (.*);

  byte unsigned img [PI], img2 [PI], got [$];
  always @(posedge clk) if (dout_valid) got.push_back(dout);

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  function automatic logic [63:0] slot(input byte unsigned b [PI], input int g);
    logic [63:0] w;
    for (int l = 0; l < 8; l++) w[(7-l)*8 +: 8] = b[g*8 + l];
    return w;
  endfunction

  // strobe one array operation and check its latency
  task automatic array_op(input int kind, input int t, input string what);
    int n = 0;
    case (kind) 0: arr_read = 1; 1: arr_prog = 1; default: arr_erase = 1; endcase
    @(negedge clk);
    arr_read = 0; arr_prog = 0; arr_erase = 0;
    chk(arr_busy, {what, " busy"});
    while (!arr_done && n < 1000) begin @(negedge clk); n++; end
    chk(n == t, $sformatf("%s latency %0d", what, n));
    @(negedge clk);
  endtask

  task automatic pulse(ref logic s);
    s = 1; @(negedge clk); s = 0;
  endtask

  task automatic write_l1(input byte unsigned b [PI]);
    for (int i = 0; i < PI; i++) begin
      din_we = 1; din_col = COLW'(i); din_byte = b[i];
      @(negedge clk);
    end
    din_we = 0;
  endtask

  // per-chunk pattern on the key, as the chip's randomizer gives each chunk
  // its own stream: chunk c's slots compare with key ^ pat(c)
  function automatic logic [63:0] pat(input int c);
    return 64'(c) * 64'h0123_4567_89AB_CDEF;
  endfunction

  task automatic load_key(input logic [63:0] key);
    for (int p = 0; p < 8; p++) begin
      l4_slot_we = 8'(1 << p);
      for (int c = 0; c < NC; c++) l4_word[c] = key ^ pat(c);
      @(negedge clk);
    end
    l4_slot_we = 0;
  endtask

  task automatic compare(input logic fbc, input logic [63:0] m);
    xor_en = 1; @(negedge clk); xor_en = 0;
    en_fbc = fbc; mask = m;
    acc_capture = 1; @(negedge clk); acc_capture = 0; en_fbc = 0;
  endtask

  task automatic stream(ref logic s, input logic src_l2, input logic [63:0] ch, input int n,
                        output byte unsigned q [$]);
    got.delete();
    cd_src_l2 = src_l2; cd_chunks = ch;
    s = 1; @(negedge clk); s = 0;
    while (cd_busy) @(negedge clk);
    @(negedge clk);
    q = got;
    chk(q.size() == n, $sformatf("stream length %0d vs %0d", q.size(), n));
  endtask

  initial begin : watchdog
    #1ms;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    byte unsigned q [$];
    int bad, fb;
    logic [M-1:0] exp;
    for (int i = 0; i < PI; i++) begin img[i] = 8'($urandom); img2[i] = 8'($urandom); end
    for (int g = 4; g < 8; g++) for (int l = 0; l < 8; l++) img[g*8 + l] = img[3*8 + l];
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    row = 16'h0082;                 // block 1, page 2
    chk(row_valid, "row valid");
    row = 16'h0105; #1;             // block 2 does not exist
    chk(!row_valid, "row out of range");
    row = 16'h0082;
    array_op(2, TE, "erase");
    // storage path: program and read back
    write_l1(img);
    pulse(l1_to_l2);
    array_op(1, TP, "program");
    // verify: sense into L4, XOR with L2, count all bits
    sense_to_l4 = 1; array_op(0, TR, "verify read"); sense_to_l4 = 0;
    compare(1, 64'd0);
    chk(failed_bits == 0 && bitmap == '1, "clean program verifies");
    array_op(0, TR, "read");
    stream(cd_start_page, 0, 0, PI, q);
    bad = 0; foreach (q[i]) if (q[i] != img[i]) bad++;
    chk(bad == 0, "page stream from latch 1");

    // search on the active page
    pulse(l1_to_l2);
    for (int k = 0; k < 6; k++) begin
      automatic logic [63:0] key = (k < 3) ? slot(img, 3 + k) : {$urandom, $urandom};
      automatic logic [63:0] m = (k == 0) ? '1 : (k == 5) ? 64'd0 : {$urandom, $urandom};
      load_key(key);
      compare(0, m);
      fb = 0;
      for (int g = 0; g < M; g++) begin
        exp[g] = ((slot(img, g) ^ key ^ pat(g / 8)) & m) == 0;
        fb += $countones((slot(img, g) ^ key ^ pat(g / 8)) & m);
      end
      chk(bitmap == exp, $sformatf("search %0d bitmap", k));
      chk(failed_bits == TW'(fb), $sformatf("search %0d failed bits", k));
    end
    chk(bitmap == '1, "fully masked search matches everything");
    // a key equal to a chunk-1 slot under chunk 1's pattern matches it
    load_key(slot(img, 9) ^ pat(1));
    compare(0, '1);
    chk(bitmap[9] && bitmap[8] == (slot(img, 8) == slot(img, 9)), "chunk-1 key word");

    // gather and open streams from latch 2
    stream(cd_start_gather, 1, 64'b10, 68, q);
    bad = 0;
    for (int i = 0; i < 64; i++) if (q[i] != img[64 + i]) bad++;
    for (int p = 0; p < 4; p++) if (q[64 + p] != img[PB + 28 + p]) bad++;
    chk(bad == 0, "gather chunk 1 + parity");
    stream(cd_start_open, 1, 0, 88, q);
    bad = 0;
    for (int i = 0; i < 24; i++) if (q[i] != img[PB + i]) bad++;
    for (int i = 0; i < 64; i++) if (q[24 + i] != img[i]) bad++;
    chk(bad == 0, "open stream: header + chunk 0");

    // programming over written data: NAND can only clear bits
    write_l1(img2);
    pulse(l1_to_l2);
    array_op(1, TP, "reprogram");
    sense_to_l4 = 1; array_op(0, TR, "verify read 2"); sense_to_l4 = 0;
    compare(1, 64'd0);
    fb = 0;
    for (int i = 0; i < PB; i++) fb += $countones(img2[i] & ~img[i]);
    chk(failed_bits == TW'(fb) && fb > 0, $sformatf("verify failed bits %0d vs %0d", failed_bits, fb));
    // latch 1 still holds img2 (verify sensed into L4)
    stream(cd_start_gather, 0, 64'b01, 68, q);
    bad = 0;
    for (int i = 0; i < 64; i++) if (q[i] != img2[i]) bad++;
    chk(bad == 0, "gather from latch 1");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
