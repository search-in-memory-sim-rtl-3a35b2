// Self-checking testbench for sim_io_control with 16 slots (2 chunks).
// Sends SEARCH, GATHER, PAGE_OPEN and PROGRAM commands byte by byte and checks
// the decoded command, the forwarded program bytes, the status byte, the
// bitmap shifter's byte order and length, the pass-through of column-decoder
// bytes and that bytes are ignored while rdy is low.
module tb_sim_io_control;
  import sim_pkg::*;
  localparam int M = 16, NC = 2, SP = 24 + 4*NC, PIN = M*8 + SP;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cle, ale, we, dq_valid, dq_last, rdy, cmd_valid, din_start, din_valid;
  logic bm_start, bm_busy, cd_valid, cd_last;
  logic [7:0] dq_in, dq_out, din_byte, cd_byte;
  dkind_e dq_kind, cd_kind;
  status_t status;
  cmd_t cmd;
  row_addr_t cur_row;
  logic [M-1:0] bitmap;

  sim_io_control #(.M(M)) dut (.*);

  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int ncmd = 0, ndin = 0;
  cmd_t last_cmd;
  logic [7:0] din_seen [$];
  always @(posedge clk) begin
    if (cmd_valid) begin ncmd++; last_cmd <= cmd; end
    if (din_valid) din_seen.push_back(din_byte);
  end

  task automatic put(input logic c, input logic a, input logic [7:0] d);
    cle = c; ale = a; we = 1; dq_in = d;
    @(negedge clk); we = 0; cle = 0; ale = 0;
  endtask
  task automatic addr(input logic [15:0] r);
    put(0, 1, r[7:0]); put(0, 1, r[15:8]);
  endtask
  task automatic chk(input logic ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic [63:0] k, m;
  int n0;
  initial begin
    cle = 0; ale = 0; we = 0; dq_in = 0; rdy = 1; status = '0; bm_start = 0; bitmap = 0;
    cd_valid = 0; cd_last = 0; cd_byte = 0; cd_kind = DK_NONE;
    repeat (2) @(negedge clk); rst_n = 1;
    // SEARCH
    k = 64'h0123456789ABCDEF; m = 64'hFF00FF00FF00FF00;
    n0 = ncmd;
    put(1, 0, OP_SEARCH); addr(16'h1234);
    for (int i = 7; i >= 0; i--) put(0, 0, k[i*8 +: 8]);
    for (int i = 7; i >= 0; i--) put(0, 0, m[i*8 +: 8]);
    @(negedge clk);
    chk(ncmd == n0 + 1, "search: one cmd_valid");
    chk(last_cmd.op == OP_SEARCH && last_cmd.row == 16'h1234 && last_cmd.key == k && last_cmd.mask == m,
        "search fields");
    // GATHER
    put(1, 0, OP_GATHER); addr(16'h0042);
    for (int i = 0; i < 8; i++) put(0, 0, 8'(8'h11 * (i + 1)));
    @(negedge clk);
    chk(last_cmd.op == OP_GATHER && last_cmd.row == 16'h0042 && last_cmd.chunks == 64'h8877665544332211,
        "gather fields");
    // PAGE_OPEN completes after the address
    n0 = ncmd;
    put(1, 0, OP_PAGE_OPEN); addr(16'h0007);
    @(negedge clk);
    chk(ncmd == n0 + 1 && last_cmd.op == OP_PAGE_OPEN && last_cmd.row == 16'h0007, "page open");
    // bytes ignored while not ready
    rdy = 0; n0 = ncmd;
    put(1, 0, OP_PAGE_CLOSE); addr(16'h0001);
    @(negedge clk);
    chk(ncmd == n0, "ignored while busy");
    rdy = 1;
    // PROGRAM payload forwarded
    din_seen.delete(); n0 = ncmd;
    put(1, 0, OP_PROGRAM); addr(16'h0003);
    for (int i = 0; i < PIN; i++) begin
      chk(ncmd == n0, "program: no early cmd_valid");
      put(0, 0, 8'(i * 7));
    end
    @(negedge clk);
    chk(ncmd == n0 + 1 && last_cmd.op == OP_PROGRAM, "program cmd");
    chk(din_seen.size() == PIN, "program byte count");
    for (int i = 0; i < din_seen.size(); i++) chk(din_seen[i] == 8'(i * 7), "program byte value");
    // STATUS
    status = 8'hC5;
    cle = 1; we = 1; dq_in = OP_STATUS;
    @(negedge clk); we = 0; cle = 0;
    chk(dq_valid && dq_out == 8'hC5 && dq_kind == DK_STATUS && dq_last, "status byte");
    // bitmap shifter: 2 bytes, slot 8j+k in bit k of byte j
    bitmap = 16'hA55A; bm_start = 1;
    @(negedge clk); bm_start = 0;
    chk(dq_valid && dq_out == 8'h5A && dq_kind == DK_BITMAP && !dq_last && bm_busy, "bitmap byte 0");
    @(negedge clk);
    chk(dq_valid && dq_out == 8'hA5 && dq_last, "bitmap byte 1");
    @(negedge clk);
    chk(!dq_valid && !bm_busy, "bitmap end");
    // pass-through
    cd_valid = 1; cd_byte = 8'h3C; cd_last = 1; cd_kind = DK_CHUNK; #1;
    chk(dq_valid && dq_out == 8'h3C && dq_last && dq_kind == DK_CHUNK, "column decoder pass-through");
    cd_valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
