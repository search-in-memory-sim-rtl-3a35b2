// Shared bus driver and reference model for the chip-level testbenches.
// Included inside a testbench module that declares: clk, cle, ale, we, dq_in,
// rdy, dq_out, dq_valid, dq_last, dq_kind, checks, failures, and the
// localparams M (slots per page), TB_RAND (scrambling on) and TB_MAGIC.
//
// Page images are built here from plain 64-bit slot values: data bytes are
// scrambled with an independent model of the chip's data randomizer, the
// header holds timestamp, magic and a CRC-64/ECMA-182 over timestamp, magic
// and the stored first chunk, and each chunk gets a 4-byte parity (here a
// simple byte sum; the chip only stores and returns it).

localparam int NC = M / 8;
localparam int SP = 24 + 4*NC;
localparam int PB = M * 8;
localparam int PI = PB + SP;

typedef byte unsigned img_t [PI];

byte unsigned rx [$];       // bytes returned by the chip
dkind_e       rx_kind [$];
int           cyc = 0;

always @(posedge clk) begin
  cyc++;
  if (rst_n && dq_valid) begin rx.push_back(dq_out); rx_kind.push_back(dq_kind); end
end

function automatic logic [63:0] ref_step(input logic [63:0] v);
  logic [63:0] a;
  a = v ^ {v[50:0], 13'd0};
  a = a ^ {7'd0, a[63:7]};
  a = a ^ {a[46:0], 17'd0};
  return a;
endfunction

// Scrambler word of slot s (0..M-1) of the page at row r.
function automatic logic [63:0] ref_rand(input logic [15:0] r, input int s);
  logic [63:0] v;
  if (!TB_RAND) return 64'd0;
  v = 64'h9E3779B97F4A7C15 ^ (64'(r) << 10) ^ (64'(s / 8) << 4) ^ 64'hB;
  for (int i = 0; i <= s % 8; i++) v = ref_step(v);
  return v;
endfunction

function automatic logic [63:0] ref_crc(input byte unsigned msg [$]);
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

// Stored image of a page holding plain slot values `v`.
function automatic void make_image(input logic [15:0] r, input logic [63:0] v [],
                                   input logic [63:0] ts, output img_t img);
  logic [63:0] w, crc;
  byte unsigned msg [$];
  for (int s = 0; s < M; s++) begin
    w = v[s] ^ ref_rand(r, s);
    for (int l = 0; l < 8; l++) img[s*8 + l] = w[(7-l)*8 +: 8];
  end
  for (int i = 7; i >= 0; i--) msg.push_back(ts[i*8 +: 8]);
  for (int i = 7; i >= 0; i--) msg.push_back(TB_MAGIC[i*8 +: 8]);
  for (int b = 0; b < 64; b++) msg.push_back(img[b]);
  crc = ref_crc(msg);
  for (int i = 0; i < 8; i++) begin
    img[PB + i]      = ts[(7-i)*8 +: 8];
    img[PB + 8 + i]  = TB_MAGIC[(7-i)*8 +: 8];
    img[PB + 16 + i] = crc[(7-i)*8 +: 8];
  end
  for (int c = 0; c < NC; c++) begin
    byte unsigned sum = 0;
    for (int b = 0; b < 64; b++) sum += img[c*64 + b];
    for (int p = 0; p < 4; p++) img[PB + 24 + c*4 + p] = 8'(sum + p);
  end
endfunction

function automatic logic [M-1:0] ref_search(input logic [63:0] v [], input logic [63:0] key,
                                            input logic [63:0] mask);
  logic [M-1:0] bm;
  for (int s = 0; s < M; s++) bm[s] = (((v[s] ^ key) & mask) == 64'd0);
  return bm;
endfunction

task automatic tb_chk(input logic ok, input string what);
  checks++;
  if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", what, cyc); end
endtask

// One bus byte; waits until the chip is ready, drives it for one cycle.
task automatic bus_put(input logic c, input logic a, input logic [7:0] d);
  while (!rdy) @(negedge clk);
  cle = c; ale = a; dq_in = d; we = 1;
  @(negedge clk);
  cle = 0; ale = 0; we = 0;
endtask

task automatic bus_cmd(input opcode_e op, input logic [15:0] r);
  bus_put(1, 0, op);
  bus_put(0, 1, r[7:0]);
  bus_put(0, 1, r[15:8]);
endtask

// Wait until n bytes have arrived (or a cycle limit), then take them.
task automatic bus_get(input int n, input dkind_e kind, output byte unsigned q [$]);
  int waited = 0;
  while (rx.size() < n && waited < 400000) begin @(negedge clk); waited++; end
  q.delete();
  tb_chk(rx.size() >= n, $sformatf("response of %0d bytes arrived", n));
  for (int i = 0; i < n && rx.size() > 0; i++) begin
    tb_chk(rx_kind[0] == kind, "response kind");
    q.push_back(rx.pop_front());
    void'(rx_kind.pop_front());
  end
endtask

task automatic wait_rdy();
  @(negedge clk);
  while (!rdy) @(negedge clk);
endtask

task automatic op_status(output logic [7:0] st);
  byte unsigned q [$];
  bus_put(1, 0, OP_STATUS);
  bus_get(1, DK_STATUS, q);
  st = (q.size() > 0) ? q[0] : 8'h00;
endtask

task automatic op_erase(input logic [15:0] r);
  bus_cmd(OP_ERASE, r);
  wait_rdy();
endtask

task automatic op_program(input logic [15:0] r, input img_t img);
  bus_cmd(OP_PROGRAM, r);
  for (int i = 0; i < PI; i++) bus_put(0, 0, img[i]);
  wait_rdy();
endtask

task automatic op_read_check(input logic [15:0] r, input img_t img);
  byte unsigned q [$];
  int bad = 0;
  bus_cmd(OP_READ, r);
  bus_get(PI, DK_PAGE, q);
  for (int i = 0; i < q.size(); i++) if (q[i] != img[i]) bad++;
  tb_chk(bad == 0 && q.size() == PI, "storage-mode page read");
endtask

// Search; returns the bitmap and the latency: clock edges from the edge that
// takes the last mask byte to the edge after which the first bitmap byte is on
// the bus (the capture block samples it one edge later, hence the -1).
task automatic op_search(input logic [15:0] r, input logic [63:0] key, input logic [63:0] mask,
                         output logic [M-1:0] bm, output int lat);
  byte unsigned q [$];
  int t0;
  bus_cmd(OP_SEARCH, r);
  for (int i = 7; i >= 0; i--) bus_put(0, 0, key[i*8 +: 8]);
  for (int i = 7; i > 0; i--) bus_put(0, 0, mask[i*8 +: 8]);
  while (!rdy) @(negedge clk);
  cle = 0; ale = 0; dq_in = mask[7:0]; we = 1;
  @(negedge clk); we = 0;
  t0 = cyc;
  while (rx.size() == 0 && cyc - t0 < 1000) @(negedge clk);
  lat = cyc - t0 - 1;
  bus_get(M / 8, DK_BITMAP, q);
  bm = '0;
  for (int j = 0; j < q.size(); j++) bm[j*8 +: 8] = q[j];
endtask

// Search that the chip must reject: no bitmap comes back, fail bit is set.
task automatic op_search_reject(input logic [15:0] r, input logic [63:0] key, output logic [7:0] st);
  bus_cmd(OP_SEARCH, r);
  for (int i = 7; i >= 0; i--) bus_put(0, 0, key[i*8 +: 8]);
  for (int i = 7; i >= 0; i--) bus_put(0, 0, 8'hFF);
  repeat (40) @(negedge clk);
  tb_chk(rx.size() == 0, "rejected search returns no bitmap");
  op_status(st);
endtask

// Gather: checks the returned chunks (de-scrambled) and their parity.
task automatic op_gather_check(input logic [15:0] r, input logic [63:0] chunks,
                               input logic [63:0] v [], input img_t img, input string what);
  byte unsigned q [$];
  int n = 0, bad = 0, k = 0;
  logic [63:0] w;
  for (int c = 0; c < NC; c++) if (chunks[c]) n++;
  bus_cmd(OP_GATHER, r);
  for (int i = 0; i < 8; i++) bus_put(0, 0, chunks[i*8 +: 8]);
  bus_get(n * 68, DK_CHUNK, q);
  for (int c = 0; c < NC && q.size() == n*68; c++) if (chunks[c]) begin
    for (int s = 0; s < 8; s++) begin
      for (int l = 0; l < 8; l++) w[(7-l)*8 +: 8] = q[k*68 + s*8 + l];
      if ((w ^ ref_rand(r, c*8 + s)) != v[c*8 + s]) bad++;
    end
    for (int p = 0; p < 4; p++) if (q[k*68 + 64 + p] != img[PB + 24 + c*4 + p]) bad++;
    k++;
  end
  tb_chk(bad == 0 && q.size() == n*68, what);
endtask

// Page open: returns after the header + chunk 0 response and checks it.
task automatic op_open_check(input logic [15:0] r, input img_t img);
  byte unsigned q [$];
  int bad = 0;
  bus_cmd(OP_PAGE_OPEN, r);
  bus_get(88, DK_OPEN, q);
  for (int i = 0; i < q.size(); i++)
    if (q[i] != ((i < 24) ? img[PB + i] : img[i - 24])) bad++;
  tb_chk(bad == 0 && q.size() == 88, "page-open response");
endtask
