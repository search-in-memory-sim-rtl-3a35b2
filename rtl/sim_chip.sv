// sim_chip: the Search-in-Memory NAND flash chip.
//
// A standard SLC NAND die organisation extended for in-chip equality search:
// the I/O control receives commands on an 8-bit bus, the control logic
// sequences them, the deserializer replicates (and scrambles) a search key
// into Latch 4 of every page buffer, each die's page buffers XOR it with the
// active page in Latch 2, the failed-bit counters turn every 64-bit slot into
// one match bit, and the 512-bit match bitmap goes back over the bus. A gather
// command streams only the selected 64-byte chunks through the column decoder.
// The same chip keeps its storage-mode read, program (with failed-bit verify)
// and erase.
//
// Interface: bus signals as described in sim_io_control; `rdy` is the
// ready/busy pin (commands may be sent only while it is high); `match_mode`
// reflects the mode of the last command. All logic runs on one core clock
// (33 MHz in the published configuration). Die d is selected by row address
// bits [15:12] modulo NDIE.
//
// The block structure follows the published chip diagram; the bus protocol
// and the sequencing details are this implementation's choices.
module sim_chip
  import sim_pkg::*;
#(
  parameter int unsigned NDIE      = DIES,
  parameter int unsigned M         = PAGE_SLOTS,
  parameter int unsigned BLK       = BLOCKS,
  parameter int unsigned PGS       = PAGES_PER_BLOCK,
  parameter int unsigned T_READ    = T_READ_CYC,
  parameter int unsigned T_PROG    = T_PROG_CYC,
  parameter int unsigned T_ERASE   = T_ERASE_CYC,
  parameter bit          RANDOMIZE = 1'b1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       cle,
  input  logic       ale,
  input  logic       we,
  input  logic [7:0] dq_in,
  output logic [7:0] dq_out,
  output logic       dq_valid,
  output logic       dq_last,
  output dkind_e     dq_kind,
  output logic       rdy,
  output logic       match_mode
);

  localparam int unsigned NCHUNK = M / CHUNK_SLOTS;
  localparam int unsigned SPARE  = HDR_BYTES + PARITY_BYTES*NCHUNK;
  localparam int unsigned COLW   = $clog2(M*SLOT_BYTES + SPARE);
  localparam int unsigned TW     = $clog2(M*SLOT_BITS+1);
  localparam int unsigned DW     = (NDIE > 1) ? $clog2(NDIE) : 1;

  cmd_t       cmd;
  logic       cmd_valid;
  status_t    status;
  row_addr_t  cur_row;
  logic       din_start, din_valid;
  logic [7:0] din_byte;
  logic       bm_start, bm_busy;

  logic [NDIE-1:0] arr_busy, arr_done, row_valid, arr_read, arr_prog, arr_erase;
  logic [NDIE-1:0] sense_to_l4, l1_to_l2, xor_en, acc_capture, key_die;
  logic [NDIE-1:0] cd_start_gather, cd_start_open, cd_start_page, cd_busy;
  logic [NDIE-1:0] p_valid, p_last;
  logic [NDIE-1:0][7:0]   p_dout;
  logic [NDIE-1:0][M-1:0] p_bitmap;
  logic [NDIE-1:0][TW-1:0] p_failed;
  logic            en_fbc, key_load, key_done, key_busy, cd_src_l2;
  logic [SLOT_BITS-1:0] mask;
  logic [DW-1:0]   op_die;
  dkind_e          cd_kind;

  logic [CHUNK_SLOTS-1:0]           l4_slot_we;
  logic [NCHUNK-1:0][SLOT_BITS-1:0] l4_word;
  logic            pb_we;
  logic [COLW-1:0] pb_col;
  logic [7:0]      pb_byte;
  logic [7:0]      cd_byte;
  logic            cd_valid, cd_last;

  sim_io_control #(.M(M), .NCHUNK(NCHUNK), .SPARE(SPARE)) u_io (
    .clk(clk), .rst_n(rst_n), .cle(cle), .ale(ale), .we(we), .dq_in(dq_in),
    .dq_out(dq_out), .dq_valid(dq_valid), .dq_last(dq_last), .dq_kind(dq_kind),
    .rdy(rdy), .status(status), .cmd_valid(cmd_valid), .cmd(cmd), .cur_row(cur_row),
    .din_start(din_start), .din_valid(din_valid), .din_byte(din_byte),
    .bm_start(bm_start), .bitmap(p_bitmap[op_die]), .bm_busy(bm_busy),
    .cd_byte(cd_byte), .cd_valid(cd_valid), .cd_last(cd_last), .cd_kind(cd_kind));

  sim_control_logic #(.NDIE(NDIE), .TW(TW), .DW(DW)) u_ctl (
    .clk(clk), .rst_n(rst_n), .cmd_valid(cmd_valid), .cmd(cmd), .rdy(rdy),
    .status(status), .match_mode(match_mode), .op_die(op_die),
    .arr_busy(arr_busy), .arr_done(arr_done), .row_valid(row_valid),
    .arr_read(arr_read), .arr_prog(arr_prog), .arr_erase(arr_erase),
    .sense_to_l4(sense_to_l4), .l1_to_l2(l1_to_l2), .xor_en(xor_en),
    .en_fbc(en_fbc), .mask(mask), .acc_capture(acc_capture),
    .failed_bits(p_failed[op_die]),
    .key_load(key_load), .key_die(key_die), .key_done(key_done),
    .cd_start_gather(cd_start_gather), .cd_start_open(cd_start_open),
    .cd_start_page(cd_start_page), .cd_src_l2(cd_src_l2), .cd_busy(cd_busy),
    .cd_kind(cd_kind), .bm_start(bm_start), .bm_busy(bm_busy));

  sim_deserializer #(.M(M), .NCHUNK(NCHUNK), .SPARE(SPARE), .COLW(COLW),
                     .RANDOMIZE(RANDOMIZE)) u_des (
    .clk(clk), .rst_n(rst_n), .key_load(key_load), .key(cmd.key), .row(cmd.row),
    .l4_slot_we(l4_slot_we), .l4_word(l4_word), .key_busy(key_busy), .key_done(key_done),
    .din_start(din_start), .din_valid(din_valid), .din_byte(din_byte),
    .pb_we(pb_we), .pb_col(pb_col), .pb_byte(pb_byte));

  logic [DW-1:0] din_die;
  assign din_die = DW'(32'(cur_row[15:12]) % NDIE);

  for (genvar d = 0; d < NDIE; d++) begin : g_die
    sim_plane #(.M(M), .NCHUNK(NCHUNK), .SPARE(SPARE), .BLK(BLK), .PGS(PGS),
                .T_READ(T_READ), .T_PROG(T_PROG), .T_ERASE(T_ERASE),
                .COLW(COLW), .TW(TW)) u_plane (
      .clk(clk), .rst_n(rst_n), .row(cmd.row),
      .arr_read(arr_read[d]), .arr_prog(arr_prog[d]), .arr_erase(arr_erase[d]),
      .sense_to_l4(sense_to_l4[d]), .arr_busy(arr_busy[d]), .arr_done(arr_done[d]),
      .row_valid(row_valid[d]),
      .din_we(pb_we && din_die == DW'(d)), .din_col(pb_col), .din_byte(pb_byte),
      .l1_to_l2(l1_to_l2[d]),
      .l4_slot_we(key_die[d] ? l4_slot_we : '0), .l4_word(l4_word),
      .xor_en(xor_en[d]), .en_fbc(en_fbc), .mask(mask), .acc_capture(acc_capture[d]),
      .bitmap(p_bitmap[d]), .failed_bits(p_failed[d]),
      .cd_start_gather(cd_start_gather[d]), .cd_start_open(cd_start_open[d]),
      .cd_start_page(cd_start_page[d]), .cd_src_l2(cd_src_l2), .cd_chunks(cmd.chunks),
      .cd_busy(cd_busy[d]), .dout(p_dout[d]), .dout_valid(p_valid[d]), .dout_last(p_last[d]));
  end

  // At most one column decoder streams at a time.
  always_comb begin
    cd_byte  = '0;
    cd_valid = 1'b0;
    cd_last  = 1'b0;
    for (int d = 0; d < NDIE; d++)
      if (p_valid[d]) begin
        cd_byte  = p_dout[d];
        cd_valid = 1'b1;
        cd_last  = p_last[d];
      end
  end

  a_one_stream: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(p_valid));

endmodule
