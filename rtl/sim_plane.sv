// sim_plane: one die (single plane) of the SiM chip.
//
// It holds the cell array with its row decoder, one page-buffer group and one
// failed-bit counter per 8-byte slot (M groups of 64 bitlines), the failed-bit
// accumulator that turns the M counter outputs into the match bitmap, the
// spare-area latches, and the column decoder that streams bytes out. The
// control logic drives it with one-cycle strobes:
//   arr_read/arr_prog/arr_erase  start an array operation on `row`;
//                                 a finished read lands in Latch 1, or in
//                                 Latch 4 when `sense_to_l4` is held (verify);
//   din_we/din_col/din_byte       write one bus byte into Latch 1 (columns at
//                                 and above M*8 address the spare area);
//   l1_to_l2                      activate the staged page;
//   l4_slot_we/l4_word            deserializer writes into Latch 4;
//   xor_en                        Latch 3 <= Latch 2 ^ Latch 4;
//   en_fbc, mask                  FBC switch gate inputs (OR per bitline);
//   acc_capture                   latch bitmap and failed-bit total;
//   cd_start_*                    start a column-decoder transfer from
//                                 Latch 1 (cd_src_l2 = 0) or Latch 2.
// Programming writes Latch 2 (data and spare) into the array.
//
// The structure follows the published chip diagram; the spare latches, which
// have no match groups and are not verified after a program, are this
// implementation's own addition to hold the verification header and parity.
module sim_plane
  import sim_pkg::*;
#(
  parameter int unsigned M       = PAGE_SLOTS,
  parameter int unsigned NCHUNK  = M / CHUNK_SLOTS,
  parameter int unsigned SPARE   = HDR_BYTES + PARITY_BYTES*NCHUNK,
  parameter int unsigned BLK     = BLOCKS,
  parameter int unsigned PGS     = PAGES_PER_BLOCK,
  parameter int unsigned T_READ  = T_READ_CYC,
  parameter int unsigned T_PROG  = T_PROG_CYC,
  parameter int unsigned T_ERASE = T_ERASE_CYC,
  parameter int unsigned COLW    = $clog2(M*SLOT_BYTES + SPARE),
  parameter int unsigned CW      = $clog2(SLOT_BITS+1),
  parameter int unsigned TW      = $clog2(M*SLOT_BITS+1)
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  row_addr_t                        row,
  input  logic                             arr_read,
  input  logic                             arr_prog,
  input  logic                             arr_erase,
  input  logic                             sense_to_l4,
  output logic                             arr_busy,
  output logic                             arr_done,
  output logic                             row_valid,
  input  logic                             din_we,
  input  logic [COLW-1:0]                  din_col,
  input  logic [7:0]                       din_byte,
  input  logic                             l1_to_l2,
  input  logic [CHUNK_SLOTS-1:0]           l4_slot_we,
  input  logic [NCHUNK-1:0][SLOT_BITS-1:0] l4_word,
  input  logic                             xor_en,
  input  logic                             en_fbc,
  input  logic [SLOT_BITS-1:0]             mask,
  input  logic                             acc_capture,
  output logic [M-1:0]                     bitmap,
  output logic [TW-1:0]                    failed_bits,
  input  logic                             cd_start_gather,
  input  logic                             cd_start_open,
  input  logic                             cd_start_page,
  input  logic                             cd_src_l2,
  input  logic [63:0]                      cd_chunks,
  output logic                             cd_busy,
  output logic [7:0]                       dout,
  output logic                             dout_valid,
  output logic                             dout_last
);

  localparam int unsigned PB     = M * SLOT_BYTES;
  localparam int unsigned PAGE_W = (PB + SPARE) * 8;

  logic [BLK-1:0]    blk_sel;
  logic [PGS-1:0]    wl_sel;
  logic [PAGE_W-1:0] sense_data, prog_data;
  logic              sense_valid;

  logic [M-1:0][SLOT_BITS-1:0] l1_q, l2_q, sw;
  logic [M-1:0][CW-1:0]        cnt;
  logic [M-1:0]                mism;
  logic [SPARE-1:0][7:0]       sp_l1, sp_l2;

  sim_row_decoder #(.BLK(BLK), .PGS(PGS)) u_row (
    .row(row), .blk_sel(blk_sel), .wl_sel(wl_sel), .valid(row_valid));

  sim_cell_array #(.PAGE_W(PAGE_W), .BLK(BLK), .PGS(PGS),
                   .T_READ(T_READ), .T_PROG(T_PROG), .T_ERASE(T_ERASE)) u_array (
    .clk(clk), .rst_n(rst_n), .blk_sel(blk_sel), .wl_sel(wl_sel),
    .read(arr_read), .prog(arr_prog), .erase(arr_erase), .prog_data(prog_data),
    .sense_data(sense_data), .sense_valid(sense_valid), .busy(arr_busy), .done(arr_done));

  assign prog_data = {sp_l2, l2_q};

  for (genvar g = 0; g < M; g++) begin : g_grp
    logic pb_din_we;
    assign pb_din_we = din_we && (din_col < COLW'(PB)) && (din_col / COLW'(SLOT_BYTES) == COLW'(g));

    sim_page_buffer #(.W(SLOT_BITS)) u_pb (
      .clk(clk), .rst_n(rst_n),
      .sense_to_l1(sense_valid && !sense_to_l4),
      .sense_to_l4(sense_valid &&  sense_to_l4),
      .sense_data(sense_data[g*SLOT_BITS +: SLOT_BITS]),
      .din_we(pb_din_we), .din_lane(din_col[2:0]), .din_byte(din_byte),
      .l1_to_l2(l1_to_l2),
      .l4_we(l4_slot_we[g % CHUNK_SLOTS]), .l4_data(l4_word[g / CHUNK_SLOTS]),
      .xor_en(xor_en), .en_fbc(en_fbc), .mask(mask),
      .l1_q(l1_q[g]), .l2_q(l2_q[g]), .fbc_sw(sw[g]));

    sim_fbc_counter #(.W(SLOT_BITS)) u_cnt (
      .sw(sw[g]), .count(cnt[g]), .mismatch(mism[g]));
  end

  sim_failed_bit_accumulator #(.M(M), .CW(CW), .TW(TW)) u_acc (
    .clk(clk), .rst_n(rst_n), .capture(acc_capture), .mismatch(mism), .count(cnt),
    .bitmap(bitmap), .failed_bits(failed_bits));

  // Spare-area latches (stage and active copies).
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sp_l1 <= '0;
      sp_l2 <= '0;
    end else begin
      if (sense_valid && !sense_to_l4)
        sp_l1 <= sense_data[PB*8 +: SPARE*8];
      else if (din_we && din_col >= COLW'(PB))
        sp_l1[din_col - COLW'(PB)] <= din_byte;
      if (l1_to_l2)
        sp_l2 <= sp_l1;
    end
  end

  sim_column_decoder #(.M(M), .NCHUNK(NCHUNK), .SPARE(SPARE)) u_col (
    .clk(clk), .rst_n(rst_n),
    .start_gather(cd_start_gather), .start_open(cd_start_open), .start_page(cd_start_page),
    .chunks(cd_chunks),
    .page(cd_src_l2 ? l2_q : l1_q), .spare(cd_src_l2 ? sp_l2 : sp_l1),
    .busy(cd_busy), .dout(dout), .dout_valid(dout_valid), .dout_last(dout_last));

endmodule
