// sim_row_decoder: turns the in-die part of a row (page) address into a
// one-hot block select and a one-hot wordline select for the cell array.
//
// Row address layout (this implementation's choice): bits [6:0] page in
// block, bits [11:7] block, bits [15:12] die; the die field is decoded in the
// chip and ignored here. `valid` is low, and no select line is driven, when
// the block or page number is outside the array. At the default geometry the
// 5-bit block and 7-bit page fields can only hold valid numbers, so `valid`
// is then constant 1; it matters for smaller arrays. The block and page counts
// (32 and 128) are the published configuration. Purely combinational.
module sim_row_decoder
  import sim_pkg::*;
#(
  parameter int unsigned BLK = BLOCKS,
  parameter int unsigned PGS = PAGES_PER_BLOCK
) (
  input  row_addr_t        row,
  output logic [BLK-1:0]   blk_sel,
  output logic [PGS-1:0]   wl_sel,
  output logic             valid
);

  logic [4:0] blk;
  logic [6:0] pg;

  always_comb begin
    pg      = row[6:0];
    blk     = row[11:7];
    valid   = (32'(blk) < BLK) && (32'(pg) < PGS);
    blk_sel = valid ? (BLK'(1) << blk) : '0;
    wl_sel  = valid ? (PGS'(1) << pg) : '0;
  end

endmodule
