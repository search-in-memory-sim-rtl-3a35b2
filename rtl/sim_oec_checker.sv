// sim_oec_checker: controller-side "optimistic error correction" check of a
// page-open response.
//
// SLC pages are assumed error-free in the common case, so instead of reading
// and decoding the whole page the controller checks only what the chip sends
// when a page is opened: the verification header (8-byte write timestamp,
// 8-byte magic number, 8-byte CRC) followed by the first 64-byte chunk. The
// CRC is recomputed over timestamp, magic and chunk, in the order they are
// received (the CRC bytes themselves excluded), one byte per cycle. After the
// last byte `done` pulses with a verdict:
//   ok           CRC and magic match and the page is younger than MAX_AGE;
//   full_read    CRC mismatch: read the whole page and run it through ECC;
//   read_retry   magic mismatch: shift the sensing voltage and read again;
//   refresh      page older than MAX_AGE (now - timestamp): read it out for
//                correction and queue it for rewriting.
// Several of the last three can be set at once.
//
// The header fields, the check of the first chunk and the three fallbacks
// follow the published scheme. The CRC polynomial (CRC-64/ECMA-182, no
// reflection, zero initial value), the field order, the big-endian byte order
// of the fields and the magic value are this implementation's choices.
module sim_oec_checker
  import sim_pkg::*;
#(
  parameter logic [63:0] MAGIC   = 64'h5349_4D5F_5041_4745,   // "SIM_PAGE"
  parameter logic [63:0] MAX_AGE = 64'd1_000_000,
  parameter logic [63:0] POLY    = 64'h42F0_E1EB_A9EA_3693
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [63:0] now,
  input  logic        in_valid,   // a byte of a page-open response
  input  logic [7:0]  in_byte,
  output logic        done,
  output logic        ok,
  output logic        full_read,
  output logic        read_retry,
  output logic        refresh
);

  localparam int unsigned NBYTES = HDR_BYTES + CHUNK_BYTES;

  logic [$clog2(NBYTES+1)-1:0] idx;
  logic [63:0] ts, magic, crc_rx, crc;

  function automatic logic [63:0] crc_byte(input logic [63:0] c, input logic [7:0] b);
    logic [63:0] r;
    r = c ^ {b, 56'd0};
    for (int i = 0; i < 8; i++)
      r = r[63] ? ((r << 1) ^ POLY) : (r << 1);
    return r;
  endfunction

  logic in_crc_field;
  assign in_crc_field = (32'(idx) >= HDR_CRC_OFF) && (32'(idx) < HDR_CRC_OFF + 8);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx <= '0; ts <= '0; magic <= '0; crc_rx <= '0; crc <= '0;
      done <= 1'b0; ok <= 1'b0; full_read <= 1'b0; read_retry <= 1'b0; refresh <= 1'b0;
    end else begin
      done <= 1'b0;
      if (in_valid) begin
        if (32'(idx) < HDR_MAGIC_OFF)      ts     <= {ts[55:0], in_byte};
        else if (32'(idx) < HDR_CRC_OFF)   magic  <= {magic[55:0], in_byte};
        else if (in_crc_field)             crc_rx <= {crc_rx[55:0], in_byte};
        if (!in_crc_field) crc <= crc_byte(crc, in_byte);
        if (32'(idx) == NBYTES - 1) begin
          idx        <= '0;
          crc        <= '0;
          done       <= 1'b1;
          full_read  <= (crc_byte(crc, in_byte) != crc_rx);
          read_retry <= (magic != MAGIC);
          refresh    <= (now - ts) > MAX_AGE;
          ok         <= (crc_byte(crc, in_byte) == crc_rx) && (magic == MAGIC) &&
                        !((now - ts) > MAX_AGE);
        end else begin
          idx <= idx + 1'b1;
        end
      end
    end
  end

endmodule
