// sim_io_control: byte-wide flash bus front end of the SiM chip.
//
// Input side: a byte strobed with `we` is a command byte when `cle` is high,
// an address byte when `ale` is high and a data byte otherwise. Every command
// except STATUS is followed by two address bytes (row address, low byte
// first). SEARCH then takes 16 data bytes (8 key bytes, then 8 mask bytes,
// most significant byte first), GATHER 8 bytes of chunk bitmap (byte j holds
// chunks 8j..8j+7, chunk 8j in bit 0), PROGRAM a whole page plus spare area,
// which is passed on byte by byte to the deserializer as it arrives. When a
// command's last byte has been taken, `cmd_valid` pulses for one cycle with the
// decoded command. Bytes are ignored while `rdy` is low.
//
// Output side: one byte per cycle on `dq_out` with `dq_valid`, `dq_last` and
// a tag `dq_kind` saying which response it belongs to. The chip's own
// sources are the status byte (the cycle after a STATUS command byte) and the
// match bitmap of a search, which this block shifts out itself, M/8 bytes with
// slot 8j+k in bit k of byte j; column-decoder bytes are passed through.
//
// The 8-bit bus and the bitmap path from the failed-bit accumulator to the
// I/O control follow the published design. The command codes, framing and
// byte orders are this implementation's choices (modelled loosely on ONFI);
// the bus here is single data rate on the core clock, and the 80 MT/s versus
// 800 MT/s timing modes of match and storage mode are left to the bus
// physical layer.
module sim_io_control
  import sim_pkg::*;
#(
  parameter int unsigned M      = PAGE_SLOTS,
  parameter int unsigned NCHUNK = M / CHUNK_SLOTS,
  parameter int unsigned SPARE  = HDR_BYTES + PARITY_BYTES*NCHUNK
) (
  input  logic         clk,
  input  logic         rst_n,
  // flash bus
  input  logic         cle,
  input  logic         ale,
  input  logic         we,
  input  logic [7:0]   dq_in,
  output logic [7:0]   dq_out,
  output logic         dq_valid,
  output logic         dq_last,
  output dkind_e       dq_kind,
  // to / from the control logic
  input  logic         rdy,
  input  status_t      status,
  output logic         cmd_valid,
  output cmd_t         cmd,
  output row_addr_t    cur_row,
  output logic         din_start,
  output logic         din_valid,
  output logic [7:0]   din_byte,
  input  logic         bm_start,
  input  logic [M-1:0] bitmap,
  output logic         bm_busy,
  // column decoder bytes
  input  logic [7:0]   cd_byte,
  input  logic         cd_valid,
  input  logic         cd_last,
  input  dkind_e       cd_kind
);

  localparam int unsigned PAGE_IN = M*SLOT_BYTES + SPARE;
  localparam int unsigned BMB     = M / 8;
  localparam int unsigned NW      = $clog2(PAGE_IN + 1);

  typedef enum logic [1:0] {P_IDLE, P_ADDR, P_DATA} pstate_e;
  pstate_e        ps;
  opcode_e        op;
  logic [1:0]     acnt;
  logic [NW-1:0]  dcnt, dneed;
  cmd_t           c;
  logic           stat_out;
  logic [$clog2(BMB+1)-1:0] bcnt;
  logic [M-1:0]   bm_q;

  function automatic logic [NW-1:0] data_bytes(input opcode_e o);
    unique case (o)
      OP_SEARCH:  data_bytes = NW'(2*SLOT_BYTES);
      OP_GATHER:  data_bytes = NW'(8);
      OP_PROGRAM: data_bytes = NW'(PAGE_IN);
      default:    data_bytes = '0;
    endcase
  endfunction

  logic take;
  assign take = we && rdy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ps        <= P_IDLE;
      op        <= OP_STATUS;
      acnt      <= '0;
      dcnt      <= '0;
      dneed     <= '0;
      c         <= '0;
      cmd_valid <= 1'b0;
      stat_out  <= 1'b0;
      din_start <= 1'b0;
    end else begin
      cmd_valid <= 1'b0;
      stat_out  <= 1'b0;
      din_start <= 1'b0;
      if (take && cle) begin
        op    <= opcode_e'(dq_in);
        acnt  <= '0;
        dcnt  <= '0;
        dneed <= data_bytes(opcode_e'(dq_in));
        if (opcode_e'(dq_in) == OP_STATUS) begin
          stat_out <= 1'b1;
          ps       <= P_IDLE;
        end else begin
          ps <= P_ADDR;
        end
        if (opcode_e'(dq_in) == OP_PROGRAM) din_start <= 1'b1;
      end else if (take && ale && ps == P_ADDR) begin
        c.row <= {dq_in, c.row[15:8]};
        acnt  <= acnt + 1'b1;
        if (acnt == 2'd1) begin
          if (dneed == '0) begin
            ps        <= P_IDLE;
            cmd_valid <= 1'b1;
            c.op      <= op;
          end else begin
            ps <= P_DATA;
          end
        end
      end else if (take && !ale && ps == P_DATA) begin
        dcnt <= dcnt + 1'b1;
        if (op == OP_SEARCH) begin
          if (dcnt < NW'(SLOT_BYTES)) c.key  <= {c.key[55:0], dq_in};
          else                        c.mask <= {c.mask[55:0], dq_in};
        end else if (op == OP_GATHER) begin
          c.chunks <= {dq_in, c.chunks[63:8]};
        end
        if (dcnt == dneed - 1'b1) begin
          ps        <= P_IDLE;
          cmd_valid <= 1'b1;
          c.op      <= op;
        end
      end
    end
  end

  assign cmd       = c;
  assign cur_row   = c.row;
  assign din_valid = take && !cle && !ale && ps == P_DATA && op == OP_PROGRAM;
  assign din_byte  = dq_in;

  // Bitmap shifter.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bcnt <= '0;
      bm_q <= '0;
    end else if (bm_start) begin
      bcnt <= ($clog2(BMB+1))'(BMB);
      bm_q <= bitmap;
    end else if (bcnt != '0) begin
      bcnt <= bcnt - 1'b1;
      bm_q <= bm_q >> 8;
    end
  end
  assign bm_busy = (bcnt != '0);

  // Output mux.
  always_comb begin
    dq_out   = 8'h00;
    dq_valid = 1'b0;
    dq_last  = 1'b0;
    dq_kind  = DK_NONE;
    if (cd_valid) begin
      dq_out = cd_byte; dq_valid = 1'b1; dq_last = cd_last; dq_kind = cd_kind;
    end else if (bcnt != '0) begin
      dq_out = bm_q[7:0]; dq_valid = 1'b1; dq_last = (bcnt == 1); dq_kind = DK_BITMAP;
    end else if (stat_out) begin
      dq_out = status; dq_valid = 1'b1; dq_last = 1'b1; dq_kind = DK_STATUS;
    end
  end

  // Command and address latch enables are never asserted together.
  a_cle_ale: assert property (@(posedge clk) disable iff (!rst_n) we |-> !(cle && ale));

endmodule
