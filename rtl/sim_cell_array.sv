// sim_cell_array: BEHAVIOURAL MODEL of one plane's SLC NAND cell array with
// its bitline sensing. It is not synthesizable logic: the real part is an
// analog memory array.
//
// The array is addressed by the one-hot block and wordline selects of the row
// decoder. A page is PAGE_W bits: the data area followed by the spare area.
// Operations, started by a one-cycle strobe while `busy` is low:
//   read   : after T_READ cycles `sense_valid` pulses with the page on
//            `sense_data` (the latch strobes of the page buffers take it);
//   program: cells can only go from 1 to 0, so the stored page becomes
//            old & prog_data; takes T_PROG cycles;
//   erase  : the whole selected block returns to all ones; takes T_ERASE.
// `done` pulses when an operation ends. An erased page reads as all ones.
// Storage is an associative array holding only programmed pages.
//
// The SLC cell type, the geometry and the 16 us / 80 us / 1 ms latencies are
// the published configuration (528 / 2640 / 33000 cycles at 33 MHz); the rest
// is a plain NAND model.
module sim_cell_array
  import sim_pkg::*;
#(
  parameter int unsigned PAGE_W  = PAGE_BYTES*8 + (HDR_BYTES + PARITY_BYTES*(PAGE_SLOTS/CHUNK_SLOTS))*8,
  parameter int unsigned BLK     = BLOCKS,
  parameter int unsigned PGS     = PAGES_PER_BLOCK,
  parameter int unsigned T_READ  = T_READ_CYC,
  parameter int unsigned T_PROG  = T_PROG_CYC,
  parameter int unsigned T_ERASE = T_ERASE_CYC
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [BLK-1:0]    blk_sel,
  input  logic [PGS-1:0]    wl_sel,
  input  logic              read,
  input  logic              prog,
  input  logic              erase,
  input  logic [PAGE_W-1:0] prog_data,
  output logic [PAGE_W-1:0] sense_data,
  output logic              sense_valid,
  output logic              busy,
  output logic              done
);

  typedef enum logic [1:0] {A_IDLE, A_READ, A_PROG, A_ERASE} aop_e;

  logic [PAGE_W-1:0] mem [int];   // programmed pages, key = block*PGS + page
  aop_e              op;
  int unsigned       remaining;
  int                blk_q, pg_q;
  logic [PAGE_W-1:0] data_q;

  function automatic int onehot_index(input logic [255:0] v);
    onehot_index = 0;
    for (int i = 0; i < 256; i++)
      if (v[i]) onehot_index = i;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      op          <= A_IDLE;
      remaining   <= 0;
      sense_valid <= 1'b0;
      done        <= 1'b0;
      sense_data  <= '1;
      blk_q       <= 0;
      pg_q        <= 0;
      data_q      <= '0;
    end else begin
      sense_valid <= 1'b0;
      done        <= 1'b0;
      if (op == A_IDLE) begin
        blk_q  <= onehot_index(256'(blk_sel));
        pg_q   <= onehot_index(256'(wl_sel));
        data_q <= prog_data;
        if (read)         begin op <= A_READ;  remaining <= T_READ  - 1; end
        else if (prog) begin op <= A_PROG;  remaining <= T_PROG  - 1; end
        else if (erase)   begin op <= A_ERASE; remaining <= T_ERASE - 1; end
      end else if (remaining != 0) begin
        remaining <= remaining - 1;
      end else begin
        unique case (op)
          A_READ: begin
            sense_data  <= mem.exists(blk_q*PGS + pg_q) ? mem[blk_q*PGS + pg_q] : '1;
            sense_valid <= 1'b1;
          end
          A_PROG: begin
            if (mem.exists(blk_q*PGS + pg_q))
              mem[blk_q*PGS + pg_q] = mem[blk_q*PGS + pg_q] & data_q;
            else
              mem[blk_q*PGS + pg_q] = data_q;
          end
          A_ERASE: begin
            for (int p = 0; p < PGS; p++)
              if (mem.exists(blk_q*PGS + p)) mem.delete(blk_q*PGS + p);
          end
          default: ;
        endcase
        done <= 1'b1;
        op   <= A_IDLE;
      end
    end
  end

  assign busy = (op != A_IDLE);

endmodule
