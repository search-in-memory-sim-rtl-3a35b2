// sim_control_logic: command sequencer of the SiM chip.
//
// It takes decoded commands from the I/O control and drives the dies, the
// deserializer and the output paths. Per die it tracks which page is active
// in Latch 2 (the operand of searches) and which sensed page waits in Latch 1.
//
// Match-mode commands:
//   PAGE_OPEN  row   senses the page into Latch 1 in the background. The chip
//                    stays ready, so searches on the previously active page
//                    overlap the array read. When the read ends the page moves
//                    to Latch 2 at once if no page is active, otherwise it
//                    waits in Latch 1. In both cases its verification header
//                    and first chunk are then sent (tag DK_OPEN) so that the
//                    controller can run its optimistic error check.
//   SEARCH row,key,mask  only on the active page. 8 cycles fill Latch 4,
//                    1 cycle forms Latch 3, 1 cycle latches the counter
//                    outputs: the bitmap is ready 10 cycles after the command,
//                    then shifted out (tag DK_BITMAP).
//   GATHER row,chunks  from Latch 2 if row is active, from Latch 1 if it is
//                    the waiting page, otherwise after a blocking array read
//                    into Latch 1 (tag DK_CHUNK).
//   PAGE_CLOSE row   releases Latch 2; a waiting page moves into it.
// Storage-mode commands (blocking, `rdy` low until done):
//   READ row         full page plus spare out (tag DK_PAGE).
//   PROGRAM row,data data already in Latch 1 is copied to Latch 2, programmed,
//                    sensed back into Latch 4 and compared in Latch 3 with
//                    Enable FBC high; status fail is set when more than
//                    FAIL_LIMIT bits failed.
//   ERASE row        erases the block.
// A command that cannot run (search on a page that is not active, array
// command while that die's array is busy) is dropped and sets status fail.
//
// The command set, the Latch 1 / Latch 2 hand-over on page-close, the mask and
// match-mode signals and the 10-cycle search follow the published design. One
// command is served at a time for the whole chip (page-open reads of several
// dies may overlap); the rejection rules, response order and status bits are
// this implementation's choices.
module sim_control_logic
  import sim_pkg::*;
#(
  parameter int unsigned NDIE       = DIES,
  parameter int unsigned TW         = $clog2(PAGE_SLOTS*SLOT_BITS+1),
  parameter int unsigned FAIL_LIMIT = FAIL_BIT_LIMIT,
  parameter int unsigned DW         = (NDIE > 1) ? $clog2(NDIE) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 cmd_valid,
  input  cmd_t                 cmd,
  output logic                 rdy,
  output status_t              status,
  output logic                 match_mode,
  output logic [DW-1:0]        op_die,
  // dies
  input  logic [NDIE-1:0]      arr_busy,
  input  logic [NDIE-1:0]      arr_done,
  input  logic [NDIE-1:0]      row_valid,
  output logic [NDIE-1:0]      arr_read,
  output logic [NDIE-1:0]      arr_prog,
  output logic [NDIE-1:0]      arr_erase,
  output logic [NDIE-1:0]      sense_to_l4,
  output logic [NDIE-1:0]      l1_to_l2,
  output logic [NDIE-1:0]      xor_en,
  output logic                 en_fbc,
  output logic [SLOT_BITS-1:0] mask,
  output logic [NDIE-1:0]      acc_capture,
  input  logic [TW-1:0]        failed_bits,   // of die op_die
  // deserializer
  output logic                 key_load,
  output logic [NDIE-1:0]      key_die,
  input  logic                 key_done,
  // column decoders
  output logic [NDIE-1:0]      cd_start_gather,
  output logic [NDIE-1:0]      cd_start_open,
  output logic [NDIE-1:0]      cd_start_page,
  output logic                 cd_src_l2,
  input  logic [NDIE-1:0]      cd_busy,
  output dkind_e               cd_kind,
  // bitmap shifter in the I/O control
  output logic                 bm_start,
  input  logic                 bm_busy
);

  typedef enum logic [3:0] {
    C_IDLE, C_SKEY, C_SCAP, C_SBM, C_SBMW, C_WAIT_ARR, C_PPROG,
    C_WAIT_VER, C_PCAP, C_PCHK, C_STREAM
  } cstate_e;

  cstate_e            st;
  opcode_e            op_q;
  logic [DW-1:0]      d_q;          // die of the running command
  logic [DW-1:0]      cur_die;      // die reported by status
  logic [SLOT_BITS-1:0] mask_q;
  logic               src_q, fail_q, mm_q;
  dkind_e             kind_q;

  logic [NDIE-1:0]    active, staged, open_pend, resp_pend, sense_l4, done_q;
  row_addr_t          active_row [NDIE];
  row_addr_t          staged_row [NDIE];
  row_addr_t          open_row   [NDIE];

  function automatic logic [DW-1:0] die_of(input row_addr_t r);
    return DW'(32'(r[15:12]) % NDIE);
  endfunction

  logic [DW-1:0] cd;                 // die of the incoming command
  logic          busy_cd;            // that die cannot start an array op
  logic          is_active, is_staged;
  logic [NDIE-1:0] bg_done, bg_move, closing;
  logic          resp_any;
  logic [DW-1:0] resp_die;

  always_comb begin
    cd        = die_of(cmd.row);
    busy_cd   = arr_busy[cd] || open_pend[cd] || resp_pend[cd] || done_q[cd];
    is_active = active[cd] && active_row[cd] == cmd.row;
    is_staged = staged[cd] && staged_row[cd] == cmd.row;
    resp_any  = |resp_pend;
    resp_die  = '0;
    for (int d = NDIE - 1; d >= 0; d--)
      if (resp_pend[d]) resp_die = DW'(d);
    closing = '0;
    if (st == C_IDLE && cmd_valid && cmd.op == OP_PAGE_CLOSE)
      closing[cd] = 1'b1;
    for (int d = 0; d < NDIE; d++) begin
      bg_done[d] = open_pend[d] && done_q[d];
      bg_move[d] = bg_done[d] && (!active[d] || closing[d]);
    end
  end

  // Strobes.
  always_comb begin
    arr_read = '0; arr_prog = '0; arr_erase = '0; l1_to_l2 = bg_move;
    xor_en = '0; en_fbc = 1'b0; mask = '0; acc_capture = '0;
    key_load = 1'b0; key_die = '0;
    cd_start_gather = '0; cd_start_open = '0; cd_start_page = '0;
    bm_start = 1'b0;
    unique case (st)
      C_IDLE: begin
        if (cmd_valid) begin
          unique case (cmd.op)
            OP_PAGE_OPEN:
              if (!busy_cd && row_valid[cd]) arr_read[cd] = 1'b1;
            OP_SEARCH:
              if (is_active) begin key_load = 1'b1; key_die[cd] = 1'b1; end
            OP_GATHER:
              if (is_active || is_staged) cd_start_gather[cd] = 1'b1;
              else if (!busy_cd && row_valid[cd]) arr_read[cd] = 1'b1;
            OP_PAGE_CLOSE:
              if (staged[cd]) l1_to_l2[cd] = 1'b1;
            OP_READ:
              if (!busy_cd && row_valid[cd]) arr_read[cd] = 1'b1;
            OP_PROGRAM:
              if (!busy_cd && row_valid[cd]) l1_to_l2[cd] = 1'b1;
            OP_ERASE:
              if (!busy_cd && row_valid[cd]) arr_erase[cd] = 1'b1;
            default: ;
          endcase
        end else if (resp_any) begin
          cd_start_open[resp_die] = 1'b1;
        end
      end
      C_SKEY:  begin key_die[d_q] = 1'b1; if (key_done) xor_en[d_q] = 1'b1; end
      C_SCAP:  begin mask = mm_q ? mask_q : '0; acc_capture[d_q] = 1'b1; end
      C_SBM:   bm_start = 1'b1;
      C_WAIT_ARR:
        if (done_q[d_q]) begin
          unique case (op_q)
            OP_READ:   cd_start_page[d_q]   = 1'b1;
            OP_GATHER: cd_start_gather[d_q] = 1'b1;
            OP_PROGRAM: arr_read[d_q]       = 1'b1;   // verify read into Latch 4
            default: ;
          endcase
        end
      C_PPROG:    arr_prog[d_q] = 1'b1;
      C_WAIT_VER: if (done_q[d_q]) xor_en[d_q] = 1'b1;
      C_PCAP:     begin en_fbc = 1'b1; acc_capture[d_q] = 1'b1; end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= C_IDLE;
      op_q      <= OP_STATUS;
      d_q       <= '0;
      cur_die   <= '0;
      mask_q    <= '0;
      src_q     <= 1'b0;
      fail_q    <= 1'b0;
      mm_q      <= 1'b0;
      kind_q    <= DK_NONE;
      active    <= '0;
      staged    <= '0;
      open_pend <= '0;
      resp_pend <= '0;
      sense_l4  <= '0;
      done_q    <= '0;
      for (int d = 0; d < NDIE; d++) begin
        active_row[d] <= '0;
        staged_row[d] <= '0;
        open_row[d]   <= '0;
      end
    end else begin
      done_q <= arr_done;
      unique case (st)
        C_IDLE: begin
          if (cmd_valid) begin
            op_q    <= cmd.op;
            d_q     <= cd;
            cur_die <= cd;
            fail_q  <= 1'b0;
            mm_q    <= cmd.op inside {OP_PAGE_OPEN, OP_SEARCH, OP_GATHER, OP_PAGE_CLOSE};
            unique case (cmd.op)
              OP_PAGE_OPEN:
                if (!busy_cd && row_valid[cd]) begin
                  open_pend[cd] <= 1'b1;
                  open_row[cd]  <= cmd.row;
                  staged[cd]    <= 1'b0;
                  sense_l4[cd]  <= 1'b0;
                end else fail_q <= 1'b1;
              OP_SEARCH:
                if (is_active) begin
                  mask_q <= cmd.mask;
                  st     <= C_SKEY;
                end else fail_q <= 1'b1;
              OP_GATHER: begin
                kind_q <= DK_CHUNK;
                if (is_active) begin
                  src_q <= 1'b1; st <= C_STREAM;
                end else if (is_staged) begin
                  src_q <= 1'b0; st <= C_STREAM;
                end else if (!busy_cd && row_valid[cd]) begin
                  src_q <= 1'b0; staged[cd] <= 1'b0; sense_l4[cd] <= 1'b0;
                  st <= C_WAIT_ARR;
                end else fail_q <= 1'b1;
              end
              OP_PAGE_CLOSE:
                if (staged[cd]) begin
                  active[cd]     <= 1'b1;
                  active_row[cd] <= staged_row[cd];
                  staged[cd]     <= 1'b0;
                end else begin
                  active[cd] <= 1'b0;
                end
              OP_READ:
                if (!busy_cd && row_valid[cd]) begin
                  kind_q <= DK_PAGE; src_q <= 1'b0;
                  staged[cd] <= 1'b0; sense_l4[cd] <= 1'b0;
                  st <= C_WAIT_ARR;
                end else fail_q <= 1'b1;
              OP_PROGRAM:
                if (!busy_cd && row_valid[cd]) begin
                  active[cd] <= 1'b0; staged[cd] <= 1'b0;
                  st <= C_PPROG;
                end else fail_q <= 1'b1;
              OP_ERASE:
                if (!busy_cd && row_valid[cd]) st <= C_WAIT_ARR;
                else fail_q <= 1'b1;
              default: fail_q <= 1'b1;
            endcase
          end else if (resp_any) begin
            resp_pend[resp_die] <= 1'b0;
            kind_q <= DK_OPEN;
            src_q  <= 1'b0;
            d_q    <= resp_die;
            st     <= C_STREAM;
          end
        end
        C_SKEY:  if (key_done) st <= C_SCAP;
        C_SCAP:  st <= C_SBM;
        C_SBM:   st <= C_SBMW;
        C_SBMW:  if (!bm_busy) st <= C_IDLE;
        C_PPROG: st <= C_WAIT_ARR;
        C_WAIT_ARR:
          if (done_q[d_q]) begin
            unique case (op_q)
              OP_READ, OP_GATHER: st <= C_STREAM;
              OP_PROGRAM: begin
                sense_l4[d_q] <= 1'b1;   // verify read into Latch 4
                st <= C_WAIT_VER;
              end
              default: st <= C_IDLE;
            endcase
          end
        C_WAIT_VER:
          if (done_q[d_q]) begin
            sense_l4[d_q] <= 1'b0;
            st <= C_PCAP;
          end
        C_PCAP:  st <= C_PCHK;
        C_PCHK: begin
          fail_q <= (failed_bits > TW'(FAIL_LIMIT));
          st     <= C_IDLE;
        end
        C_STREAM: if (!cd_busy[d_q]) st <= C_IDLE;
        default:  st <= C_IDLE;
      endcase

      // Completion of background page-open reads (after the command effects,
      // so that a simultaneous page-close hands Latch 2 to the new page).
      for (int d = 0; d < NDIE; d++) begin
        if (bg_done[d]) begin
          open_pend[d] <= 1'b0;
          resp_pend[d] <= 1'b1;
          if (bg_move[d]) begin
            active[d]     <= 1'b1;
            active_row[d] <= open_row[d];
            staged[d]     <= 1'b0;
          end else begin
            staged[d]     <= 1'b1;
            staged_row[d] <= open_row[d];
          end
        end
      end
    end
  end

  assign sense_to_l4 = sense_l4;
  assign rdy        = (st == C_IDLE) && !resp_any && !cmd_valid;
  assign match_mode = mm_q;
  assign op_die     = d_q;
  assign cd_src_l2  = src_q;
  assign cd_kind    = kind_q;

  always_comb begin
    status            = '0;
    status.rdy        = rdy;
    status.ardy       = !(arr_busy[cur_die] || open_pend[cur_die]);
    status.active     = active[cur_die];
    status.staged     = staged[cur_die];
    status.match_mode = mm_q;
    status.fail       = fail_q;
  end

endmodule
