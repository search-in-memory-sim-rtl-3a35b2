// sim_top: a SiM chip together with the controller-side optimistic error
// check that watches its page-open responses.
//
// The chip's bus is brought out unchanged; every byte the chip returns with
// the DK_OPEN tag is also fed to the checker, whose verdict (ok, full read,
// read retry, refresh) is brought out for the rest of the SSD controller,
// which is not part of this design (flash translation layer, scheduler, ECC
// engine, DRAM cache). `now` is the controller's current time in the units
// of the page timestamps.
module sim_top
  import sim_pkg::*;
#(
  parameter int unsigned NDIE      = DIES,
  parameter int unsigned M         = PAGE_SLOTS,
  parameter int unsigned BLK       = BLOCKS,
  parameter int unsigned PGS       = PAGES_PER_BLOCK,
  parameter int unsigned T_READ    = T_READ_CYC,
  parameter int unsigned T_PROG    = T_PROG_CYC,
  parameter int unsigned T_ERASE   = T_ERASE_CYC,
  parameter bit          RANDOMIZE = 1'b1,
  parameter logic [63:0] MAGIC     = 64'h5349_4D5F_5041_4745,
  parameter logic [63:0] MAX_AGE   = 64'd1_000_000
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cle,
  input  logic        ale,
  input  logic        we,
  input  logic [7:0]  dq_in,
  output logic [7:0]  dq_out,
  output logic        dq_valid,
  output logic        dq_last,
  output dkind_e      dq_kind,
  output logic        rdy,
  output logic        match_mode,
  input  logic [63:0] now,
  output logic        oec_done,
  output logic        oec_ok,
  output logic        oec_full_read,
  output logic        oec_read_retry,
  output logic        oec_refresh
);

  sim_chip #(.NDIE(NDIE), .M(M), .BLK(BLK), .PGS(PGS), .T_READ(T_READ),
             .T_PROG(T_PROG), .T_ERASE(T_ERASE), .RANDOMIZE(RANDOMIZE)) u_chip (
    .clk(clk), .rst_n(rst_n), .cle(cle), .ale(ale), .we(we), .dq_in(dq_in),
    .dq_out(dq_out), .dq_valid(dq_valid), .dq_last(dq_last), .dq_kind(dq_kind),
    .rdy(rdy), .match_mode(match_mode));

  sim_oec_checker #(.MAGIC(MAGIC), .MAX_AGE(MAX_AGE)) u_oec (
    .clk(clk), .rst_n(rst_n), .now(now),
    .in_valid(dq_valid && dq_kind == DK_OPEN), .in_byte(dq_out),
    .done(oec_done), .ok(oec_ok), .full_read(oec_full_read),
    .read_retry(oec_read_retry), .refresh(oec_refresh));

endmodule
