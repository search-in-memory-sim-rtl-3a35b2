// Self-checking testbench for sim_row_decoder at the published geometry
// (32 blocks x 128 pages): every in-range address must give exactly the
// expected one-hot block and wordline selects; out-of-range blocks none.
module tb_sim_row_decoder;
  int checks = 0, failures = 0;
  logic [15:0]  row;
  logic [31:0]  blk_sel;
  logic [127:0] wl_sel;
  logic         valid;

  sim_row_decoder dut (.*);

  initial begin
    for (int b = 0; b < 32; b++)
      for (int p = 0; p < 128; p += 7) begin
        row = 16'((($urandom % 2) << 12) | (b << 7) | p); #1;
        checks++;
        if (!valid || blk_sel != (32'd1 << b) || wl_sel != (128'd1 << p)) begin
          failures++; $display("FAIL row %h", row);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
