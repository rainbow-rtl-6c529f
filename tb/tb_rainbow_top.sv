// tb_rainbow_top: end-to-end random test of the two-chip Rainbow fabric with
// shrunken coherence structures (16-entry 2-way D-LLC, 16 x 2-cell F-LLC
// subtables, 32-entry 2-way D-MEM, 32 x 2-cell F-MEM subtables, 3-bit
// fingerprints) so that silent
// directory evictions and filter false positives happen often. Eight request
// threads (one per chip and bank) run concurrently; see rainbow_env.svh for
// the models and the checks. Every mechanism of the protocol must occur.
module tb_rainbow_top;
  import rainbow_pkg::*;

  localparam int  N_OPS       = 400;
  localparam int  MEM_LAT     = 300;
  localparam int  LLC_LAT     = 5;
  localparam int  POOL        = 24;
  localparam bit  REQUIRE_ALL = 1'b1;

  rainbow_top #(
    .LLC_DIR_ENTRIES(16), .LLC_DIR_WAYS(2), .LLC_F_BUCKETS(16), .LLC_F_CELLS(2),
    .MEM_DIR_ENTRIES(32), .MEM_DIR_WAYS(2), .MEM_F_BUCKETS(32), .MEM_F_CELLS(2),
    .F_FP_W(3)
  ) dut (.*);

  initial begin
    #50000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  `include "rainbow_env.svh"
endmodule
