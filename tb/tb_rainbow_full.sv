// tb_rainbow_full: the two-chip Rainbow fabric at its full default size
// (512-entry 8-way D-LLC and 2 x 512 x 4-cell F-LLC per bank, 4096-entry 8-way
// D-MEM and 2 x 8192 x 8-cell F-MEM per home), with no parameter overridden.
// After the 8192-cycle table initialisation, eight request threads (one per
// chip and bank) issue random reads, writes, upgrades and evictions to a pool
// of shared blocks; rainbow_env.svh holds the cache, LLC and DRAM models and
// the checks (token conservation, read and write permission). At this size
// the structures neither overflow nor alias, so only the common-case
// mechanisms (D-LLC and D-MEM hits, LLC hits, filter broadcasts with
// reconstruction, DRAM reads, home snoops, evictions) are required.
module tb_rainbow_full;
  import rainbow_pkg::*;

  localparam int  N_OPS       = 200;
  localparam int  MEM_LAT     = 300;
  localparam int  LLC_LAT     = 5;
  localparam int  POOL        = 12;
  localparam bit  REQUIRE_ALL = 1'b0;

  rainbow_top dut (.*);

  initial begin
    #50000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  `include "rainbow_env.svh"
endmodule
