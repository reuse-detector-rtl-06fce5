// tb_rd_cmp_scaled: runs the hierarchy in the other configurations of the
// evaluation, side by side, each in its own rd_cmp_env:
//   - 8 cores, 8 MB SLLC (8192 sets x 16 ways) and a 16K-entry Reuse
//     Detector per core (2048 sets x 16 ways);
//   - 1 core, 1 MB SLLC (1024 sets x 16 ways) and the default 8K-entry
//     Reuse Detector;
//   - the two-level hierarchy: 4 cores whose only private cache is a 32 KB
//     8-way level (64 sets, 2 cycles) with the Reuse Detector right behind
//     it, and the 4 MB SLLC.
// All other sizes and latencies are the defaults. The 16-core system and the
// 32K/64K-entry detectors differ from these only in NCORES and RD_SETS.
// Each environment drives a synthetic loop/stream/shared mix and counts
// (the single core loops over more blocks so that its SLLC sets overflow)
// its own checks; this module adds them up, with a watchdog.
module tb_rd_cmp_scaled;
  logic fin8, fin1, fin2l;
  int   chk8, chk1, chk2l, fail8, fail1, fail2l;

  rd_cmp_env #(.NC(8), .RD_SETS(2048), .N_REQ(700))  u_8core (.finished(fin8), .checks(chk8), .failures(fail8));
  rd_cmp_env #(.NC(1), .RD_SETS(1024), .N_REQ(3000), .LOOP(96)) u_1core (.finished(fin1), .checks(chk1), .failures(fail1));
  rd_cmp_env #(
    .NC(4), .RD_SETS(1024), .N_REQ(1000), .PRIV_LEVELS(1), .L2_SETS(64), .L2_WAYS(8), .L2_LAT(2)
  ) u_2level (.finished(fin2l), .checks(chk2l), .failures(fail2l));

  initial begin
    #400000000;
    $display("watchdog: runs not finished (8-core %0b, 1-core %0b, two-level %0b)", fin8, fin1, fin2l);
    $display("TB_RESULT checks=%0d failures=%0d", chk8 + chk1 + chk2l, fail8 + fail1 + fail2l + 1);
    $finish;
  end

  initial begin
    wait (fin8 && fin1 && fin2l);
    $display("TB_RESULT checks=%0d failures=%0d", chk8 + chk1 + chk2l, fail8 + fail1 + fail2l);
    $finish;
  end
endmodule
