// tb_dataset_trees: the classifier built for trees the size of those the
// eight evaluation datasets need (number of comparisons and of inputs as
// reported for 4-bit, depth <= 8 trees; number of classes of each public
// dataset). The trained trees themselves are not available, so each is a
// synthetic tree of that size (see dt_workload_run). Each run applies
// random sensor vectors and checks every label against a software walk.
module tb_dataset_trees;

  localparam int NW = 8;
  int  chk [NW];
  int  fail [NW];
  int  leaves [NW];
  bit  fin [NW];

  //                 splits inputs classes
  dt_workload_run #(207, 11,  7, 300, 11) u_whitewine   (chk[0], fail[0], leaves[0], fin[0]);
  dt_workload_run #( 85, 19,  3, 300, 12) u_cardio      (chk[1], fail[1], leaves[1], fin[1]);
  dt_workload_run #( 39, 21, 16, 300, 13) u_arrhythmia  (chk[2], fail[2], leaves[2], fin[2]);
  dt_workload_run #( 15,  4,  3, 300, 14) u_balance     (chk[3], fail[3], leaves[3], fin[3]);
  dt_workload_run #(  7,  5,  3, 300, 15) u_vertebral3c (chk[4], fail[4], leaves[4], fin[4]);
  dt_workload_run #( 23,  5,  3, 300, 16) u_seeds       (chk[5], fail[5], leaves[5], fin[5]);
  dt_workload_run #(  7,  5,  2, 300, 17) u_vertebral2c (chk[6], fail[6], leaves[6], fin[6]);
  dt_workload_run #(215, 16, 10, 300, 18) u_pendigits   (chk[7], fail[7], leaves[7], fin[7]);

  initial begin : watchdog
    #1000000;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", 0, 1);
    $finish;
  end

  initial begin
    int checks, failures;
    static string names [NW] = '{"whitewine", "cardio", "arrhythmia", "balance-scale",
                          "vertebral-3c", "seeds", "vertebral-2c", "pendigits"};
    #5;
    wait (fin[0] && fin[1] && fin[2] && fin[3] && fin[4] && fin[5] && fin[6] && fin[7]);
    checks = 0; failures = 0;
    for (int w = 0; w < NW; w++) begin
      $display("%-14s checks %0d failures %0d distinct leaves reached %0d",
               names[w], chk[w], fail[w], leaves[w]);
      checks += chk[w];
      failures += fail[w];
      // Each workload must have exercised more than one path.
      checks++;
      if (leaves[w] < 2) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
