// Testbench of sorting_unit at N = 200 cells: threshold mode with 0, 1..3 and
// more than 3 cells over threshold (overflow; the strongest are kept), and
// maximum mode with random
// sums and ties. Results and the done timing are checked against a direct
// computation.
module tb_sorting_unit;
  import retina_pkg::*;

  localparam int unsigned N = N_CELLS, MS = MAX_TRACKS;

  logic clk = 0, rst_n = 0, sum_valid = 0, mode_max = 0;
  sum_t sums [N];
  sum_t threshold = '0;
  logic done, overflow;
  logic [$clog2(MS+1)-1:0] n_super;
  cell_idx_t super_idx [MS];
  cell_idx_t max_idx;
  sum_t max_val;
  int checks = 0, failures = 0;
  int n_over_hist [5];

  always #5 clk = ~clk;

  sorting_unit dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, nover, exp_list [MS], exp_n, best, besti;
    bit exp_ovf;
    for (int i = 0; i < int'(N); i++) sums[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      mode_max = t[0];
      threshold = sum_t'(1000);
      nover = (t / 2) % 6;           // 0..5 cells over threshold
      for (int i = 0; i < int'(N); i++) sums[i] = sum_t'($urandom_range(999));
      for (int j = 0; j < nover; j++) sums[$urandom_range(N - 1)] = sum_t'($urandom_range(4590, 1000));
      if (t % 10 == 1 || t % 10 == 4) begin   // ties for the maximum / super cells
        sums[17] = sum_t'(4000); sums[150] = sum_t'(4000);
      end
      exp_n = 0; exp_ovf = 0; best = -1; besti = 0;
      for (int i = 0; i < int'(N); i++)
        if (int'(sums[i]) > best) begin best = int'(sums[i]); besti = i; end
      // super cells: the strongest over threshold first, equal sums by index
      begin
        bit taken [N];
        int nov;
        nov = 0;
        for (int i = 0; i < int'(N); i++) begin
          taken[i] = 0;
          if (int'(sums[i]) >= 1000) nov++;
        end
        exp_ovf = nov > int'(MS);
        exp_n = (nov > int'(MS)) ? int'(MS) : nov;
        for (int j = 0; j < exp_n; j++) begin
          int bv, bi;
          bv = -1; bi = 0;
          for (int i = 0; i < int'(N); i++)
            if (!taken[i] && int'(sums[i]) >= 1000 && int'(sums[i]) > bv) begin bv = int'(sums[i]); bi = i; end
          taken[bi] = 1;
          exp_list[j] = bi;
        end
      end
      sum_valid = 1;
      @(negedge clk) sum_valid = 0;
      cyc = 1;
      while (!done && cyc < 20) begin @(negedge clk); cyc++; end
      if (mode_max) begin
        check(cyc == 1, $sformatf("max done after %0d cycles", cyc));
        check(int'(max_idx) == besti && int'(max_val) == best,
              $sformatf("max %0d@%0d expected %0d@%0d", max_val, max_idx, best, besti));
      end else begin
        check(cyc == 2 + exp_n, $sformatf("threshold done after %0d cycles, n=%0d", cyc, exp_n));
        check(int'(n_super) == exp_n && overflow == exp_ovf,
              $sformatf("n_super %0d ovf %0d expected %0d %0d", n_super, overflow, exp_n, exp_ovf));
        for (int j = 0; j < exp_n; j++)
          check(int'(super_idx[j]) == exp_list[j],
                $sformatf("super %0d = %0d expected %0d", j, super_idx[j], exp_list[j]));
        n_over_hist[exp_n + int'(exp_ovf)]++;
      end
    end
    // every case, including overflow, must have occurred
    for (int j = 0; j < 5; j++) check(n_over_hist[j] > 0, $sformatf("case %0d never ran", j));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
