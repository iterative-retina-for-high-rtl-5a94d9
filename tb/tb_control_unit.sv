// Testbench of control_unit with the array and sorting unit replaced by a
// scripted responder. For each event it checks: the hits are read from slots
// 0..n-1 in order and reach the array one cycle later with the last one
// marked; iteration 1 is configured for the whole sector; iteration 2 runs
// once per super cell with the region of that super cell; each track carries
// the centre of the scripted winning cell, its weight and its hit mask; the
// output stream honours back-pressure; ev_done reports the count and overflow.
module tb_control_unit;
  import retina_pkg::*;

  localparam int unsigned M = N_TH0, K = N_CURV, MT = MAX_TRACKS;
  localparam int C_ORG = -int'(C_STEP2 * N_CURV * N_CURV / 2);

  logic clk = 0, rst_n = 0;
  logic ev_start = 0, ev_ready;
  hit_idx_t ev_nhits = '0;
  theta_t cfg_sector_th0 = '0;
  sum_t cfg_thresh1 = '0;
  logic ram_rd_en;
  hit_idx_t ram_rd_addr;
  logic cfg_load;
  scan_cfg_t cfg;
  logic arr_hit_valid, arr_hit_last;
  hit_idx_t arr_hit_idx;
  logic [MAX_HITS-1:0] hit_masks [M*K];
  logic sort_mode_max;
  sum_t sort_threshold;
  logic sort_done = 0;
  logic [$clog2(MT+1)-1:0] sort_n_super = '0;
  cell_idx_t sort_super_idx [MT];
  logic sort_overflow = 0;
  cell_idx_t sort_max_idx = '0;
  sum_t sort_max_val = '0;
  logic trk_valid, trk_ready = 0, trk_last;
  track_t trk;
  logic ev_done, ev_overflow;
  logic [$clog2(MT+1)-1:0] ev_ntracks;

  int checks = 0, failures = 0;
  int n_iter2_total = 0, n_stall = 0;

  always #5 clk = ~clk;

  control_unit dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // scripted results of the current event
  int nh, ns, sup [MT], mx [MT], mv [MT];
  bit ovf;
  int iter, rd_expect, arr_expect, ntrk_seen;
  bit saw_last;

  // watch the read and array side every cycle
  always @(posedge clk) if (rst_n) begin
    if (ram_rd_en) begin
      check(int'(ram_rd_addr) == rd_expect, $sformatf("read addr %0d expected %0d", ram_rd_addr, rd_expect));
      rd_expect++;
    end
    if (arr_hit_valid) begin
      check(int'(arr_hit_idx) == arr_expect && arr_hit_last == (arr_expect == nh - 1),
            $sformatf("array hit %0d last %0d", arr_hit_idx, arr_hit_last));
      arr_expect++;
      if (arr_hit_last) saw_last = 1;
    end
  end

  initial begin
    for (int i = 0; i < int'(M * K); i++) hit_masks[i] = MAX_HITS'(i * 977);
    for (int s = 0; s < int'(MT); s++) sort_super_idx[s] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int e = 0; e < 60; e++) begin
      int th0_sec;
      nh = (e % 7 == 3) ? 0 : $urandom_range(MAX_HITS, 1);
      ns = (nh == 0) ? 0 : e % (MT + 1);
      ovf = (ns == int'(MT)) && $urandom_range(1);
      for (int s = 0; s < int'(MT); s++) begin
        sup[s] = $urandom_range(M * K - 1);
        mx[s]  = $urandom_range(M * K - 1);
        mv[s]  = $urandom_range(4590);
      end
      th0_sec = int'($urandom_range(20000)) - 10000;
      wait (ev_ready);
      @(negedge clk);
      ev_start = 1; ev_nhits = hit_idx_t'(nh);
      cfg_sector_th0 = theta_t'(th0_sec); cfg_thresh1 = sum_t'(1234);
      @(negedge clk) ev_start = 0;
      for (iter = 0; nh > 0 && iter <= ns; iter++) begin
        // configuration of this iteration
        while (!cfg_load) @(negedge clk);
        if (iter == 0) begin
          check(int'(cfg.th0_origin) == th0_sec && int'(cfg.c_origin) == C_ORG &&
                int'(cfg.th0_step) == int'(TH0_STEP2 * M) && int'(cfg.c_step) == int'(C_STEP2 * K) &&
                int'(cfg.sigma_shift) == int'(SIGMA_SHIFT1), "iteration 1 configuration");
        end else begin
          check(int'(cfg.th0_origin) == th0_sec + (sup[iter-1] / int'(K)) * int'(TH0_STEP2 * M) &&
                int'(cfg.c_origin) == C_ORG + (sup[iter-1] % int'(K)) * int'(C_STEP2 * K) &&
                int'(cfg.th0_step) == int'(TH0_STEP2) && int'(cfg.c_step) == int'(C_STEP2) &&
                int'(cfg.sigma_shift) == int'(SIGMA_SHIFT2),
                $sformatf("iteration 2 configuration for super cell %0d", sup[iter-1]));
          n_iter2_total++;
        end
        rd_expect = 0; arr_expect = 0; saw_last = 0;
        while (!saw_last) @(negedge clk);
        check(rd_expect == nh && arr_expect == nh, "all hits replayed");
        check(sort_mode_max == (iter > 0) && int'(sort_threshold) == 1234, "sorting mode");
        repeat (3) @(negedge clk);
        sort_done = 1;
        if (iter == 0) begin
          sort_n_super = 2'(ns); sort_overflow = ovf;
          for (int s = 0; s < int'(MT); s++) sort_super_idx[s] = cell_idx_t'(sup[s]);
        end else begin
          sort_max_idx = cell_idx_t'(mx[iter-1]); sort_max_val = sum_t'(mv[iter-1]);
        end
        @(negedge clk) sort_done = 0;
      end
      // results
      ntrk_seen = 0;
      while (!ev_done) begin
        trk_ready = $urandom_range(1);
        if (trk_valid && !trk_ready) n_stall++;
        if (trk_valid && trk_ready) begin
          int o_th, o_c;
          o_th = th0_sec + (sup[ntrk_seen] / int'(K)) * int'(TH0_STEP2 * M);
          o_c  = C_ORG + (sup[ntrk_seen] % int'(K)) * int'(C_STEP2 * K);
          check(int'(trk.theta0) == o_th + (mx[ntrk_seen] / int'(K)) * int'(TH0_STEP2) + int'(TH0_STEP2 / 2) &&
                int'(trk.curv) == o_c + (mx[ntrk_seen] % int'(K)) * int'(C_STEP2) + int'(C_STEP2 / 2) &&
                int'(trk.weight) == mv[ntrk_seen] &&
                trk.hits == hit_masks[mx[ntrk_seen]] &&
                trk_last == (ntrk_seen == ns - 1),
                $sformatf("event %0d track %0d", e, ntrk_seen));
          ntrk_seen++;
        end
        @(negedge clk);
      end
      check(ntrk_seen == ns && int'(ev_ntracks) == ns && ev_overflow == ovf,
            $sformatf("event %0d: %0d tracks, done says %0d (expected %0d)", e, ntrk_seen, ev_ntracks, ns));
    end
    check(n_iter2_total > 0 && n_stall > 0, "second iterations and stalls exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
