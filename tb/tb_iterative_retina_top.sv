// End-to-end testbench of iterative_retina_top at its default (Loop-200)
// parameters.
//
// Events of one tracker sector are generated with 0 to 4 helical tracks
// crossing six barrel layers (theta = theta0 + c*r plus a small spread) and
// optional random hits, loaded into the hit RAM and processed. A reference
// model runs the same two-iteration search (coarse scan of the whole sector,
// threshold, then a fine scan of each super cell and its maximum) and every
// output field is compared exactly: number of tracks, overflow, theta0, 0.6/Pt,
// weight and hit grouping. The testbench also checks that a lone track is
// found close to its true parameters, that an event with 18 hits and three
// super cells finishes within the 312 cycles reported for the FPGA version,
// and that each mechanism happened: empty event, no super cell, 1, 2 and 3
// super cells, super-cell overflow, and output back-pressure.
module tb_iterative_retina_top;
  import retina_pkg::*;
  import retina_ref_pkg::*;

  localparam int unsigned M = N_TH0, K = N_CURV, MT = MAX_TRACKS;
  localparam int C_ORG = -int'(C_STEP2 * N_CURV * N_CURV / 2);
  // first-iteration threshold; some events use a stricter one
  localparam int THRESH = 1300, THRESH_HI = 1450;
  int thr = THRESH;
  localparam int LAT_LIMIT = 312;
  // layer radii in 1/16 cm; the innermost and outermost (20 cm, 115 cm) are
  // from the tracker description, the middle four are spaced in between
  localparam int LAYER_R [6] = '{320, 560, 800, 1088, 1408, 1840};

  logic clk = 0, rst_n = 0;
  logic hit_wr_en = 0;
  hit_idx_t hit_wr_addr = '0;
  hit_t hit_wr_data = '0;
  logic ev_start = 0, ev_ready;
  hit_idx_t ev_nhits = '0;
  theta_t cfg_sector_th0 = '0;
  sum_t cfg_thresh1 = sum_t'(THRESH);
  logic trk_valid, trk_ready = 1, trk_last;
  track_t trk;
  logic ev_done, ev_overflow;
  logic [$clog2(MT+1)-1:0] ev_ntracks;

  int checks = 0, failures = 0;
  int n_empty = 0, n_super_hist [MT+1], n_overflow = 0, n_stall = 0;
  int n_single = 0, n_single_found = 0, max_lat = 0, n_lat_checked = 0;

  always #5 clk = ~clk;

  iterative_retina_top dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 12) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference search
  int ref_n, ref_th [MT], ref_c [MT], ref_w [MT], ref_mask [MT];
  bit ref_ovf;

  task automatic reference(input event_t ev, input int sec);
    int sup [MT], ns, s, m, k, best, bi, sm, mk, o_th, o_c, nov;
    int coarse [M*K];
    ns = 0; nov = 0;
    for (int i = 0; i < int'(M * K); i++) begin
      m = i / int'(K); k = i % int'(K);
      ref_cell(ev, sec + m * int'(TH0_STEP2 * M) + int'(TH0_STEP2 * M) / 2,
               C_ORG + k * int'(C_STEP2 * K) + int'(C_STEP2 * K) / 2,
               SIGMA_SHIFT1, HIT_W_MIN, sm, mk);
      coarse[i] = sm;
      if (sm >= thr) nov++;
    end
    // super cells: the strongest over threshold, at most MT of them
    ref_ovf = nov > int'(MT);
    ns = ref_ovf ? int'(MT) : nov;
    for (int t = 0; t < ns; t++) begin
      best = -1; bi = 0;
      for (int i = 0; i < int'(M * K); i++)
        if (coarse[i] >= thr && coarse[i] > best) begin best = coarse[i]; bi = i; end
      sup[t] = bi;
      coarse[bi] = -1;
    end
    ref_n = (ev.n == 0) ? 0 : ns;
    if (ev.n == 0) ref_ovf = 0;
    for (int t = 0; t < ref_n; t++) begin
      o_th = sec + (sup[t] / int'(K)) * int'(TH0_STEP2 * M);
      o_c  = C_ORG + (sup[t] % int'(K)) * int'(C_STEP2 * K);
      best = -1; bi = 0;
      for (int i = 0; i < int'(M * K); i++) begin
        ref_cell(ev, o_th + (i / int'(K)) * int'(TH0_STEP2) + int'(TH0_STEP2) / 2,
                 o_c + (i % int'(K)) * int'(C_STEP2) + int'(C_STEP2) / 2,
                 SIGMA_SHIFT2, HIT_W_MIN, sm, mk);
        if (sm > best) begin best = sm; bi = i; ref_mask[t] = mk; end
      end
      ref_th[t] = o_th + (bi / int'(K)) * int'(TH0_STEP2) + int'(TH0_STEP2) / 2;
      ref_c[t]  = o_c + (bi % int'(K)) * int'(C_STEP2) + int'(C_STEP2) / 2;
      ref_w[t]  = best;
    end
  endtask

  initial begin
    event_t ev;
    int sec, ntrk, nnoise, tth [4], tc [4], lat, got, bp;
    for (int i = 0; i <= int'(MT); i++) n_super_hist[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int e = 0; e < 120; e++) begin
      // one of the ten sectors, theta0 edges at -pi + s*2pi/10 (in 1/64 crad)
      sec = -20106 + int'($urandom_range(9)) * 4021;
      case (e % 8)
        0: begin ntrk = 0; nnoise = 0; end                        // empty event
        1: begin ntrk = 0; nnoise = $urandom_range(5, 1); end     // noise only
        2, 3: begin ntrk = 1; nnoise = 0; end
        4: begin ntrk = 2; nnoise = $urandom_range(4); end
        5: begin ntrk = 3; nnoise = 0; end                        // 18 hits
        6: begin ntrk = 1; nnoise = $urandom_range(6); end
        default: begin ntrk = 2; nnoise = 0; end
      endcase
      ev.n = 0;
      for (int t = 0; t < ntrk; t++) begin
        tth[t] = sec + 200 + int'($urandom_range(3600));
        tc[t]  = C_ORG + 300 + int'($urandom_range(9400));
        for (int l = 0; l < 6; l++) begin
          ev.r[ev.n]  = LAYER_R[l];
          ev.th[ev.n] = ref_d(tth[t], tc[t], LAYER_R[l], 0) + int'($urandom_range(16)) - 8;
          ev.n++;
        end
      end
      for (int j = 0; j < nnoise && ev.n < int'(MAX_HITS); j++) begin
        ev.r[ev.n]  = LAYER_R[$urandom_range(5)];
        ev.th[ev.n] = sec + int'($urandom_range(4000));
        ev.n++;
      end
      // shuffle the hit order
      for (int i = ev.n - 1; i > 0; i--) begin
        int j, tr, tt;
        j = $urandom_range(i);
        tr = ev.r[i]; ev.r[i] = ev.r[j]; ev.r[j] = tr;
        tt = ev.th[i]; ev.th[i] = ev.th[j]; ev.th[j] = tt;
      end
      thr = (e % 8 == 3) ? THRESH_HI : THRESH;
      reference(ev, sec);

      // load
      wait (ev_ready);
      for (int i = 0; i < ev.n; i++) begin
        @(negedge clk);
        hit_wr_en = 1; hit_wr_addr = hit_idx_t'(i);
        hit_wr_data.r = r_t'(ev.r[i]); hit_wr_data.theta = theta_t'(ev.th[i]);
      end
      @(negedge clk);
      hit_wr_en = 0;
      ev_start = 1; ev_nhits = hit_idx_t'(ev.n); cfg_sector_th0 = theta_t'(sec);
      cfg_thresh1 = sum_t'(thr);
      bp = (e % 3 == 2);
      lat = 0;
      got = 0;
      @(negedge clk) ev_start = 0;
      while (!ev_done && lat < 5000) begin
        trk_ready = bp ? 1'($urandom_range(1)) : 1'b1;
        #1;
        if (trk_valid && !trk_ready) n_stall++;
        if (trk_valid && trk_ready) begin
          if (got < ref_n)
            check(int'(trk.theta0) == ref_th[got] && int'(trk.curv) == ref_c[got] &&
                  int'(trk.weight) == ref_w[got] && int'(trk.hits) == ref_mask[got] &&
                  trk_last == (got == ref_n - 1),
                  $sformatf("event %0d track %0d: th0 %0d c %0d w %0d hits %h, expected %0d %0d %0d %h",
                            e, got, trk.theta0, trk.curv, trk.weight, trk.hits,
                            ref_th[got], ref_c[got], ref_w[got], ref_mask[got]));
          got++;
        end
        @(negedge clk);
        lat++;
      end
      trk_ready = 1;
      check(got == ref_n && int'(ev_ntracks) == ref_n && ev_overflow == ref_ovf,
            $sformatf("event %0d: %0d tracks (done says %0d, ovf %0d), expected %0d ovf %0d",
                      e, got, ev_ntracks, ev_overflow, ref_n, ref_ovf));
      if (ev.n == 0) n_empty++;
      else n_super_hist[ref_n]++;
      if (ref_ovf) n_overflow++;
      if (!bp) begin
        if (lat > max_lat) max_lat = lat;
        if (ev.n == int'(MAX_HITS) && ref_n == int'(MT)) begin
          n_lat_checked++;
          check(lat <= LAT_LIMIT, $sformatf("event %0d took %0d cycles", e, lat));
        end
      end
      // a lone track without noise must be found near its true parameters
      if (ntrk == 1 && nnoise == 0) begin
        bit found;
        found = 0;
        for (int t = 0; t < ref_n; t++)
          if ((ref_th[t] - tth[0]) <= 2 * int'(TH0_STEP2) && (tth[0] - ref_th[t]) <= 2 * int'(TH0_STEP2) &&
              (ref_c[t] - tc[0]) <= 10 * int'(C_STEP2) && (tc[0] - ref_c[t]) <= 10 * int'(C_STEP2))
            found = 1;
        n_single++;
        if (found) n_single_found++;
      end
    end
    $display("events: empty %0d, super cells 0/1/2/3: %0d/%0d/%0d/%0d, overflow %0d, stalls %0d",
             n_empty, n_super_hist[0], n_super_hist[1], n_super_hist[2], n_super_hist[3],
             n_overflow, n_stall);
    $display("lone tracks found %0d of %0d; longest event %0d cycles (%0d full events timed)",
             n_single_found, n_single, max_lat, n_lat_checked);
    check(n_empty > 0, "no empty event");
    for (int i = 0; i <= int'(MT); i++) check(n_super_hist[i] > 0, $sformatf("no event with %0d super cells", i));
    check(n_overflow > 0, "no super-cell overflow");
    check(n_stall > 0, "no output back-pressure");
    check(n_lat_checked > 0, "no full event timed");
    check(n_single > 0 && n_single_found * 10 >= n_single * 9, "lone tracks not found");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
