// Testbench of retina_array at the full 10 x 20 size: for random events and
// scan regions every one of the 200 sums and hit masks is compared with the
// reference model of its cell (m,k) at sums[m*K+k]; sum_valid must come 4
// cycles after the last hit.
module tb_retina_array;
  import retina_pkg::*;
  import retina_ref_pkg::*;

  localparam int unsigned M = N_TH0, K = N_CURV;

  logic clk = 0, rst_n = 0;
  logic cfg_load = 0, hit_valid = 0, hit_last = 0;
  scan_cfg_t cfg = '0;
  hit_idx_t hit_idx = '0;
  hit_t hit = '0;
  sum_t sums [M*K];
  logic [MAX_HITS-1:0] hit_masks [M*K];
  logic sum_valid;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  retina_array dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    event_t ev;
    int th0s, cs, es, em, lat, bad;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int e = 0; e < 40; e++) begin
      @(negedge clk);
      cfg.th0_origin  = theta_t'($urandom_range(4000) - 2000);
      cfg.c_origin    = curv_t'(-5000 + int'($urandom_range(1000)));
      cfg.th0_step    = theta_t'((e % 2) ? 400 : 40);
      cfg.c_step      = curv_t'((e % 2) ? 500 : 25);
      cfg.sigma_shift = 4'((e % 2) ? 4 : 1);
      cfg_load = 1;
      @(negedge clk) cfg_load = 0;
      ev.n = $urandom_range(MAX_HITS, 1);
      for (int i = 0; i < ev.n; i++) begin
        int c0;
        c0 = int'(cfg.c_origin) + int'($urandom_range(K * int'(cfg.c_step)));
        ev.r[i]  = $urandom_range(1840, 320);
        ev.th[i] = ref_d(int'(cfg.th0_origin) + int'($urandom_range(M * int'(cfg.th0_step))),
                         c0, ev.r[i], 0);
      end
      for (int i = 0; i < ev.n; i++) begin
        hit_valid = 1; hit_idx = hit_idx_t'(i);
        hit.r = r_t'(ev.r[i]); hit.theta = theta_t'(ev.th[i]);
        hit_last = (i == ev.n - 1);
        @(negedge clk);
      end
      hit_valid = 0; hit_last = 0;
      lat = 0;
      while (!sum_valid && lat < 20) begin
        @(negedge clk);
        lat++;
      end
      checks++;
      if (lat != 3) begin
        failures++;
        $display("event %0d: sum_valid late (%0d)", e, lat + 1);
      end
      bad = 0;
      for (int m = 0; m < int'(M); m++)
        for (int k = 0; k < int'(K); k++) begin
          th0s = int'(cfg.th0_origin) + m * int'(cfg.th0_step) + (int'(cfg.th0_step) >>> 1);
          cs   = int'(cfg.c_origin) + k * int'(cfg.c_step) + (int'(cfg.c_step) >>> 1);
          ref_cell(ev, th0s, cs, int'(cfg.sigma_shift), HIT_W_MIN, es, em);
          checks++;
          if (int'(sums[m*K+k]) != es || int'(hit_masks[m*K+k]) != em) begin
            failures++;
            bad++;
            if (bad < 4) $display("event %0d cell (%0d,%0d): %0d/%h expected %0d/%h",
                                  e, m, k, sums[m*K+k], hit_masks[m*K+k], es, em);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
