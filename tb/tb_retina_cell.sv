// Testbench of retina_cell: random cell positions, configurations and hit
// sets (some hits on the cell's own track, some random) are fed in; the sum
// and hit mask are compared with the reference model, and sum_valid must come
// exactly 4 cycles after the last hit.
module tb_retina_cell;
  import retina_pkg::*;
  import retina_ref_pkg::*;

  localparam int unsigned MI = 3, KI = 7;

  logic clk = 0, rst_n = 0;
  logic cfg_load = 0, hit_valid = 0, hit_last = 0;
  scan_cfg_t cfg = '0;
  hit_idx_t hit_idx = '0;
  hit_t hit = '0;
  sum_t sum;
  logic [MAX_HITS-1:0] hit_mask;
  logic sum_valid;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  retina_cell #(.M_IDX(MI), .K_IDX(KI)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    event_t ev;
    int th0s, cs, shift, exp_sum, exp_mask, lat;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int e = 0; e < 300; e++) begin
      @(negedge clk);
      cfg.th0_origin  = theta_t'($urandom_range(8000) - 4000);
      cfg.c_origin    = curv_t'($urandom_range(10000) - 5000);
      cfg.th0_step    = theta_t'($urandom_range(400, 20));
      cfg.c_step      = curv_t'($urandom_range(500, 10));
      cfg.sigma_shift = 4'($urandom_range(5));
      cfg_load = 1;
      @(negedge clk) cfg_load = 0;
      th0s  = int'(cfg.th0_origin) + int'(MI) * int'(cfg.th0_step) + (int'(cfg.th0_step) >>> 1);
      cs    = int'(cfg.c_origin) + int'(KI) * int'(cfg.c_step) + (int'(cfg.c_step) >>> 1);
      shift = int'(cfg.sigma_shift);
      ev.n = $urandom_range(MAX_HITS, 1);
      for (int i = 0; i < ev.n; i++) begin
        ev.r[i] = $urandom_range(1840, 320);             // 20 .. 115 cm
        if ($urandom_range(1)) // on the cell's track, plus spread
          ev.th[i] = ref_d(th0s, cs, ev.r[i], 0) + int'($urandom_range(200)) - 100;
        else
          ev.th[i] = th0s + int'($urandom_range(6000)) - 3000;
      end
      ref_cell(ev, th0s, cs, shift, HIT_W_MIN, exp_sum, exp_mask);
      // hits in a shuffled order exercise the slot addressing
      for (int i = 0; i < ev.n; i++) begin
        int s;
        s = (e % 2) ? (ev.n - 1 - i) : i;
        hit_valid = 1; hit_idx = hit_idx_t'(s);
        hit.r = r_t'(ev.r[s]); hit.theta = theta_t'(ev.th[s]);
        hit_last = (i == ev.n - 1);
        @(negedge clk);
      end
      hit_valid = 0; hit_last = 0;
      lat = 0;
      while (!sum_valid && lat < 20) begin
        @(negedge clk);
        lat++;
      end
      // lat counts negedges after the one that ended the last-hit cycle
      checks++;
      if (lat != 3) begin
        failures++;
        $display("event %0d: sum_valid after %0d cycles, expected 4", e, lat + 1);
      end
      checks++;
      if (int'(sum) != exp_sum || int'(hit_mask) != exp_mask) begin
        failures++;
        if (failures < 10)
          $display("event %0d: sum %0d mask %h, expected %0d %h", e, sum, hit_mask, exp_sum, exp_mask);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
