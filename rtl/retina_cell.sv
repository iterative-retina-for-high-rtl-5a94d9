// One Retina calculation cell, cell (m,k) of the M x K scan array.
//
// The cell stands for one track hypothesis (theta0_scan, c_scan) and computes
//   D_i   = theta_scan_i - theta_i,  theta_scan_i = c_scan * r_i + theta0_scan
//   w_i   = 255 * exp(-D_i^2 / (2 sigma^2))
//   Sum   = sum over the event's hits of w_i
// which are the paper's equations for Sum(m,k), with c = 0.6/Pt so that the
// linearised track model is theta = theta0 + c*r (theta in crad, r in cm).
//
// Structure (three steps as in the paper's cell diagram):
//   distance : hits arrive one per cycle; one multiplier computes c_scan*r_i
//              and D_i is stored in slot i of an 18-entry register file.
//   square & exp : after the last hit, 18 lookup tables (retina_exp_lut)
//              turn all stored distances into weights in parallel.
//   accumulate : one adder tree sums the 18 weights.
// Sharing one multiplier over the hits matches the one DSP per cell the paper
// reports; feeding the hits serially is this design's reading of that figure.
//
// Configuration: a cfg_load pulse latches the scanned region's origin and cell
// size; the cell places itself at the centre of bin (M_IDX, K_IDX) and forgets
// the previous event's distances. The cell also reports, for hit grouping,
// which hits have a weight of at least HIT_W_MIN (this design's choice).
//
// Timing: the hit with hit_last set enters in cycle t; sum, hit_mask and a
// one-cycle sum_valid pulse appear in cycle t+4 and hold until the next event.
module retina_cell
  import retina_pkg::*;
#(
  parameter int unsigned M_IDX  = 0,          // theta0 bin of this cell
  parameter int unsigned K_IDX  = 0,          // curvature bin of this cell
  parameter int unsigned N_HITS = MAX_HITS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_load,
  input  scan_cfg_t         cfg,
  input  logic              hit_valid,
  input  hit_idx_t          hit_idx,
  input  hit_t              hit,
  input  logic              hit_last,
  output sum_t              sum,
  output logic [N_HITS-1:0] hit_mask,
  output logic              sum_valid
);

  localparam int unsigned D_W    = THETA_W + 2;
  localparam int unsigned PROD_W = CURV_W + R_W + 1;

  theta_t     th0_scan;
  curv_t      c_scan;
  logic [3:0] sigma_shift;

  // Stage 1: the cell's single multiplier.
  logic signed [PROD_W-1:0] prod_s1;
  theta_t                   theta_s1;
  hit_idx_t                 idx_s1;
  logic                     v_s1, last_s1;

  // Stage 2: distance register file.
  logic signed [D_W-1:0] d_reg [N_HITS];
  logic [N_HITS-1:0]     d_valid;
  logic                  last_s2;

  // Stage 3: weights; stage 4: sum.
  weight_t w_lut [N_HITS];
  weight_t w_reg [N_HITS];
  logic    eval_s3;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      th0_scan    <= '0;
      c_scan      <= '0;
      sigma_shift <= '0;
    end else if (cfg_load) begin
      th0_scan    <= theta_t'(int'(cfg.th0_origin) + int'(M_IDX) * int'(cfg.th0_step)
                              + (int'(cfg.th0_step) >>> 1));
      c_scan      <= curv_t'(int'(cfg.c_origin) + int'(K_IDX) * int'(cfg.c_step)
                             + (int'(cfg.c_step) >>> 1));
      sigma_shift <= cfg.sigma_shift;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_s1    <= 1'b0;
      last_s1 <= 1'b0;
      last_s2 <= 1'b0;
      eval_s3 <= 1'b0;
      sum_valid <= 1'b0;
      d_valid <= '0;
    end else begin
      v_s1    <= hit_valid;
      last_s1 <= hit_valid && hit_last;
      last_s2 <= v_s1 && last_s1;
      eval_s3 <= last_s2;
      sum_valid <= eval_s3;
      if (cfg_load) begin
        d_valid <= '0;
      end else if (v_s1 && 32'(idx_s1) < N_HITS) begin
        d_valid[idx_s1] <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    prod_s1  <= PROD_W'(c_scan) * $signed({1'b0, hit.r});
    theta_s1 <= hit.theta;
    idx_s1   <= hit_idx;
    if (v_s1 && 32'(idx_s1) < N_HITS)
      d_reg[idx_s1] <= D_W'(th0_scan) + D_W'(prod_s1 >>> PROD_SHIFT) - D_W'(theta_s1);
  end

  for (genvar i = 0; i < N_HITS; i++) begin : g_exp
    retina_exp_lut #(.D_W(D_W)) u_exp (
      .d_in        (d_reg[i]),
      .sigma_shift (sigma_shift),
      .weight      (w_lut[i])
    );
  end

  always_ff @(posedge clk) begin
    if (last_s2) begin
      for (int i = 0; i < N_HITS; i++) w_reg[i] <= d_valid[i] ? w_lut[i] : '0;
    end
  end

  sum_t sum_c;
  logic [N_HITS-1:0] mask_c;
  always_comb begin
    sum_c = '0;
    for (int i = 0; i < N_HITS; i++) begin
      sum_c     = sum_c + sum_t'(w_reg[i]);
      mask_c[i] = w_reg[i] >= weight_t'(HIT_W_MIN);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum      <= '0;
      hit_mask <= '0;
    end else if (eval_s3) begin
      sum      <= sum_c;
      hit_mask <= mask_c;
    end
  end

endmodule
