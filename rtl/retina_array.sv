// Array of M x K Retina calculation cells that scans one region of the
// (theta0, 0.6/Pt) parameter space in parallel.
//
// Every cell receives the same configuration and the same hit stream; cell
// (m,k) sits at theta0 bin m and curvature bin k of the configured region, and
// its result is sums[m*K + k]. With the Loop-200 default, M = 10 theta0 bins
// and K = 20 curvature bins give the paper's 200 cells. All sums are valid
// together (sum_valid, a one-cycle pulse) four cycles after the last hit.
module retina_array
  import retina_pkg::*;
#(
  parameter int unsigned M      = N_TH0,
  parameter int unsigned K      = N_CURV,
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
  output sum_t              sums      [M*K],
  output logic [N_HITS-1:0] hit_masks [M*K],
  output logic              sum_valid
);

  logic [M*K-1:0] valid_vec;

  for (genvar m = 0; m < M; m++) begin : g_th0
    for (genvar k = 0; k < K; k++) begin : g_curv
      retina_cell #(.M_IDX(m), .K_IDX(k), .N_HITS(N_HITS)) u_cell (
        .clk       (clk),
        .rst_n     (rst_n),
        .cfg_load  (cfg_load),
        .cfg       (cfg),
        .hit_valid (hit_valid),
        .hit_idx   (hit_idx),
        .hit       (hit),
        .hit_last  (hit_last),
        .sum       (sums[m*K + k]),
        .hit_mask  (hit_masks[m*K + k]),
        .sum_valid (valid_vec[m*K + k])
      );
    end
  end

  // All cells run in lock step; any one's valid is the array's.
  assign sum_valid = valid_vec[0];

  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
                               valid_vec == '0 || valid_vec == '1);

endmodule
