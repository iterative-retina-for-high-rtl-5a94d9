// Iterative Retina track finder for one tracker sector (top level).
//
// Finds up to MAX_TRK curved tracks among the hits of one sector event and
// returns, for each, its initial angle theta0, its curvature 0.6/Pt and the
// hits grouped with it. The parameter space (theta0, 0.6/Pt) is scanned twice
// by the same M x K array of Retina cells: first the whole sector at coarse
// granularity, then, once per super cell found over threshold, that super cell
// alone at M x K finer granularity. The default Loop-200 configuration (10 x 20
// cells) thus reaches a 100 x 400 resolution with 200 cells.
//
// Blocks: hit_ram (event hits), retina_array (M*K cells), sorting_unit
// (threshold / maximum), control_unit (iteration state machine). The readout
// link to a PC (IPbus in the paper) is not part of this RTL: the result stream
// trk_* and the ev_done summary are where it connects.
//
// Use: write the event's hits into slots 0..n-1 (hit_wr_*), then pulse
// ev_start with ev_nhits = n while ev_ready is high. cfg_sector_th0 is the
// lower theta0 edge of this sector, cfg_thresh1 the first-iteration threshold.
// Hits must not be rewritten until ev_done. Latency with 18 hits and three
// super cells is about 130 cycles (the paper reports 312 cycles at 200 MHz
// for its FPGA implementation).
module iterative_retina_top
  import retina_pkg::*;
#(
  parameter int unsigned M       = N_TH0,
  parameter int unsigned K       = N_CURV,
  parameter int unsigned N_HITS  = MAX_HITS,
  parameter int unsigned MAX_TRK = MAX_TRACKS
) (
  input  logic     clk,
  input  logic     rst_n,
  // hit loading
  input  logic     hit_wr_en,
  input  hit_idx_t hit_wr_addr,
  input  hit_t     hit_wr_data,
  // event control and fixed configuration
  input  logic     ev_start,
  input  hit_idx_t ev_nhits,
  output logic     ev_ready,
  input  theta_t   cfg_sector_th0,
  input  sum_t     cfg_thresh1,
  // results
  output logic     trk_valid,
  input  logic     trk_ready,
  output track_t   trk,
  output logic     trk_last,
  output logic     ev_done,
  output logic [$clog2(MAX_TRK+1)-1:0] ev_ntracks,
  output logic     ev_overflow
);

  localparam int unsigned CNT_W = $clog2(MAX_TRK + 1);

  logic      ram_rd_en;
  hit_idx_t  ram_rd_addr;
  hit_t      ram_rd_data;

  logic      cfg_load;
  scan_cfg_t cfg;
  logic      arr_hit_valid, arr_hit_last;
  hit_idx_t  arr_hit_idx;
  sum_t      sums      [M*K];
  logic [N_HITS-1:0] hit_masks [M*K];
  logic      sum_valid;

  logic      sort_mode_max;
  sum_t      sort_threshold;
  logic      sort_done;
  logic [CNT_W-1:0] sort_n_super;
  cell_idx_t sort_super_idx [MAX_TRK];
  logic      sort_overflow;
  cell_idx_t sort_max_idx;
  sum_t      sort_max_val;

  hit_ram #(.DEPTH(N_HITS)) u_hit_ram (
    .clk     (clk),
    .wr_en   (hit_wr_en),
    .wr_addr (hit_wr_addr),
    .wr_data (hit_wr_data),
    .rd_en   (ram_rd_en),
    .rd_addr (ram_rd_addr),
    .rd_data (ram_rd_data)
  );

  retina_array #(.M(M), .K(K), .N_HITS(N_HITS)) u_array (
    .clk       (clk),
    .rst_n     (rst_n),
    .cfg_load  (cfg_load),
    .cfg       (cfg),
    .hit_valid (arr_hit_valid),
    .hit_idx   (arr_hit_idx),
    .hit       (ram_rd_data),
    .hit_last  (arr_hit_last),
    .sums      (sums),
    .hit_masks (hit_masks),
    .sum_valid (sum_valid)
  );

  sorting_unit #(.N(M*K), .MAX_SUPER(MAX_TRK)) u_sort (
    .clk       (clk),
    .rst_n     (rst_n),
    .sum_valid (sum_valid),
    .sums      (sums),
    .mode_max  (sort_mode_max),
    .threshold (sort_threshold),
    .done      (sort_done),
    .n_super   (sort_n_super),
    .super_idx (sort_super_idx),
    .overflow  (sort_overflow),
    .max_idx   (sort_max_idx),
    .max_val   (sort_max_val)
  );

  control_unit #(.M(M), .K(K), .N_HITS(N_HITS), .MAX_TRK(MAX_TRK)) u_ctrl (
    .clk            (clk),
    .rst_n          (rst_n),
    .ev_start       (ev_start),
    .ev_nhits       (ev_nhits),
    .ev_ready       (ev_ready),
    .cfg_sector_th0 (cfg_sector_th0),
    .cfg_thresh1    (cfg_thresh1),
    .ram_rd_en      (ram_rd_en),
    .ram_rd_addr    (ram_rd_addr),
    .cfg_load       (cfg_load),
    .cfg            (cfg),
    .arr_hit_valid  (arr_hit_valid),
    .arr_hit_idx    (arr_hit_idx),
    .arr_hit_last   (arr_hit_last),
    .hit_masks      (hit_masks),
    .sort_mode_max  (sort_mode_max),
    .sort_threshold (sort_threshold),
    .sort_done      (sort_done),
    .sort_n_super   (sort_n_super),
    .sort_super_idx (sort_super_idx),
    .sort_overflow  (sort_overflow),
    .sort_max_idx   (sort_max_idx),
    .sort_max_val   (sort_max_val),
    .trk_valid      (trk_valid),
    .trk_ready      (trk_ready),
    .trk            (trk),
    .trk_last       (trk_last),
    .ev_done        (ev_done),
    .ev_ntracks     (ev_ntracks),
    .ev_overflow    (ev_overflow)
  );

endmodule
