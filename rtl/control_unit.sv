// Control unit: the state machine that runs the Retina iterations of one event.
//
// Sequence per event, as in the paper: configure all cells for the whole
// sector at coarse granularity and run iteration 1; the sorting unit returns
// the super cells over threshold; for each of them (N times) reconfigure the
// cells to cover that super cell alone at M x K finer granularity, run
// iteration 2 and take the cell with the largest Sum as a track. When all
// iterations are done the tracks are sent out and the next event is taken.
//
// One iteration: cfg_load pulse (CFG), then the event's hits are read from the
// hit RAM, one per cycle (SCAN); the RAM's data reaches the array one cycle
// after the read, with arr_hit_valid/idx/last delayed to match. The unit then
// waits for the sorting unit's done (WAIT).
//
// The configuration sent to the cells is the region's origin and the cell
// size ("scan location coordinate and step length"). Region of iteration 1:
// theta0 from cfg_sector_th0 over M coarse bins of TH0_STEP2*M, curvature
// 0.6/Pt from C_MIN over K bins of C_STEP2*K. A super cell (m1,k1) becomes the
// region of iteration 2, with fine bins of TH0_STEP2 and C_STEP2. A track's
// parameters are the centre of its winning fine cell. Gaussian widths,
// step sizes and the output format are this design's choices.
//
// Handshakes: ev_start is taken when ev_ready is high; tracks leave on a
// valid/ready stream (trk_last marks the event's last track); ev_done pulses
// once per event with the track count and the super-cell overflow flag.
module control_unit
  import retina_pkg::*;
#(
  parameter int unsigned M            = N_TH0,
  parameter int unsigned K            = N_CURV,
  parameter int unsigned N_HITS       = MAX_HITS,
  parameter int unsigned MAX_TRK      = MAX_TRACKS,
  parameter int unsigned TH0_STEP_F   = TH0_STEP2,
  parameter int unsigned C_STEP_F     = C_STEP2,
  parameter int          C_ORIGIN     = -int'(C_STEP_F * K * K / 2),
  parameter int unsigned SIG_SHIFT_1  = SIGMA_SHIFT1,
  parameter int unsigned SIG_SHIFT_2  = SIGMA_SHIFT2
) (
  input  logic       clk,
  input  logic       rst_n,
  // event interface
  input  logic       ev_start,
  input  hit_idx_t   ev_nhits,
  output logic       ev_ready,
  input  theta_t     cfg_sector_th0,
  input  sum_t       cfg_thresh1,
  // hit RAM read port
  output logic       ram_rd_en,
  output hit_idx_t   ram_rd_addr,
  // cell array
  output logic       cfg_load,
  output scan_cfg_t  cfg,
  output logic       arr_hit_valid,
  output hit_idx_t   arr_hit_idx,
  output logic       arr_hit_last,
  input  logic [N_HITS-1:0] hit_masks [M*K],
  // sorting unit
  output logic       sort_mode_max,
  output sum_t       sort_threshold,
  input  logic       sort_done,
  input  logic [$clog2(MAX_TRK+1)-1:0] sort_n_super,
  input  cell_idx_t  sort_super_idx [MAX_TRK],
  input  logic       sort_overflow,
  input  cell_idx_t  sort_max_idx,
  input  sum_t       sort_max_val,
  // results (where the readout link connects)
  output logic       trk_valid,
  input  logic       trk_ready,
  output track_t     trk,
  output logic       trk_last,
  output logic       ev_done,
  output logic [$clog2(MAX_TRK+1)-1:0] ev_ntracks,
  output logic       ev_overflow
);

  localparam int unsigned CNT_W     = $clog2(MAX_TRK + 1);
  localparam int unsigned TH0_STEP_C = TH0_STEP_F * M;
  localparam int unsigned C_STEP_C   = C_STEP_F * K;

  typedef enum logic [2:0] {S_IDLE, S_CFG, S_SCAN, S_WAIT, S_OUT, S_DONE} state_e;
  state_e state;

  hit_idx_t   nhits, rd_ptr;
  logic       iter2;
  theta_t     sector_th0;
  sum_t       thresh1;
  logic [CNT_W-1:0] n_super, j, out_ptr;
  cell_idx_t  super_list [MAX_TRK];
  logic       overflow_q;
  track_t     tracks [MAX_TRK];

  // Region of iteration 2 for super cell s, and the track at fine cell f.
  function automatic scan_cfg_t fine_cfg(cell_idx_t s, theta_t th0_base);
    scan_cfg_t c;
    c.th0_origin  = theta_t'(int'(th0_base) + int'(32'(s) / K) * int'(TH0_STEP_C));
    c.c_origin    = curv_t'(C_ORIGIN + int'(32'(s) % K) * int'(C_STEP_C));
    c.th0_step    = theta_t'(TH0_STEP_F);
    c.c_step      = curv_t'(C_STEP_F);
    c.sigma_shift = 4'(SIG_SHIFT_2);
    return c;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      nhits         <= '0;
      rd_ptr        <= '0;
      iter2         <= 1'b0;
      sector_th0    <= '0;
      thresh1       <= '0;
      n_super       <= '0;
      j             <= '0;
      out_ptr       <= '0;
      overflow_q    <= 1'b0;
      cfg           <= '0;
      arr_hit_valid <= 1'b0;
      arr_hit_idx   <= '0;
      arr_hit_last  <= 1'b0;
      ev_done       <= 1'b0;
      ev_ntracks    <= '0;
      ev_overflow   <= 1'b0;
      for (int s = 0; s < int'(MAX_TRK); s++) begin
        super_list[s] <= '0;
        tracks[s]     <= '0;
      end
    end else begin
      arr_hit_valid <= 1'b0;
      arr_hit_last  <= 1'b0;
      ev_done       <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (ev_start) begin
            nhits      <= ev_nhits;
            sector_th0 <= cfg_sector_th0;
            thresh1    <= cfg_thresh1;
            iter2      <= 1'b0;
            n_super    <= '0;
            j          <= '0;
            overflow_q <= 1'b0;
            cfg.th0_origin  <= cfg_sector_th0;
            cfg.c_origin    <= curv_t'(C_ORIGIN);
            cfg.th0_step    <= theta_t'(TH0_STEP_C);
            cfg.c_step      <= curv_t'(C_STEP_C);
            cfg.sigma_shift <= 4'(SIG_SHIFT_1);
            state <= (ev_nhits == '0) ? S_DONE : S_CFG;
          end
        end
        S_CFG: begin
          rd_ptr <= '0;
          state  <= S_SCAN;
        end
        S_SCAN: begin
          arr_hit_valid <= 1'b1;
          arr_hit_idx   <= rd_ptr;
          arr_hit_last  <= (rd_ptr == nhits - 1'b1);
          rd_ptr        <= rd_ptr + 1'b1;
          if (rd_ptr == nhits - 1'b1) state <= S_WAIT;
        end
        S_WAIT: begin
          if (sort_done && !iter2) begin
            n_super    <= sort_n_super;
            overflow_q <= sort_overflow;
            for (int s = 0; s < int'(MAX_TRK); s++) super_list[s] <= sort_super_idx[s];
            if (sort_n_super == '0) begin
              state <= S_DONE;
            end else begin
              iter2 <= 1'b1;
              j     <= '0;
              cfg   <= fine_cfg(sort_super_idx[0], sector_th0);
              state <= S_CFG;
            end
          end else if (sort_done) begin
            tracks[j].theta0 <= theta_t'(int'(cfg.th0_origin)
                                         + int'(32'(sort_max_idx) / K) * int'(TH0_STEP_F)
                                         + int'(TH0_STEP_F / 2));
            tracks[j].curv   <= curv_t'(int'(cfg.c_origin)
                                        + int'(32'(sort_max_idx) % K) * int'(C_STEP_F)
                                        + int'(C_STEP_F / 2));
            tracks[j].weight <= sort_max_val;
            tracks[j].hits   <= MAX_HITS'(hit_masks[sort_max_idx]);
            j <= j + 1'b1;
            if (j + 1'b1 < n_super) begin
              cfg   <= fine_cfg(super_list[j + 1'b1], sector_th0);
              state <= S_CFG;
            end else begin
              out_ptr <= '0;
              state   <= S_OUT;
            end
          end
        end
        S_OUT: begin
          if (trk_ready) begin
            out_ptr <= out_ptr + 1'b1;
            if (out_ptr + 1'b1 == n_super) state <= S_DONE;
          end
        end
        S_DONE: begin
          ev_done     <= 1'b1;
          ev_ntracks  <= n_super;
          ev_overflow <= overflow_q;
          state       <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign ev_ready       = (state == S_IDLE);
  assign cfg_load       = (state == S_CFG);
  assign ram_rd_en      = (state == S_SCAN);
  assign ram_rd_addr    = rd_ptr;
  assign sort_mode_max  = iter2;
  assign sort_threshold = thresh1;
  assign trk_valid      = (state == S_OUT);
  assign trk            = tracks[out_ptr];
  assign trk_last       = (state == S_OUT) && (out_ptr + 1'b1 == n_super);

  a_start_when_ready: assert property (@(posedge clk) disable iff (!rst_n)
                                       ev_start |-> ev_ready)
    else $error("ev_start while the processor is busy");
  a_trk_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                 trk_valid && !trk_ready |=> trk_valid && $stable(trk))
    else $error("track stream changed before it was accepted");

endmodule
