// Sorting unit: turns the array's M*K sums into the result of one iteration.
//
// First iteration (mode_max = 0): every cell whose Sum is at or above
// `threshold` is a super cell, i.e. a region to refine. The unit latches the
// over-threshold flags, then lists them by decreasing Sum, one per cycle, up
// to MAX_SUPER of them (the paper's limit of 3 tracks per sector event). If
// more cells were over threshold, `overflow` is set and the weakest are
// dropped. Listing by decreasing Sum, rather than in scan order, is this
// design's choice: neighbouring coarse cells of one track often all pass the
// threshold, and the strongest of them is the one most likely to contain it.
// Second iteration (mode_max = 1): the same comparator tree gives the cell
// with the largest Sum (ties go to the lower index).
// The sums must stay stable while the unit lists super cells; the cells hold
// them until their next evaluation.
//
// Timing: sum_valid in cycle t. Max mode: done in t+1. Threshold mode: flags
// in t+1, one super cell per cycle after that, done one cycle after the last
// (so done at t+2+n, n the number of super cells listed). Results hold until
// the next sum_valid.
module sorting_unit
  import retina_pkg::*;
#(
  parameter int unsigned N         = N_CELLS,
  parameter int unsigned MAX_SUPER = MAX_TRACKS
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         sum_valid,
  input  sum_t                         sums [N],
  input  logic                         mode_max,
  input  sum_t                         threshold,
  output logic                         done,
  output logic [$clog2(MAX_SUPER+1)-1:0] n_super,
  output cell_idx_t                    super_idx [MAX_SUPER],
  output logic                         overflow,
  output cell_idx_t                    max_idx,
  output sum_t                         max_val
);

  localparam int unsigned CNT_W = $clog2(MAX_SUPER + 1);
  localparam int unsigned P     = 1 << $clog2(N);

  // ---- one comparator tree serves both modes. Its key is {eligible, sum}:
  // in maximum mode every cell is eligible, in threshold mode only the cells
  // over threshold that have not been listed yet. Heap order: node i has
  // children 2i and 2i+1; on equal keys the lower index wins.
  logic [N-1:0] over;
  logic         picking;
  logic [SUM_W:0] tk [2*P];
  cell_idx_t      ti [2*P];
  always_comb begin
    for (int i = 0; i < int'(P); i++) begin
      if (i < int'(N)) tk[P+i] = {(mode_max || over[i]), sums[i]};
      else             tk[P+i] = '0;
      ti[P+i] = cell_idx_t'(i);
    end
    for (int i = int'(P) - 1; i >= 1; i--) begin
      if (tk[2*i+1] > tk[2*i]) begin
        tk[i] = tk[2*i+1];
        ti[i] = ti[2*i+1];
      end else begin
        tk[i] = tk[2*i];
        ti[i] = ti[2*i];
      end
    end
    tk[0] = '0;
    ti[0] = '0;
  end

  logic      found;
  cell_idx_t first;
  assign found = tk[1][SUM_W];
  assign first = ti[1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done     <= 1'b0;
      picking  <= 1'b0;
      over     <= '0;
      n_super  <= '0;
      overflow <= 1'b0;
      max_idx  <= '0;
      max_val  <= '0;
      for (int s = 0; s < int'(MAX_SUPER); s++) super_idx[s] <= '0;
    end else begin
      done <= 1'b0;
      if (sum_valid && mode_max) begin
        max_idx <= ti[1];
        max_val <= tk[1][SUM_W-1:0];
        done    <= 1'b1;
      end else if (sum_valid) begin
        for (int i = 0; i < int'(N); i++) over[i] <= sums[i] >= threshold;
        picking  <= 1'b1;
        n_super  <= '0;
        overflow <= 1'b0;
      end else if (picking) begin
        if (found && n_super < CNT_W'(MAX_SUPER)) begin
          super_idx[n_super] <= first;
          n_super            <= n_super + 1'b1;
          over[first]        <= 1'b0;
        end else begin
          picking  <= 1'b0;
          overflow <= found;
          done     <= 1'b1;
        end
      end
    end
  end

endmodule
