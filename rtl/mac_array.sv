// mac_array: SG_R x SG_C multiply-accumulate array for vector-matrix products.
//
// Computes y = W x + b for one input vector x (IN elements, Q8.8) and a
// weight matrix W (OUT rows, IN columns) held in on-chip memory. Each cycle
// the array multiplies an SG_C-element slice of x with an SG_R x SG_C tile of
// W and adds the SG_R row sums into SG_R accumulators; when the last input
// slice of an output tile has been added, those SG_R outputs are rounded,
// biased and stored. A product therefore takes
//   sum over output tiles of ceil(columns of the tile / SG_C)
// cycles from the start pulse to the done pulse (dense case:
// ceil(OUT/SG_R) * ceil(IN/SG_C)).
//
// With SPLIT > 0 the matrix is block diagonal: output rows below OUT/2 use
// input columns below SPLIT and the other rows use the columns from SPLIT up.
// The memory gate of the GRU uses this to produce W_in m and W_hn s in one
// pass over one array.
//
// The paper gives each GRU gate and the feature transformation an
// S_g x S_g (8x8 on the U200) multiply-accumulate array; the tiling order,
// the block-diagonal mode and the weight-loading port are this design's own.
// Weights and biases are written through the shared configuration bus
// (targets TGT_W and TGT_B, row/col addressing). x must stay stable while
// busy is high.
module mac_array
  import tgnn_pkg::*;
#(
  parameter int       IN    = 16,
  parameter int       OUT   = 16,
  parameter int       SG_R  = 8,
  parameter int       SG_C  = 8,
  parameter int       SPLIT = 0,
  parameter cfg_tgt_e TGT_W = CFG_W_R,
  parameter cfg_tgt_e TGT_B = CFG_B_R
) (
  input  logic clk,
  input  logic rst_n,
  input  cfg_t cfg,
  input  logic start,
  input  fix_t x [IN],
  output logic busy,
  output logic done,
  output fix_t y [OUT]
);

  localparam int NOT = (OUT + SG_R - 1) / SG_R;
  localparam int HALF = OUT / 2;

  fix_t w [OUT][IN];
  fix_t b [OUT];

  logic [$clog2(NOT+1)-1:0] ot;
  int unsigned              col;     // first column of the current slice
  acc_t                     acc [SG_R];

  // column range of the current output tile
  int unsigned lo, hi;
  always_comb begin
    int unsigned r0, r1;
    r0 = int'(ot) * SG_R;
    r1 = r0 + SG_R - 1;
    if (r1 >= OUT) r1 = OUT - 1;
    if (SPLIT == 0)        begin lo = 0;     hi = IN;    end
    else if (r1 < HALF)    begin lo = 0;     hi = SPLIT; end
    else if (r0 >= HALF)   begin lo = SPLIT; hi = IN;    end
    else                   begin lo = 0;     hi = IN;    end
  end

  // one tile of products, summed per row
  acc_t tile_sum [SG_R];
  always_comb begin
    for (int r = 0; r < SG_R; r++) begin
      int unsigned row;
      tile_sum[r] = '0;
      row = int'(ot) * SG_R + r;
      for (int c = 0; c < SG_C; c++) begin
        int unsigned cc;
        logic        use_it;
        cc = col + c;
        use_it = (row < OUT) && (cc < hi);
        if (SPLIT != 0 && row < OUT)
          use_it = use_it && ((row < HALF) ? (cc < SPLIT) : (cc >= SPLIT));
        if (use_it)
          tile_sum[r] = tile_sum[r] + fmul(w[row][cc], x[cc]);
      end
    end
  end

  logic last_slice;
  assign last_slice = (col + SG_C >= hi);

  always_ff @(posedge clk) begin
    if (cfg.we && cfg.tgt == TGT_W && int'(cfg.row) < OUT && int'(cfg.col) < IN)
      w[cfg.row][cfg.col] <= fix_t'(cfg.data[15:0]);
    if (cfg.we && cfg.tgt == TGT_B && int'(cfg.row) < OUT)
      b[cfg.row] <= fix_t'(cfg.data[15:0]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      ot   <= '0;
      col  <= 0;
      for (int r = 0; r < SG_R; r++) acc[r] <= '0;
      for (int o = 0; o < OUT; o++)  y[o]   <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          ot   <= '0;
          col  <= next_lo(0);
          for (int r = 0; r < SG_R; r++) acc[r] <= '0;
        end
      end else begin
        if (last_slice) begin
          for (int r = 0; r < SG_R; r++) begin
            int unsigned row;
            row = int'(ot) * SG_R + r;
            if (row < OUT)
              y[row] <= sat_add(sat_acc(acc[r] + tile_sum[r]), b[row]);
            acc[r] <= '0;
          end
          if (int'(ot) == NOT - 1) begin
            busy <= 1'b0;
            done <= 1'b1;
          end else begin
            ot  <= ot + 1'b1;
            col <= next_lo(int'(ot) + 1);
          end
        end else begin
          for (int r = 0; r < SG_R; r++) acc[r] <= acc[r] + tile_sum[r];
          col <= col + SG_C;
        end
      end
    end
  end

  // first column of output tile t
  function automatic int unsigned next_lo(input int t);
    int unsigned r0;
    r0 = t * SG_R;
    if (SPLIT != 0 && r0 >= HALF) return SPLIT;
    else                          return 0;
  endfunction

endmodule
