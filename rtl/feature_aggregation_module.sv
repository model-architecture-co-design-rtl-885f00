// feature_aggregation_module (FAM): attention-weighted sum of neighbour
// vectors.
//
// After start it computes agg = sum over k < cnt of alpha[k] * x[k], where
// x[k] is the D-element vector (vertex memory followed by node features) of
// the k-th kept neighbour. S multipliers work per cycle on S consecutive
// elements of one neighbour and feed S accumulators; the pass runs neighbour
// by neighbour over ceil(D/S) slices, so it takes cnt * ceil(D/S) cycles and
// done pulses one cycle after the last slice. With cnt = 0 the result is 0.
// alpha and x must stay stable while busy.
//
// Following the paper: the FAM aggregates alpha(u) * s_u over the kept
// neighbours with a parallelism S_FAM (16 on the U200). This design's own:
// the slice order, the accumulator width and the rounding at the end.
module feature_aggregation_module
  import tgnn_pkg::*;
#(
  parameter int D = F_MEM + F_FEAT,
  parameter int K = KMAX,
  parameter int S = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  logic [$clog2(K+1)-1:0] cnt,
  input  fix_t alpha [K],
  input  fix_t x [K][D],
  output logic busy,
  output logic done,
  output fix_t agg [D]
);

  localparam int NSL = (D + S - 1) / S;

  acc_t acc [D];
  logic [$clog2(K+1)-1:0] k;
  logic [$clog2(NSL+1)-1:0] sl;
  logic [$clog2(K+1)-1:0] n;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; k <= '0; sl <= '0; n <= '0;
      for (int d = 0; d < D; d++) begin acc[d] <= '0; agg[d] <= '0; end
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          for (int d = 0; d < D; d++) acc[d] <= '0;
          k <= '0; sl <= '0; n <= cnt;
          if (cnt == 0) begin
            for (int d = 0; d < D; d++) agg[d] <= '0;
            done <= 1'b1;
          end else busy <= 1'b1;
        end
      end else begin
        for (int l = 0; l < S; l++) begin
          int unsigned d;
          d = int'(sl) * S + l;
          if (d < D) acc[d] <= acc[d] + fmul(alpha[k], x[k][d]);
        end
        if (int'(sl) == NSL - 1) begin
          sl <= '0;
          if (k == n - 1'b1) begin
            busy <= 1'b0;
            done <= 1'b1;
            for (int d = 0; d < D; d++) begin
              acc_t fin;
              fin = acc[d];
              if (d / S == NSL - 1) fin = fin + fmul(alpha[k], x[k][d]);
              agg[d] <= sat_acc(fin);
            end
          end else k <= k + 1'b1;
        end else sl <= sl + 1'b1;
      end
    end
  end

endmodule
