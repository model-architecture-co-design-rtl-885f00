// tb_feature_aggregation_module: self-checking test of the FAM.
//
// D = 40 elements (not a multiple of S = 16), K = 6. For 30 random sets of
// weights and vectors and counts 0..6 the reference sum of alpha[k]*x[k]
// (full-precision products, one final rounding) must match exactly, and
// the pass must take cnt * ceil(40/16) = 3 * cnt cycles (one for cnt = 0).
module tb_feature_aggregation_module;
  import tgnn_pkg::*;
  localparam int D = 40, K = 6, S = 16, NSL = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done;
  logic [2:0] cnt;
  fix_t alpha [K];
  fix_t x [K][D];
  fix_t agg [D];

  feature_aggregation_module #(.D(D), .K(K), .S(S)) dut (.clk, .rst_n, .start, .cnt, .alpha,
    .x, .busy, .done, .agg);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; cnt = 0;
    repeat (3) @(posedge clk);
    rst_n = 1; #1;
    for (int trial = 0; trial < 30; trial++) begin
      int t0, lat, exp_lat;
      cnt = 3'(trial % (K + 1));
      for (int k = 0; k < K; k++) begin
        alpha[k] = fix_t'($urandom_range(256));
        for (int d = 0; d < D; d++) x[k][d] = fix_t'($urandom);
      end
      if (trial == 6) for (int d = 0; d < D; d++) begin
        for (int k = 0; k < K; k++) begin x[k][d] = 16'sh7fff; alpha[k] = 16'sd256; end
      end
      start = 1; @(posedge clk); #1; start = 0;
      t0 = $time;
      while (!done) begin @(posedge clk); #1; end
      lat = ($time - t0) / 10;
      exp_lat = (cnt == 0) ? 0 : int'(cnt) * NSL;
      checks++;
      if (lat != exp_lat) begin failures++; $display("trial %0d latency %0d exp %0d", trial, lat, exp_lat); end
      for (int d = 0; d < D; d++) begin
        longint s;
        fix_t   e;
        s = 0;
        for (int k = 0; k < int'(cnt); k++) s += longint'(alpha[k]) * longint'(x[k][d]);
        s = s >>> 8;
        e = (s > 32767) ? 16'sh7fff : (s < -32768) ? 16'sh8000 : fix_t'(s);
        checks++;
        if (agg[d] !== e) begin failures++; $display("trial %0d d %0d: %0d exp %0d", trial, d, agg[d], e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
