// tb_mac_array: self-checking test of mac_array.
//
// Two arrays, a dense 12x20 one and a block-diagonal one (SPLIT = 12), get
// random weights and biases through the configuration bus, then several
// random input vectors. Each result is compared with a reference
// y = W x + b worked out here element by element, and the start-to-done
// time with the tile count (dense: ceil(12/8)*ceil(20/8) = 6 cycles; split:
// 3 + 1 = 4 cycles), plus the cycle of the done register.
module tb_mac_array;
  import tgnn_pkg::*;

  localparam int IN = 20, OUT = 12, SG = 8, SPLIT = 12;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  cfg_t cfg;
  logic start;
  fix_t x [IN];
  logic busy_d, done_d, busy_s, done_s;
  fix_t y_d [OUT];
  fix_t y_s [OUT];

  mac_array #(.IN(IN), .OUT(OUT), .SG_R(SG), .SG_C(SG), .SPLIT(0),
              .TGT_W(CFG_W_R), .TGT_B(CFG_B_R)) dut_d (
    .clk, .rst_n, .cfg, .start, .x, .busy(busy_d), .done(done_d), .y(y_d));
  mac_array #(.IN(IN), .OUT(OUT), .SG_R(SG), .SG_C(SG), .SPLIT(SPLIT),
              .TGT_W(CFG_W_N), .TGT_B(CFG_B_N)) dut_s (
    .clk, .rst_n, .cfg, .start, .x, .busy(busy_s), .done(done_s), .y(y_s));

  fix_t wd [OUT][IN];
  fix_t ws [OUT][IN];
  fix_t bd [OUT];
  fix_t bs [OUT];

  function automatic fix_t rnd(int range);
    return fix_t'($signed($urandom_range(2 * range)) - range);
  endfunction

  task automatic wr(cfg_tgt_e t, int r, int c, fix_t v);
    cfg.we = 1'b1; cfg.tgt = t; cfg.row = 16'(r); cfg.col = 16'(c); cfg.data = 32'($signed(v));
    @(posedge clk); #1;
    cfg.we = 1'b0;
  endtask

  function automatic fix_t ref_y(input fix_t w [OUT][IN], input fix_t b [OUT], int o, bit split);
    acc_t s;
    s = 0;
    for (int i = 0; i < IN; i++)
      if (!split || ((o < OUT / 2) == (i < SPLIT))) s += acc_t'(w[o][i]) * acc_t'(x[i]);
    return sat_add(sat_acc(s), b[o]);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, lat_d, lat_s;
    cfg = '0; start = 1'b0;
    for (int i = 0; i < IN; i++) x[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1; #1;
    for (int o = 0; o < OUT; o++) begin
      for (int i = 0; i < IN; i++) begin
        wd[o][i] = rnd(300); wr(CFG_W_R, o, i, wd[o][i]);
        ws[o][i] = rnd(300); wr(CFG_W_N, o, i, ws[o][i]);
      end
      bd[o] = rnd(200); wr(CFG_B_R, o, 0, bd[o]);
      bs[o] = rnd(200); wr(CFG_B_N, o, 0, bs[o]);
    end
    for (int trial = 0; trial < 6; trial++) begin
      for (int i = 0; i < IN; i++) x[i] = (trial == 5) ? 16'sh7f00 : rnd(600);
      start = 1'b1; @(posedge clk); #1; start = 1'b0;
      t0 = $time; lat_d = -1; lat_s = -1;
      while (lat_d < 0 || lat_s < 0) begin
        @(posedge clk); #1;
        if (done_d && lat_d < 0) lat_d = ($time - t0) / 10;
        if (done_s && lat_s < 0) lat_s = ($time - t0) / 10;
      end
      for (int o = 0; o < OUT; o++) begin
        checks += 2;
        if (y_d[o] !== ref_y(wd, bd, o, 0)) begin
          failures++; $display("dense y[%0d]=%0d exp %0d", o, y_d[o], ref_y(wd, bd, o, 0));
        end
        if (y_s[o] !== ref_y(ws, bs, o, 1)) begin
          failures++; $display("split y[%0d]=%0d exp %0d", o, y_s[o], ref_y(ws, bs, o, 1));
        end
      end
      checks += 2;
      if (lat_d != 6) begin failures++; $display("dense latency %0d", lat_d); end
      if (lat_s != 4) begin failures++; $display("split latency %0d", lat_s); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
