// tb_time_lut: self-checking test of time_lut.
//
// Loads 127 ascending random thresholds and a random 128 x 4 table, then
// looks up dt values below the first threshold, exactly on thresholds, just
// below them, between them and above the last. The expected interval is
// found here by a linear search; the expected vector is that table row.
// The result must be valid exactly one cycle after the request.
module tb_time_lut;
  import tgnn_pkg::*;

  localparam int ENT = 128, DIM = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  cfg_t cfg;
  logic req, vld;
  ts_t  dt;
  logic [6:0] idx;
  fix_t vec [DIM];

  time_lut #(.ENTRIES(ENT), .DIM(DIM), .TGT_THR(CFG_ET_THR), .TGT_VAL(CFG_ET_VAL)) dut (
    .clk, .rst_n, .cfg, .req, .dt, .vld, .idx, .vec);

  ts_t  thr [ENT-1];
  fix_t tab [ENT][DIM];

  task automatic wr(cfg_tgt_e t, int r, int c, logic [31:0] v);
    cfg.we = 1'b1; cfg.tgt = t; cfg.row = 16'(r); cfg.col = 16'(c); cfg.data = v;
    @(posedge clk); #1;
    cfg.we = 1'b0;
  endtask

  function automatic int ref_idx(ts_t d);
    int n = 0;
    for (int k = 0; k < ENT - 1; k++) if (d >= thr[k]) n++;
    return n;
  endfunction

  task automatic look(ts_t d);
    int e;
    e = ref_idx(d);
    dt = d; req = 1'b1;
    @(posedge clk); #1;
    req = 1'b0;
    checks++;
    if (!vld || int'(idx) != e) begin
      failures++; $display("dt=%0d idx=%0d vld=%0d exp %0d", d, idx, vld, e);
    end
    for (int j = 0; j < DIM; j++) begin
      checks++;
      if (vec[j] !== tab[e][j]) begin failures++; $display("dt=%0d vec[%0d] wrong", d, j); end
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ts_t t;
    cfg = '0; req = 1'b0; dt = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1; #1;
    // power-law-like spacing: small intervals near 0, wide ones later
    t = 0;
    for (int k = 0; k < ENT - 1; k++) begin
      t = t + 1 + $urandom_range(k * 4);
      thr[k] = t;
      wr(CFG_ET_THR, 0, k, t);
    end
    for (int e = 0; e < ENT; e++)
      for (int j = 0; j < DIM; j++) begin
        tab[e][j] = fix_t'($urandom);
        wr(CFG_ET_VAL, e, j, 32'($signed(tab[e][j])));
      end
    look(0);
    look(thr[ENT-2] + 1000);
    look(32'hffff_ffff);
    for (int n = 0; n < 60; n++) begin
      int k;
      k = $urandom_range(ENT - 2);
      look(thr[k]);
      look(thr[k] - 1);
      look($urandom_range(thr[ENT-2] + 10));
    end
    // no request, no valid
    @(posedge clk); #1;
    checks++;
    if (vld) begin failures++; $display("valid without request"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
