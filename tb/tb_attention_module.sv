// tb_attention_module: self-checking test of attention_module.
//
// Random a (10) and W_t (10 x 10) are loaded; then 40 random neighbour rows
// (some with empty slots) and budgets 1..6 are run. The reference here
// computes the logits a + W_t * dt, picks the top `budget` (ties to the
// lower list position), and applies the same base-2 exponent approximation
// and normalisation as the specification in the module header; kept ids,
// dt values and alpha must match exactly, alpha must sum to 1 within 2%, and
// the run must take 1 + 10 + kept + 4 cycles.
module tb_attention_module;
  import tgnn_pkg::*;
  localparam int N = 10, K = 6, SH = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, pruned = 0;

  cfg_t cfg;
  logic start, busy, done;
  nbr_t nbr [N];
  ts_t  t_now;
  logic [2:0] budget, sel_cnt;
  logic [3:0] sel_idx [K];
  vid_t sel_vid [K];
  ts_t  sel_dt [K];
  fix_t alpha [K];

  attention_module #(.N(N), .K(K), .DT_SHIFT(SH)) dut (.clk, .rst_n, .cfg, .start, .nbr,
    .t_now, .budget, .busy, .done, .sel_cnt, .sel_idx, .sel_vid, .sel_dt, .alpha);

  fix_t a [N];
  fix_t w [N][N];

  task automatic wr(cfg_tgt_e t, int r, int c, fix_t v);
    cfg.we = 1'b1; cfg.tgt = t; cfg.row = 16'(r); cfg.col = 16'(c); cfg.data = 32'($signed(v));
    @(posedge clk); #1;
    cfg.we = 1'b0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg = '0; start = 0; t_now = 0; budget = 0;
    for (int j = 0; j < N; j++) nbr[j] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1; #1;
    for (int i = 0; i < N; i++) begin
      a[i] = fix_t'($signed($urandom_range(1024)) - 512); wr(CFG_ATT_A, 0, i, a[i]);
      for (int j = 0; j < N; j++) begin
        w[i][j] = fix_t'($signed($urandom_range(128)) - 64); wr(CFG_ATT_W, i, j, w[i][j]);
      end
    end
    for (int trial = 0; trial < 40; trial++) begin
      fix_t dtf [N];
      fix_t lg [N];
      bit   tk [N];
      int   nvalid, ecnt, eidx [K], t0, lat;
      longint e [K];
      longint esum, rec;
      t_now = 32'd100000 + $urandom_range(100000);
      nvalid = 0;
      for (int j = 0; j < N; j++) begin
        nbr[j].valid = (trial % 5 == 4) ? (j < 3) : 1'b1;
        nbr[j].vid   = $urandom;
        nbr[j].t     = t_now - $urandom_range(trial % 2 ? 3000 : 90000);
        if (nbr[j].valid) nvalid++;
      end
      budget = 3'(1 + trial % K);
      // reference
      for (int j = 0; j < N; j++) begin
        longint d;
        d = nbr[j].valid ? (longint'(t_now - nbr[j].t) >> SH) : 0;
        dtf[j] = (d > 32767) ? 16'sh7fff : fix_t'(d);
      end
      for (int i = 0; i < N; i++) begin
        longint s;
        s = longint'(a[i]) * 256;
        for (int j = 0; j < N; j++) s += longint'(w[i][j]) * longint'(dtf[j]);
        s = s >>> 8;
        lg[i] = (s > 32767) ? 16'sh7fff : (s < -32768) ? 16'sh8000 : fix_t'(s);
        tk[i] = 0;
      end
      ecnt = (int'(budget) < nvalid) ? int'(budget) : nvalid;
      if (ecnt < nvalid) pruned++;
      for (int k = 0; k < ecnt; k++) begin
        int b;
        b = -1;
        for (int j = 0; j < N; j++)
          if (nbr[j].valid && !tk[j] && (b < 0 || lg[j] > lg[b])) b = j;
        eidx[k] = b; tk[b] = 1;
      end
      esum = 0;
      for (int k = 0; k < ecnt; k++) begin
        longint d, x, y, ip, fp;
        d  = longint'(lg[eidx[k]]) - longint'(lg[eidx[0]]);
        x  = (d * 369) >>> 8;
        y  = -x;
        ip = y >> 8; fp = y & 255;
        e[k] = (ip >= 17) ? 0 : ((65536 - fp * 128) >> ip);
        esum += e[k];
      end
      rec = (esum == 0) ? 0 : ((64'd1 << 32) / esum);
      // run
      start = 1; @(posedge clk); #1; start = 0;
      t0 = $time;
      while (!done) begin @(posedge clk); #1; end
      lat = ($time - t0) / 10;
      checks += 2;
      if (int'(sel_cnt) != ecnt) begin failures++; $display("trial %0d cnt %0d exp %0d", trial, sel_cnt, ecnt); end
      if (lat != 1 + N + ecnt + 4) begin failures++; $display("trial %0d latency %0d", trial, lat); end
      begin
        longint asum;
        asum = 0;
        for (int k = 0; k < ecnt; k++) begin
          fix_t ea;
          ea = fix_t'((e[k] * rec) >> 24);
          asum += alpha[k];
          checks += 3;
          if (sel_vid[k] !== nbr[eidx[k]].vid) begin failures++; $display("trial %0d k %0d vid", trial, k); end
          if (sel_dt[k] !== t_now - nbr[eidx[k]].t) begin failures++; $display("trial %0d k %0d dt", trial, k); end
          if (alpha[k] !== ea) begin failures++; $display("trial %0d k %0d alpha %0d exp %0d", trial, k, alpha[k], ea); end
        end
        if (ecnt > 0) begin
          checks++;
          if (asum < 250 || asum > 261) begin failures++; $display("trial %0d alpha sum %0d", trial, asum); end
        end
      end
    end
    checks++;
    if (pruned == 0) begin failures++; $display("pruning never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
