// tb_embedding_unit: self-checking test of the embedding unit.
//
// Small sizes: 6 stored neighbours, budget up to 3, vectors of 8, embedding
// of 6, FAM and FTM parallelism 4, 8 LUT intervals. The testbench plays the
// data loader (answers prefetches from a table of neighbour vectors after a
// random delay) and the memory update unit (offers the vertex's own vector
// late, after the prefetch). For 12 vertices the reference here computes
// the attention weights, the kept ids, the time term sum alpha*LUT(dt), the
// aggregation with the vertex's own vector and h = W_o agg + b_o + time term;
// prefetch ids and h must match exactly. It also checks that the prefetch
// request comes before the vertex's own memory is offered (the prefetch
// does not wait for the memory update).
module tb_embedding_unit;
  import tgnn_pkg::*;
  localparam int N = 6, K = 3, D = 8, E = 6, ENT = 8, SH = 4, NVX = 40;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  cfg_t cfg;
  logic start, idle, pf_req_valid, pf_req_ready, pf_rsp_valid;
  logic self_valid, self_ready, out_valid, out_ready;
  nbr_t nbr [N];
  ts_t  t_now;
  logic [1:0] budget, pf_cnt;
  vid_t pf_vid [K];
  fix_t pf_vec [K][D];
  fix_t self_vec [D];
  fix_t h [E];

  embedding_unit #(.N(N), .K(K), .D(D), .E(E), .S_FAM(4), .S_FTM(4), .ENTRIES(ENT),
                   .DT_SHIFT(SH)) dut (.clk, .rst_n, .cfg, .start, .idle, .nbr, .t_now, .budget,
    .pf_req_valid, .pf_req_ready, .pf_cnt, .pf_vid, .pf_rsp_valid, .pf_vec,
    .self_valid, .self_ready, .self_vec, .out_valid, .out_ready, .h);

  fix_t a [N];
  fix_t wt [N][N];
  fix_t wo [E][D];
  fix_t bo [E];
  ts_t  thr [ENT-1];
  fix_t lut [ENT][E];
  fix_t vec [NVX][D];

  function automatic fix_t rnd(int range);
    return fix_t'($signed($urandom_range(2 * range)) - range);
  endfunction
  function automatic fix_t sat(longint v);
    return (v > 32767) ? 16'sh7fff : (v < -32768) ? 16'sh8000 : fix_t'(v);
  endfunction

  task automatic wr(cfg_tgt_e t, int r, int c, logic [31:0] v);
    cfg.we = 1'b1; cfg.tgt = t; cfg.row = 16'(r); cfg.col = 16'(c); cfg.data = v;
    @(posedge clk); #1;
    cfg.we = 1'b0;
  endtask

  // reference results of the current vertex
  int   r_cnt;
  vid_t r_vid [K];
  fix_t r_h [E];

  task automatic reference(fix_t own [D]);
    fix_t dtf [N];
    fix_t lg [N];
    bit   tk [N];
    int   idx [K];
    longint e [K];
    longint esum, rec, s;
    fix_t al [K];
    fix_t agg [D];
    int nvalid;
    nvalid = 0;
    for (int j = 0; j < N; j++) begin
      longint d;
      d = nbr[j].valid ? (longint'(t_now - nbr[j].t) >> SH) : 0;
      dtf[j] = (d > 32767) ? 16'sh7fff : fix_t'(d);
      if (nbr[j].valid) nvalid++;
      tk[j] = 0;
    end
    for (int i = 0; i < N; i++) begin
      s = longint'(a[i]) * 256;
      for (int j = 0; j < N; j++) s += longint'(wt[i][j]) * dtf[j];
      lg[i] = sat(s >>> 8);
    end
    r_cnt = (int'(budget) < nvalid) ? int'(budget) : nvalid;
    for (int k = 0; k < r_cnt; k++) begin
      int b;
      b = -1;
      for (int j = 0; j < N; j++) if (nbr[j].valid && !tk[j] && (b < 0 || lg[j] > lg[b])) b = j;
      idx[k] = b; tk[b] = 1; r_vid[k] = nbr[b].vid;
    end
    esum = 0;
    for (int k = 0; k < r_cnt; k++) begin
      longint d, y;
      d = longint'(lg[idx[k]]) - lg[idx[0]];
      y = -((d * 369) >>> 8);
      e[k] = ((y >> 8) >= 17) ? 0 : ((65536 - (y & 255) * 128) >> (y >> 8));
      esum += e[k];
    end
    rec = (esum == 0) ? 0 : ((64'd1 << 32) / esum);
    for (int k = 0; k < r_cnt; k++) al[k] = fix_t'((e[k] * rec) >> 24);
    for (int d = 0; d < D; d++) begin
      s = 0;
      for (int k = 0; k < r_cnt; k++) s += longint'(al[k]) * vec[r_vid[k] % NVX][d];
      agg[d] = sat(longint'(sat(s >>> 8)) + own[d]);
    end
    for (int o = 0; o < E; o++) begin
      longint ts;
      ts = 0;
      for (int k = 0; k < r_cnt; k++) begin
        int en;
        en = 0;
        for (int q = 0; q < ENT - 1; q++) if (t_now - nbr[idx[k]].t >= thr[q]) en++;
        ts += longint'(al[k]) * lut[en][o];
      end
      s = 0;
      for (int d = 0; d < D; d++) s += longint'(wo[o][d]) * agg[d];
      r_h[o] = sat(longint'(sat(longint'(sat(s >>> 8)) + bo[o])) + sat(ts >>> 8));
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // prefetch responder
  bit pf_seen;
  initial begin
    pf_req_ready = 0; pf_rsp_valid = 0;
    for (int k = 0; k < K; k++) for (int d = 0; d < D; d++) pf_vec[k][d] = 0;
    forever begin
      @(posedge clk); #1;
      if (pf_req_valid) begin
        pf_req_ready = 1;
        @(posedge clk); #1;
        pf_req_ready = 0;
        pf_seen = 1;
        checks++;
        if (int'(pf_cnt) != r_cnt) begin failures++; $display("pf_cnt %0d exp %0d", pf_cnt, r_cnt); end
        for (int k = 0; k < int'(pf_cnt); k++) begin
          checks++;
          if (pf_vid[k] !== r_vid[k]) begin failures++; $display("pf_vid[%0d] %0d exp %0d", k, pf_vid[k], r_vid[k]); end
          for (int d = 0; d < D; d++) pf_vec[k][d] = vec[pf_vid[k] % NVX][d];
        end
        repeat ($urandom_range(5)) @(posedge clk);
        #1; pf_rsp_valid = 1;
        @(posedge clk); #1;
        pf_rsp_valid = 0;
      end
    end
  end

  initial begin
    ts_t t;
    fix_t own [D];
    cfg = '0; start = 0; t_now = 0; budget = 0; self_valid = 0; out_ready = 1;
    for (int d = 0; d < D; d++) self_vec[d] = 0;
    for (int j = 0; j < N; j++) nbr[j] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1; #1;
    for (int i = 0; i < N; i++) begin
      a[i] = rnd(400); wr(CFG_ATT_A, 0, i, 32'($signed(a[i])));
      for (int j = 0; j < N; j++) begin wt[i][j] = rnd(60); wr(CFG_ATT_W, i, j, 32'($signed(wt[i][j]))); end
    end
    for (int o = 0; o < E; o++) begin
      for (int d = 0; d < D; d++) begin wo[o][d] = rnd(200); wr(CFG_W_O, o, d, 32'($signed(wo[o][d]))); end
      bo[o] = rnd(100); wr(CFG_B_O, o, 0, 32'($signed(bo[o])));
    end
    t = 0;
    for (int k = 0; k < ENT - 1; k++) begin t += 1 + $urandom_range(2000); thr[k] = t; wr(CFG_ET_THR, 0, k, t); end
    for (int en = 0; en < ENT; en++)
      for (int o = 0; o < E; o++) begin lut[en][o] = rnd(300); wr(CFG_ET_VAL, en, o, 32'($signed(lut[en][o]))); end
    for (int v = 0; v < NVX; v++) for (int d = 0; d < D; d++) vec[v][d] = rnd(400);
    for (int trial = 0; trial < 12; trial++) begin
      t_now = 32'd50000 + 32'(trial * 1000);
      budget = 2'(1 + trial % K);
      for (int j = 0; j < N; j++) begin
        nbr[j].valid = (trial % 4 == 3) ? (j < 2) : 1'b1;
        nbr[j].vid = $urandom_range(NVX - 1);
        nbr[j].t = t_now - $urandom_range(15000);
      end
      for (int d = 0; d < D; d++) own[d] = rnd(300);
      reference(own);
      pf_seen = 0;
      start = 1; @(posedge clk); #1; start = 0;
      // offer the vertex's own vector only after the prefetch went out
      while (!pf_seen) begin @(posedge clk); #1; end
      repeat (3) @(posedge clk);
      #1; self_vec = own; self_valid = 1;
      while (!self_ready) begin @(posedge clk); #1; end
      @(posedge clk); #1; self_valid = 0;
      while (!out_valid) begin @(posedge clk); #1; end
      for (int o = 0; o < E; o++) begin
        checks++;
        if (h[o] !== r_h[o]) begin failures++; $display("trial %0d h[%0d]=%0d exp %0d", trial, o, h[o], r_h[o]); end
      end
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
