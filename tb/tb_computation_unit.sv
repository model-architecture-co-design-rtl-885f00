// tb_computation_unit: tests one CU on random jobs at reduced sizes
// (memory 8, edge features 4, node features 4, embedding 6, 4 stored
// neighbours, budget 2 of up to 3, 4x4 arrays, 8 LUT intervals).
//
// The GRU weight matrices are zero (biases and LUT rows random) so the new
// memory depends only on the old memory and dt; W_t is zero and a favours the
// newest neighbours. With budget 2 the two newest valid neighbours are kept;
// their softmax weights are computed here with the same exp/reciprocal
// steps the attention module documents. W_o, b_o and the EU LUT are random.
// The prefetch port is served from a table of neighbour rows after a random
// delay, and res_ready is random. Every result field is checked: new
// memories, messages, time, old neighbour rows passed through, embeddings.
// Also counted: prefetches with 0, 1 and 2 neighbours, and a result held
// while res_ready is low.
module tb_computation_unit;
  import tgnn_pkg::*;
  localparam int M = 8, FE = 4, FF = 4, E = 6, N = 4, K = 3, ENT = 8, SH = 4, NV = 10;
  localparam int FM = 2 * M + FE, D = M + FF, NJ = 24;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  cfg_t cfg;
  logic [1:0] budget;
  logic job_valid, job_ready, pf_req_valid, pf_req_ready, pf_rsp_valid, res_valid, res_ready;
  vid_t job_vid [2];
  ts_t  job_t;
  fix_t job_fe [FE];
  fix_t job_mail [2][FM];
  fix_t job_mem [2][M];
  ts_t  job_last [2];
  nbr_t job_nbr [2][N];
  fix_t job_feat [2][FF];
  logic [1:0] pf_cnt;
  vid_t pf_vid [K];
  fix_t pf_vec [K][D];
  vid_t res_vid [2];
  ts_t  res_t;
  fix_t res_mem [2][M];
  fix_t res_mail [2][FM];
  nbr_t res_nbr [2][N];
  fix_t res_h [2][E];

  computation_unit #(.M(M), .FE(FE), .FF(FF), .E(E), .N(N), .K(K), .SG(4), .S_FAM(4), .S_FTM(4),
                     .ENTRIES(ENT), .DT_SHIFT(SH)) dut (.*);

  fix_t br [M], bz [M], bn [2*M], bo [E];
  ts_t  mthr [ENT-1], ethr [ENT-1];
  fix_t mlut [ENT][3*M];
  fix_t elut [ENT][E];
  fix_t wo [E][D];
  fix_t nb_row [NV][D];          // what the prefetch port returns per vertex

  function automatic fix_t rnd(int range);
    return fix_t'($signed($urandom_range(2 * range)) - range);
  endfunction

  task automatic wr(cfg_tgt_e t, int r, int c, logic [31:0] v);
    cfg.we = 1'b1; cfg.tgt = t; cfg.row = 16'(r); cfg.col = 16'(c); cfg.data = v;
    @(posedge clk); #1;
    cfg.we = 1'b0;
  endtask

  function automatic int lut_idx(ts_t dt, ts_t thr [ENT-1]);
    int n;
    n = 0;
    for (int k = 0; k < ENT - 1; k++) if (dt >= thr[k]) n++;
    return n;
  endfunction

  // e^(-d) for d >= 0 in Q8.8, as the attention module computes it
  function automatic longint exp_neg(longint d);
    longint u, ip, fp;
    u  = (d * 369) >>> 8;
    ip = u >>> 8;
    fp = u & 255;
    if (ip > 16) return 0;
    return (65536 - fp * 128) >>> ip;
  endfunction

  // expected result of one job
  fix_t x_mem [2][M];
  fix_t x_h [2][E];
  int   x_pf [2];
  task automatic reference();
    for (int p = 0; p < 2; p++) begin
      int e;
      e = lut_idx(job_t - job_last[p], mthr);
      for (int i = 0; i < M; i++) begin
        fix_t r, z, n;
        r = hsigmoid(sat_add(br[i], mlut[e][i]));
        z = hsigmoid(sat_add(bz[i], mlut[e][M+i]));
        n = htanh(sat_add(sat_add(bn[i], mlut[e][2*M+i]), fmul_q(r, bn[M+i])));
        x_mem[p][i] = sat_add(n, fmul_q(z, sat_add(job_mem[p][i], -n)));
      end
    end
    for (int p = 0; p < 2; p++) begin
      int     sel [2];
      int     ns;
      longint ex [2], sum, recip;
      fix_t   alpha [2];
      fix_t   agg [D];
      acc_t   tsum [E];
      ns = 0;
      for (int j = 0; j < N; j++)
        if (job_nbr[p][j].valid && ns < int'(budget)) begin sel[ns] = j; ns++; end
      x_pf[p] = ns;
      // logits a_j: 512 - 256 j, all other terms zero; max is the first kept
      sum = 0;
      for (int s = 0; s < ns; s++) begin
        ex[s] = exp_neg(longint'((sel[s] - sel[0]) * 256));
        sum += ex[s];
      end
      recip = (ns > 0) ? (longint'(1) << 32) / sum : 0;
      for (int s = 0; s < ns; s++) alpha[s] = fix_t'((ex[s] * recip) >>> 24);
      for (int o = 0; o < E; o++) tsum[o] = 0;
      for (int d = 0; d < D; d++) begin
        acc_t a;
        a = 0;
        for (int s = 0; s < ns; s++) a += fmul(alpha[s], nb_row[int'(job_nbr[p][sel[s]].vid) % NV][d]);
        agg[d] = sat_add(sat_acc(a), (d < M) ? x_mem[p][d] : job_feat[p][d-M]);
      end
      for (int s = 0; s < ns; s++)
        for (int o = 0; o < E; o++)
          tsum[o] += fmul(alpha[s], elut[lut_idx(job_t - job_nbr[p][sel[s]].t, ethr)][o]);
      for (int o = 0; o < E; o++) begin
        acc_t a;
        a = 0;
        for (int d = 0; d < D; d++) a += fmul(wo[o][d], agg[d]);
        x_h[p][o] = sat_add(sat_add(sat_acc(a), bo[o]), sat_acc(tsum[o]));
      end
    end
  endtask

  int n_res = 0, n_hold = 0;
  int n_pfk [K+1];
  // prefetch server
  initial begin
    pf_req_ready = 0; pf_rsp_valid = 0;
    for (int k = 0; k < K; k++) for (int d = 0; d < D; d++) pf_vec[k][d] = 0;
    forever begin
      @(posedge clk); #1;
      pf_req_ready = ($urandom_range(1) == 1);
      if (pf_req_valid && pf_req_ready) begin
        int c;
        vid_t ids [K];
        c = int'(pf_cnt);
        ids = pf_vid;
        @(posedge clk); #1;
        pf_req_ready = 0;
        n_pfk[c]++;
        repeat ($urandom_range(6)) @(posedge clk);
        #1;
        for (int k = 0; k < K; k++) pf_vec[k] = nb_row[int'(ids[k]) % NV];
        pf_rsp_valid = 1;
        @(posedge clk); #1;
        pf_rsp_valid = 0;
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog: %0d results", n_res);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ts_t t;
    cfg = '0; budget = 2'd2; job_valid = 0; res_ready = 0; job_t = 0;
    for (int p = 0; p < 2; p++) begin
      job_vid[p] = 0; job_last[p] = 0;
      for (int i = 0; i < FM; i++) job_mail[p][i] = 0;
      for (int i = 0; i < M; i++) job_mem[p][i] = 0;
      for (int j = 0; j < N; j++) job_nbr[p][j] = '0;
      for (int i = 0; i < FF; i++) job_feat[p][i] = 0;
    end
    for (int i = 0; i < FE; i++) job_fe[i] = 0;
    for (int k = 0; k <= K; k++) n_pfk[k] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1; #1;
    for (int i = 0; i < M; i++)
      for (int j = 0; j < FM + M; j++) begin wr(CFG_W_R, i, j, 0); wr(CFG_W_Z, i, j, 0); end
    for (int i = 0; i < 2 * M; i++)
      for (int j = 0; j < FM + M; j++) wr(CFG_W_N, i, j, 0);
    for (int i = 0; i < M; i++) begin
      br[i] = rnd(200); wr(CFG_B_R, i, 0, 32'($signed(br[i])));
      bz[i] = rnd(200); wr(CFG_B_Z, i, 0, 32'($signed(bz[i])));
    end
    for (int i = 0; i < 2 * M; i++) begin bn[i] = rnd(200); wr(CFG_B_N, i, 0, 32'($signed(bn[i]))); end
    t = 0;
    for (int k = 0; k < ENT - 1; k++) begin t += 1 + $urandom_range(60); mthr[k] = t; wr(CFG_MT_THR, 0, k, t); end
    t = 0;
    for (int k = 0; k < ENT - 1; k++) begin t += 1 + $urandom_range(60); ethr[k] = t; wr(CFG_ET_THR, 0, k, t); end
    for (int e = 0; e < ENT; e++) begin
      for (int d = 0; d < 3 * M; d++) begin mlut[e][d] = rnd(300); wr(CFG_MT_VAL, e, d, 32'($signed(mlut[e][d]))); end
      for (int o = 0; o < E; o++) begin elut[e][o] = rnd(300); wr(CFG_ET_VAL, e, o, 32'($signed(elut[e][o]))); end
    end
    for (int i = 0; i < N; i++) begin
      wr(CFG_ATT_A, 0, i, 32'($signed(16'sd512 - 16'(i * 256))));
      for (int j = 0; j < N; j++) wr(CFG_ATT_W, i, j, 0);
    end
    for (int o = 0; o < E; o++) begin
      for (int d = 0; d < D; d++) begin wo[o][d] = rnd(100); wr(CFG_W_O, o, d, 32'($signed(wo[o][d]))); end
      bo[o] = rnd(200); wr(CFG_B_O, o, 0, 32'($signed(bo[o])));
    end
    for (int v = 0; v < NV; v++) for (int d = 0; d < D; d++) nb_row[v][d] = rnd(256);

    for (int n = 0; n < NJ; n++) begin
      job_t = 32'd1000 + 32'(n * 50);
      for (int p = 0; p < 2; p++) begin
        job_vid[p] = $urandom_range(NV - 1);
        job_last[p] = job_t - $urandom_range(400);
        for (int i = 0; i < FM; i++) job_mail[p][i] = rnd(256);
        for (int i = 0; i < M; i++) job_mem[p][i] = rnd(256);
        for (int j = 0; j < N; j++) begin
          job_nbr[p][j].valid = (n % 3 == 0) ? (p == 0 && j == 2) : ($urandom_range(3) != 0);
          job_nbr[p][j].vid = $urandom_range(NV - 1);
          job_nbr[p][j].t = job_t - 32'(j * 30) - $urandom_range(20);
        end
        for (int i = 0; i < FF; i++) job_feat[p][i] = rnd(256);
      end
      for (int i = 0; i < FE; i++) job_fe[i] = rnd(256);
      reference();
      job_valid = 1;
      do @(posedge clk); while (!job_ready);
      #1 job_valid = 0;
      forever begin
        @(posedge clk); #1;
        res_ready = ($urandom_range(2) != 0);
        if (res_valid && !res_ready) n_hold++;
        if (res_valid && res_ready) break;
      end
      // the result is taken at the coming edge; check it now
      begin
        bit bad_mail;
        checks += 6;
        if (res_vid != job_vid || res_t != job_t) begin failures++; $display("job %0d: vid/time", n); end
        if (res_mem != x_mem) begin failures++; $display("job %0d: new memory %0d vs %0d", n, res_mem[0][0], x_mem[0][0]); end
        bad_mail = 0;
        for (int p = 0; p < 2; p++) begin
          for (int j = 0; j < M; j++)
            if (res_mail[p][j] != x_mem[p][j] || res_mail[p][M+j] != x_mem[1-p][j]) bad_mail = 1;
          for (int j = 0; j < FE; j++) if (res_mail[p][2*M+j] != job_fe[j]) bad_mail = 1;
        end
        if (bad_mail) begin failures++; $display("job %0d: messages", n); end
        if (res_nbr != job_nbr) begin failures++; $display("job %0d: neighbour rows", n); end
        if (res_h[0] != x_h[0]) begin failures++; $display("job %0d: h_u %0d vs %0d (kept %0d)", n, res_h[0][0], x_h[0][0], x_pf[0]); end
        if (res_h[1] != x_h[1]) begin failures++; $display("job %0d: h_v %0d vs %0d (kept %0d)", n, res_h[1][0], x_h[1][0], x_pf[1]); end
      end
      @(posedge clk); #1 res_ready = 0;
      n_res++;
    end
    checks += 4;
    for (int k = 0; k <= 2; k++) if (n_pfk[k] == 0) begin failures++; $display("no prefetch of %0d rows", k); end
    if (n_hold == 0) begin failures++; $display("no result hold"); end
    $display("results %0d, prefetches of 0/1/2 rows %0d/%0d/%0d, holds %0d", n_res, n_pfk[0], n_pfk[1], n_pfk[2], n_hold);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
