// tb_tgnn_top: end-to-end test of the accelerator at reduced sizes.
//
// Sizes: memory 8, edge features 4, node features 4, embedding 6, 4 stored
// neighbours, budget 1 (of up to 3), 2 CUs with 4x4 arrays, 8 LUT
// intervals, batches of at most 8 edges, 16 cache lines. The external
// tables are the behavioural tb_table_mem with 3-cycle reads and random
// write back-pressure.
//
// Learned tables are chosen so that an exact reference is short: all GRU
// weight matrices are zero (the GRU then depends on the old memory, dt and
// the biases and LUT rows, which are random), W_t is zero and a favours the
// newest neighbour, so with budget 1 the kept neighbour is the newest one
// with weight exactly 1; W_o, b_o and the EU LUT are random. The reference
// processes each batch against the tables as they were before the batch,
// applies the records in edge order (later ones win) and checks every
// embedding and, after each batch, every row of the memory, mailbox and
// neighbour tables.
//
// Edges come in 4 batches: 5 edges (odd: a half-empty last round), 8 edges,
// then 10 edges that the 8-edge limit splits into 8 + 2. Mechanisms counted,
// each must occur: prefetches, pruning (more valid neighbours than the
// budget), updater invalidation of a stale line, a skipped commit window,
// a partial round, results from both CUs in one round, a batch closed by the
// size limit, write back-pressure, edge input stalled during a drain.
module tb_tgnn_top;
  import tgnn_pkg::*;
  localparam int M = 8, FE = 4, FF = 4, E = 6, N = 4, K = 3, NCU = 2, ENT = 8, SH = 4;
  localparam int BMAX = 8, NV = 12, FM = 2 * M + FE, D = M + FF, NE = 23;
  localparam int NW = 3 + (FE + 1) / 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  cfg_t cfg;
  logic [1:0] budget;
  logic s_valid, s_ready, s_last, batch_done;
  logic [31:0] s_data;
  logic vm_req_valid, vm_req_ready, vm_rsp_valid, ml_req_valid, ml_req_ready, ml_rsp_valid;
  logic nb_req_valid, nb_req_ready, nb_rsp_valid, ft_req_valid, ft_req_ready, ft_rsp_valid;
  vid_t vm_req_addr, ml_req_addr, nb_req_addr, ft_req_addr, tw_vid;
  fix_t vm_rsp_mem [M];
  ts_t  vm_rsp_t, tw_t;
  fix_t ml_rsp [FM];
  nbr_t nb_rsp [N];
  fix_t ft_rsp [FF];
  logic tw_valid, tw_ready;
  fix_t tw_mem [M];
  fix_t tw_mail [FM];
  nbr_t tw_nbr [N];
  logic emb_valid [NCU];
  vid_t emb_vid [NCU][2];
  fix_t emb_h [NCU][2][E];

  tgnn_top #(.M(M), .FE(FE), .FF(FF), .E(E), .N(N), .K(K), .NCU(NCU), .SG(4), .S_FAM(4),
             .S_FTM(4), .ENTRIES(ENT), .DT_SHIFT(SH), .BATCH_MAX(BMAX), .LINES(16), .SCAN(3)) dut (
    .clk, .rst_n, .cfg, .budget, .s_valid, .s_ready, .s_data, .s_last,
    .vm_req_valid, .vm_req_ready, .vm_req_addr, .vm_rsp_valid, .vm_rsp_mem, .vm_rsp_t,
    .ml_req_valid, .ml_req_ready, .ml_req_addr, .ml_rsp_valid, .ml_rsp,
    .nb_req_valid, .nb_req_ready, .nb_req_addr, .nb_rsp_valid, .nb_rsp,
    .ft_req_valid, .ft_req_ready, .ft_req_addr, .ft_rsp_valid, .ft_rsp,
    .tw_valid, .tw_ready, .tw_vid, .tw_mem, .tw_t, .tw_mail, .tw_nbr,
    .emb_valid, .emb_vid, .emb_h, .batch_done);

  tb_table_mem #(.M(M), .FE(FE), .FF(FF), .N(N), .NV(NV), .LAT(3), .BUSY_WR(1'b1)) mem (
    .clk, .rst_n, .vm_req_valid, .vm_req_ready, .vm_req_addr, .vm_rsp_valid, .vm_rsp_mem, .vm_rsp_t,
    .ml_req_valid, .ml_req_ready, .ml_req_addr, .ml_rsp_valid, .ml_rsp,
    .nb_req_valid, .nb_req_ready, .nb_req_addr, .nb_rsp_valid, .nb_rsp,
    .ft_req_valid, .ft_req_ready, .ft_req_addr, .ft_rsp_valid, .ft_rsp,
    .tw_valid, .tw_ready, .tw_vid, .tw_mem, .tw_t, .tw_mail, .tw_nbr);

  // learned values
  fix_t br [M], bz [M], bn [2*M], bo [E];
  ts_t  mthr [ENT-1], ethr [ENT-1];
  fix_t mlut [ENT][3*M];
  fix_t elut [ENT][E];
  fix_t wo [E][D];

  // edges
  vid_t eu [NE], ev [NE];
  ts_t  et [NE];
  fix_t ef [NE][FE];
  bit   elast [NE];

  // reference tables
  fix_t r_mem [NV][M];
  ts_t  r_last [NV];
  fix_t r_mail [NV][FM];
  nbr_t r_nbr [NV][N];
  fix_t r_feat [NV][FF];
  fix_t exp_h [NE][2][E];

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

  // GRU with zero weight matrices
  task automatic gru(input fix_t s [M], input ts_t dt, output fix_t o [M]);
    int e;
    e = lut_idx(dt, mthr);
    for (int i = 0; i < M; i++) begin
      fix_t r, z, n;
      r = hsigmoid(sat_add(br[i], mlut[e][i]));
      z = hsigmoid(sat_add(bz[i], mlut[e][M+i]));
      n = htanh(sat_add(sat_add(bn[i], mlut[e][2*M+i]), fmul_q(r, bn[M+i])));
      o[i] = sat_add(n, fmul_q(z, sat_add(s[i], -n)));
    end
  endtask

  // one batch of edges [b0, b1) against the tables as they are now
  task automatic ref_batch(int b0, int b1);
    fix_t o_mem [NV][M];
    ts_t  o_last [NV];
    nbr_t o_nbr [NV][N];
    o_mem = r_mem; o_last = r_last; o_nbr = r_nbr;
    for (int i = b0; i < b1; i++) begin
      int   vx [2];
      fix_t sn [2][M];
      vx[0] = int'(eu[i]); vx[1] = int'(ev[i]);
      for (int p = 0; p < 2; p++) gru(o_mem[vx[p]], et[i] - o_last[vx[p]], sn[p]);
      for (int p = 0; p < 2; p++) begin
        fix_t agg [D];
        fix_t tt;
        int   z;
        bit   kept;
        kept = o_nbr[vx[p]][0].valid;
        z = int'(o_nbr[vx[p]][0].vid);
        tt = kept ? elut[lut_idx(et[i] - o_nbr[vx[p]][0].t, ethr)][0] : '0;
        for (int d = 0; d < D; d++) begin
          fix_t own, nb;
          own = (d < M) ? sn[p][d] : r_feat[vx[p]][d-M];
          nb  = !kept ? 16'sd0 : (d < M) ? o_mem[z][d] : r_feat[z][d-M];
          agg[d] = sat_add(nb, own);
        end
        for (int o = 0; o < E; o++) begin
          acc_t s;
          s = 0;
          for (int d = 0; d < D; d++) s += fmul(wo[o][d], agg[d]);
          tt = kept ? elut[lut_idx(et[i] - o_nbr[vx[p]][0].t, ethr)][o] : '0;
          exp_h[i][p][o] = sat_add(sat_add(sat_acc(s), bo[o]), tt);
        end
      end
      for (int p = 0; p < 2; p++) begin
        r_mem[vx[p]]  = sn[p];
        r_last[vx[p]] = et[i];
        for (int j = 0; j < M; j++) begin r_mail[vx[p]][j] = sn[p][j]; r_mail[vx[p]][M+j] = sn[1-p][j]; end
        for (int j = 0; j < FE; j++) r_mail[vx[p]][2*M+j] = ef[i][j];
        r_nbr[vx[p]][0].valid = 1'b1;
        r_nbr[vx[p]][0].vid   = vid_t'(vx[1-p]);
        r_nbr[vx[p]][0].t     = et[i];
        for (int j = 1; j < N; j++) r_nbr[vx[p]][j] = o_nbr[vx[p]][j-1];
      end
    end
  endtask

  task automatic check_tables(int b);
    for (int v = 0; v < NV; v++) begin
      checks += 4;
      if (mem.mem[v] != r_mem[v])   begin failures++; $display("batch %0d: memory row %0d differs", b, v); end
      if (mem.last[v] != r_last[v]) begin failures++; $display("batch %0d: time of row %0d %0d exp %0d", b, v, mem.last[v], r_last[v]); end
      if (mem.mail[v] != r_mail[v]) begin failures++; $display("batch %0d: mailbox row %0d differs", b, v); end
      if (mem.nbr[v] != r_nbr[v])   begin failures++; $display("batch %0d: neighbour row %0d differs", b, v); end
    end
  endtask

  // mechanism counters
  int n_pf = 0, n_prune = 0, n_inv = 0, n_skip = 0, n_partial = 0, n_full = 0, n_bmax = 0;
  int n_bp = 0, n_drain_stall = 0, n_batches = 0, n_emb = 0, cyc = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    for (int c = 0; c < NCU; c++) if (dut.pf_rsp_valid[c]) n_pf++;
    if (dut.g_cu[0].u_cu.u_eu.u_am.done) begin
      int nv;
      nv = 0;
      for (int j = 0; j < N; j++) if (dut.g_cu[0].u_cu.u_eu.u_am.nb[j].valid) nv++;
      if (nv > int'(budget)) n_prune++;
    end
    for (int l = 0; l < 16; l++) if (dut.u_updater.hit[l] && dut.u_updater.flag[l]) n_inv++;
    if (dut.commit_en && !dut.u_updater.found && dut.u_updater.count != 0) n_skip++;
    if (dut.up_in_valid && dut.up_in_ready) begin
      if (dut.exp_n < NCU) n_partial++; else n_full++;
    end
    if (dut.disp && int'(dut.n_disp) + 1 == BMAX) n_bmax++;
    if (tw_valid && !tw_ready) n_bp++;
    if (dut.ph != 0 && dut.ep_valid) n_drain_stall++;
    if (batch_done) n_batches++;
  end

  // embeddings, in edge order
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NCU; c++) if (emb_valid[c]) begin
      for (int p = 0; p < 2; p++) begin
        checks += 2;
        if (emb_vid[c][p] != (p == 0 ? eu[n_emb] : ev[n_emb])) begin
          failures++; $display("embedding %0d.%0d for vertex %0d", n_emb, p, emb_vid[c][p]);
        end
        if (emb_h[c][p] != exp_h[n_emb][p]) begin
          failures++; $display("edge %0d endpoint %0d: embedding differs (%0d vs %0d)", n_emb, p,
                               emb_h[c][p][0], exp_h[n_emb][p][0]);
        end
      end
      n_emb++;
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog: %0d embeddings, %0d batches", n_emb, n_batches);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ts_t t;
    int bstart [5];
    int nb_ref;
    cfg = '0; budget = 2'd1; s_valid = 0; s_data = 0; s_last = 0;
    repeat (3) @(posedge clk);
    rst_n = 1; #1;
    // learned tables
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
    // tables before the first batch
    for (int v = 0; v < NV; v++) begin
      for (int i = 0; i < M; i++) r_mem[v][i] = rnd(256);
      r_last[v] = 32'd100 + $urandom_range(100);
      for (int i = 0; i < FM; i++) r_mail[v][i] = rnd(256);
      for (int j = 0; j < N; j++) begin
        r_nbr[v][j].valid = (j < v % (N + 1));
        r_nbr[v][j].vid   = $urandom_range(NV - 1);
        r_nbr[v][j].t     = 32'd90 - 32'(j * 10);
      end
      for (int i = 0; i < FF; i++) r_feat[v][i] = rnd(256);
    end
    mem.mem = r_mem; mem.last = r_last; mem.mail = r_mail; mem.nbr = r_nbr; mem.feat = r_feat;
    // edges
    t = 32'd300;
    for (int i = 0; i < NE; i++) begin
      eu[i] = $urandom_range(NV - 1);
      do ev[i] = $urandom_range(NV - 1); while (ev[i] == eu[i]);
      t += $urandom_range(40);
      et[i] = t;
      for (int j = 0; j < FE; j++) ef[i][j] = rnd(256);
      elast[i] = (i == 4) || (i == 12) || (i == 22);
    end
    // batch boundaries as the hardware forms them: s_last or 8 edges
    bstart[0] = 0; bstart[1] = 5; bstart[2] = 13; bstart[3] = 21; bstart[4] = 23;
    nb_ref = 4;
    ref_batch(bstart[0], bstart[1]);
    fork
      begin
        for (int i = 0; i < NE; i++)
          for (int w = 0; w < NW; w++) begin
            s_valid = 1;
            case (w)
              0: s_data = eu[i];
              1: s_data = ev[i];
              2: s_data = et[i];
              default: s_data = {ef[i][2*(w-3)+1], ef[i][2*(w-3)]};
            endcase
            s_last = elast[i] && (w == NW - 1);
            do @(posedge clk); while (!s_ready);
            #1; s_valid = 0; s_last = 0;
          end
      end
      begin
        for (int b = 0; b < nb_ref; b++) begin
          while (n_batches <= b) begin @(posedge clk); #1; end
          check_tables(b);
          if (b + 1 < nb_ref) ref_batch(bstart[b+1], bstart[b+2]);
        end
      end
    join
    checks++;
    if (n_emb != NE) begin failures++; $display("%0d embeddings for %0d edges", n_emb, NE); end
    $display("prefetches %0d, pruned %0d, invalidations %0d, window skips %0d", n_pf, n_prune, n_inv, n_skip);
    $display("partial rounds %0d, full rounds %0d, size-limited batches %0d, write stalls %0d, drain stalls %0d",
             n_partial, n_full, n_bmax, n_bp, n_drain_stall);
    $display("%0d cycles for %0d edges", cyc, NE);
    checks += 9;
    if (n_pf == 0)      begin failures++; $display("no prefetch"); end
    if (n_prune == 0)   begin failures++; $display("no pruning"); end
    if (n_inv == 0)     begin failures++; $display("no invalidation"); end
    if (n_skip == 0)    begin failures++; $display("no skipped window"); end
    if (n_partial == 0) begin failures++; $display("no partial round"); end
    if (n_full == 0)    begin failures++; $display("no full round"); end
    if (n_bmax == 0)    begin failures++; $display("no size-limited batch"); end
    if (n_bp == 0)      begin failures++; $display("no write back-pressure"); end
    if (n_drain_stall == 0) begin failures++; $display("no input stall in drain"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
