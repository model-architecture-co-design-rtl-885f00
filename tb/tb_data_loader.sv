// tb_data_loader: tests the data loader against the behavioural table
// memory (3-cycle reads).
//
// Random edges arrive while load_en toggles; the two CUs take jobs with
// random readiness and at random times ask for neighbour prefetches of 0..K
// random vertices. Checked: every job carries the table rows of both its
// endpoints and the edge fields unchanged, jobs go to CU 0, 1, 0, ... with
// rr_clear restarting at CU 0, no edge is accepted while load_en is low,
// every prefetch answer holds [memory || features] of the requested
// vertices and reaches the CU that asked. Mechanisms counted: prefetches for
// each CU, a prefetch served between edges, rr_clear taking effect.
module tb_data_loader;
  import tgnn_pkg::*;
  localparam int M = 4, FE = 2, FF = 3, N = 3, K = 2, NCU = 2, NV = 10;
  localparam int FM = 2 * M + FE, D = M + FF, NJ = 60;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic load_en, rr_clear, edge_valid, edge_ready, edge_be, job_batch_end;
  vid_t edge_src, edge_dst;
  ts_t  edge_t;
  fix_t edge_fe [FE];
  logic vm_req_valid, vm_req_ready, vm_rsp_valid, ml_req_valid, ml_req_ready, ml_rsp_valid;
  logic nb_req_valid, nb_req_ready, nb_rsp_valid, ft_req_valid, ft_req_ready, ft_rsp_valid;
  vid_t vm_req_addr, ml_req_addr, nb_req_addr, ft_req_addr;
  fix_t vm_rsp_mem [M];
  ts_t  vm_rsp_t;
  fix_t ml_rsp [FM];
  nbr_t nb_rsp [N];
  fix_t ft_rsp [FF];
  logic job_valid [NCU], job_ready [NCU];
  vid_t job_vid [2];
  ts_t  job_t;
  fix_t job_fe [FE];
  fix_t job_mail [2][FM];
  fix_t job_mem [2][M];
  ts_t  job_last [2];
  nbr_t job_nbr [2][N];
  fix_t job_feat [2][FF];
  logic pf_req_valid [NCU], pf_req_ready [NCU], pf_rsp_valid [NCU];
  logic [$clog2(K+1)-1:0] pf_cnt [NCU];
  vid_t pf_vid [NCU][K];
  fix_t pf_vec [K][D];
  logic tw_valid = 1'b0, tw_ready;
  vid_t tw_vid = '0;
  fix_t tw_mem [M];
  ts_t  tw_t = '0;
  fix_t tw_mail [FM];
  nbr_t tw_nbr [N];

  data_loader #(.M(M), .FE(FE), .FF(FF), .N(N), .K(K), .NCU(NCU)) dut (
    .clk, .rst_n, .load_en, .rr_clear, .edge_valid, .edge_ready, .edge_src, .edge_dst, .edge_t,
    .edge_fe, .edge_batch_end(edge_be),
    .vm_req_valid, .vm_req_ready, .vm_req_addr, .vm_rsp_valid, .vm_rsp_mem, .vm_rsp_t,
    .ml_req_valid, .ml_req_ready, .ml_req_addr, .ml_rsp_valid, .ml_rsp,
    .nb_req_valid, .nb_req_ready, .nb_req_addr, .nb_rsp_valid, .nb_rsp,
    .ft_req_valid, .ft_req_ready, .ft_req_addr, .ft_rsp_valid, .ft_rsp,
    .job_valid, .job_ready, .job_vid, .job_t, .job_fe, .job_mail, .job_mem, .job_last,
    .job_nbr, .job_feat, .job_batch_end, .pf_req_valid, .pf_req_ready, .pf_cnt, .pf_vid,
    .pf_rsp_valid, .pf_vec);

  tb_table_mem #(.M(M), .FE(FE), .FF(FF), .N(N), .NV(NV), .LAT(3), .BUSY_WR(1'b0)) mem (
    .clk, .rst_n, .vm_req_valid, .vm_req_ready, .vm_req_addr, .vm_rsp_valid, .vm_rsp_mem, .vm_rsp_t,
    .ml_req_valid, .ml_req_ready, .ml_req_addr, .ml_rsp_valid, .ml_rsp,
    .nb_req_valid, .nb_req_ready, .nb_req_addr, .nb_rsp_valid, .nb_rsp,
    .ft_req_valid, .ft_req_ready, .ft_req_addr, .ft_rsp_valid, .ft_rsp,
    .tw_valid, .tw_ready, .tw_vid, .tw_mem, .tw_t, .tw_mail, .tw_nbr);

  function automatic fix_t rnd();
    return fix_t'($urandom_range(65535));
  endfunction

  // edges sent, in order
  vid_t q_src [$], q_dst [$];
  ts_t  q_t [$];
  logic q_be [$];
  fix_t q_fe [$][FE];

  int n_jobs = 0, exp_rr = 0, n_clear_eff = 0, n_bad_load = 0;
  int n_pf [NCU];
  int n_pf_mid = 0;
  bit stop_pf = 0;

  // outstanding prefetch per CU
  bit   pf_wait [NCU];
  vid_t pf_want [NCU][K];
  int   pf_n [NCU];

  always @(posedge clk) if (rst_n) begin
    if (edge_valid && edge_ready && !load_en) n_bad_load++;
    // jobs
    for (int c = 0; c < NCU; c++) if (job_valid[c] && job_ready[c]) begin
      checks += 3;
      if (c != exp_rr) begin failures++; $display("job %0d went to CU %0d, expected %0d", n_jobs, c, exp_rr); end
      if (job_vid[0] != q_src[0] || job_vid[1] != q_dst[0] || job_t != q_t[0] || job_fe != q_fe[0]
          || job_batch_end != q_be[0]) begin
        failures++; $display("job %0d: edge fields differ", n_jobs);
      end
      begin
        bit bad;
        bad = 0;
        for (int p = 0; p < 2; p++) begin
          int v;
          v = int'(job_vid[p]) % NV;
          if (job_mem[p] != mem.mem[v] || job_last[p] != mem.last[v] || job_mail[p] != mem.mail[v]
              || job_nbr[p] != mem.nbr[v] || job_feat[p] != mem.feat[v]) bad = 1;
        end
        if (bad) begin failures++; $display("job %0d: table rows differ", n_jobs); end
      end
      void'(q_src.pop_front()); void'(q_dst.pop_front()); void'(q_t.pop_front());
      void'(q_fe.pop_front()); void'(q_be.pop_front());
      n_jobs++;
      exp_rr = (exp_rr + 1) % NCU;
    end
    if (rr_clear && !(job_valid[0] && job_ready[0]) && !(job_valid[1] && job_ready[1])) begin
      if (exp_rr != 0) n_clear_eff++;
      exp_rr = 0;
    end
    // prefetch answers
    for (int c = 0; c < NCU; c++) if (pf_rsp_valid[c]) begin
      checks++;
      if (!pf_wait[c]) begin failures++; $display("prefetch answer to CU %0d that did not ask", c); end
      else begin
        bit bad;
        bad = 0;
        for (int k = 0; k < pf_n[c]; k++) begin
          int v;
          v = int'(pf_want[c][k]) % NV;
          for (int d = 0; d < D; d++)
            if (pf_vec[k][d] != ((d < M) ? mem.mem[v][d] : mem.feat[v][d-M])) bad = 1;
        end
        if (bad) begin failures++; $display("prefetch for CU %0d: wrong rows", c); end
      end
      pf_wait[c] = 0;
      n_pf[c]++;
      if (q_src.size() > 0) n_pf_mid++;
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog: %0d jobs", n_jobs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // CU side: job readiness and prefetch requests
  for (genvar c = 0; c < NCU; c++) begin : g_cu
    initial begin
      pf_req_valid[c] = 0; pf_cnt[c] = 0; job_ready[c] = 0;
      for (int k = 0; k < K; k++) pf_vid[c][k] = '0;
      @(posedge rst_n);
      forever begin
        @(posedge clk); #2;
        job_ready[c] = ($urandom_range(2) != 0);
        if (!stop_pf && !pf_wait[c] && !pf_req_valid[c] && $urandom_range(7) == 0) begin
          pf_cnt[c] = $urandom_range(K);
          for (int k = 0; k < K; k++) pf_vid[c][k] = $urandom_range(NV - 1);
          pf_req_valid[c] = 1;
        end
      end
    end
    always @(posedge clk) if (rst_n && pf_req_valid[c] && pf_req_ready[c]) begin
      pf_wait[c] <= 1;
      pf_n[c] <= int'(pf_cnt[c]);
      pf_want[c] <= pf_vid[c];
      #1 pf_req_valid[c] = 0;
    end
  end

  initial begin
    edge_valid = 0; edge_src = 0; edge_dst = 0; edge_t = 0; edge_be = 0; load_en = 0; rr_clear = 0;
    for (int i = 0; i < FE; i++) edge_fe[i] = 0;
    for (int i = 0; i < M; i++) tw_mem[i] = 0;
    for (int i = 0; i < FM; i++) tw_mail[i] = 0;
    for (int i = 0; i < N; i++) tw_nbr[i] = '0;
    for (int c = 0; c < NCU; c++) begin n_pf[c] = 0; pf_wait[c] = 0; pf_n[c] = 0; end
    for (int v = 0; v < NV; v++) begin
      for (int i = 0; i < M; i++) mem.mem[v][i] = rnd();
      mem.last[v] = $urandom;
      for (int i = 0; i < FM; i++) mem.mail[v][i] = rnd();
      for (int j = 0; j < N; j++) begin
        mem.nbr[v][j].valid = $urandom_range(1);
        mem.nbr[v][j].vid = $urandom;
        mem.nbr[v][j].t = $urandom;
      end
      for (int i = 0; i < FF; i++) mem.feat[v][i] = rnd();
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      forever begin
        @(posedge clk); #1;
        load_en  = ($urandom_range(4) != 0);
        rr_clear = ($urandom_range(15) == 0);
      end
      for (int i = 0; i < NJ; i++) begin
        @(posedge clk); #3;
        edge_src = $urandom_range(NV - 1);
        edge_dst = $urandom_range(NV - 1);
        edge_t = $urandom;
        for (int j = 0; j < FE; j++) edge_fe[j] = rnd();
        edge_be = $urandom_range(1);
        edge_valid = 1;
        do @(posedge clk); while (!edge_ready);
        q_src.push_back(edge_src); q_dst.push_back(edge_dst); q_t.push_back(edge_t);
        q_fe.push_back(edge_fe); q_be.push_back(edge_be);
        #1 edge_valid = 0;
      end
    join_any
    while (n_jobs < NJ) @(posedge clk);
    stop_pf = 1;
    repeat (50) @(posedge clk);
    checks += 5;
    if (n_bad_load != 0) begin failures++; $display("%0d edges accepted with load_en low", n_bad_load); end
    if (n_pf[0] == 0 || n_pf[1] == 0) begin failures++; $display("prefetches %0d/%0d", n_pf[0], n_pf[1]); end
    if (n_pf_mid == 0) begin failures++; $display("no prefetch between edges"); end
    if (n_clear_eff == 0) begin failures++; $display("rr_clear never took effect"); end
    if (pf_wait[0] || pf_wait[1]) begin failures++; $display("prefetch left unanswered"); end
    $display("jobs %0d, prefetches %0d/%0d (%0d between edges), rr restarts %0d",
             n_jobs, n_pf[0], n_pf[1], n_pf_mid, n_clear_eff);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
