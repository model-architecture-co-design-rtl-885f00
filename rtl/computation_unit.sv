// computation_unit (CU): memory update unit plus embedding unit for the two
// endpoints of one edge.
//
// A job is one edge e(u, v, f_e, t) with everything the data loader fetched
// for both endpoints (index 0 = source u, index 1 = destination v): cached
// message, vertex memory and the time it was last updated, most-recent
// neighbour list and node features. The CU
//   - sends u and then v through the memory update unit (MUU) with
//     dt = t - last update time, giving the new memories s'_u, s'_v;
//   - at the same time runs the embedding unit (EU) for u and then v: it
//     computes attention from the neighbour lists, prefetches the kept
//     neighbours' [memory || features] through pf_*, and, once s' of the
//     vertex is ready, finishes the embedding h;
//   - forms the new cached messages m_u = s'_u || s'_v || f_e and
//     m_v = s'_v || s'_u || f_e.
// The result (both new memories, messages, embeddings, the time t and the
// old neighbour lists for the neighbour updater) is offered on
// res_valid/res_ready; the next job is accepted after the result is taken.
//
// Following the paper: a CU holds one MUU and one EU, the updated memory
// goes from the MUU to the EU, the EU's attention and prefetch run before
// the MUU finishes, messages are built as in Algorithm 1 lines 7-8 (the time
// encoding enters through the MUU's time LUT instead of being stored). This
// design's own: one edge per job (the paper groups N_b edges per processing
// batch; here a batch is a sequence of jobs), and the port layout.
module computation_unit
  import tgnn_pkg::*;
#(
  parameter int M        = F_MEM,
  parameter int FE       = F_EDGE,
  parameter int FF       = F_FEAT,
  parameter int E        = F_EMB,
  parameter int N        = MR,
  parameter int K        = KMAX,
  parameter int SG       = 8,
  parameter int S_FAM    = 16,
  parameter int S_FTM    = 8,
  parameter int ENTRIES  = LUT_N,
  parameter int DT_SHIFT = 4,
  localparam int F_MAIL  = 2 * M + FE,
  localparam int D       = M + FF
) (
  input  logic clk,
  input  logic rst_n,
  input  cfg_t cfg,
  input  logic [$clog2(K+1)-1:0] budget,
  // job
  input  logic job_valid,
  output logic job_ready,
  input  vid_t job_vid  [2],
  input  ts_t  job_t,
  input  fix_t job_fe   [FE],
  input  fix_t job_mail [2][F_MAIL],
  input  fix_t job_mem  [2][M],
  input  ts_t  job_last [2],
  input  nbr_t job_nbr  [2][N],
  input  fix_t job_feat [2][FF],
  // neighbour prefetch
  output logic pf_req_valid,
  input  logic pf_req_ready,
  output logic [$clog2(K+1)-1:0] pf_cnt,
  output vid_t pf_vid [K],
  input  logic pf_rsp_valid,
  input  fix_t pf_vec [K][D],
  // result
  output logic res_valid,
  input  logic res_ready,
  output vid_t res_vid  [2],
  output ts_t  res_t,
  output fix_t res_mem  [2][M],
  output fix_t res_mail [2][F_MAIL],
  output nbr_t res_nbr  [2][N],
  output fix_t res_h    [2][E]
);

  typedef enum logic [1:0] {C_IDLE, C_RUN, C_RES} st_e;
  st_e st;

  vid_t vid [2];
  ts_t  tj;
  fix_t fe [FE];
  fix_t mail [2][F_MAIL];
  fix_t mem  [2][M];
  ts_t  last [2];
  nbr_t nbl  [2][N];
  fix_t feat [2][FF];

  // ---------------- memory update unit ----------------
  logic [1:0] mu_in, mu_out;     // endpoints sent / received
  logic mu_in_valid, mu_in_ready, mu_out_valid;
  vid_t mu_out_vid;
  fix_t mu_out_mem [M];
  fix_t snew [2][M];
  logic [1:0] s_ok;

  assign mu_in_valid = (st == C_RUN) && (mu_in < 2);

  memory_update_unit #(.M(M), .F_MAIL(F_MAIL), .SG(SG), .ENTRIES(ENTRIES)) u_muu (
    .clk, .rst_n, .cfg,
    .in_valid(mu_in_valid), .in_ready(mu_in_ready), .in_vid(vid[mu_in[0]]),
    .in_mail(mail[mu_in[0]]), .in_mem(mem[mu_in[0]]),
    .in_dt((tj >= last[mu_in[0]]) ? tj - last[mu_in[0]] : '0),
    .out_valid(mu_out_valid), .out_ready(1'b1), .out_vid(mu_out_vid), .out_mem(mu_out_mem));

  // ---------------- embedding unit ----------------
  logic [1:0] eu_in, eu_out;
  logic eu_start, eu_idle, eu_self_valid, eu_self_ready, eu_out_valid;
  fix_t eu_self [D];
  fix_t eu_h [E];
  fix_t hres [2][E];

  assign eu_start      = (st == C_RUN) && (eu_in < 2) && eu_idle && (eu_in == eu_out);
  assign eu_self_valid = s_ok[eu_out[0]];
  always_comb begin
    for (int i = 0; i < M; i++)  eu_self[i]   = snew[eu_out[0]][i];
    for (int i = 0; i < FF; i++) eu_self[M+i] = feat[eu_out[0]][i];
  end

  embedding_unit #(.N(N), .K(K), .D(D), .E(E), .S_FAM(S_FAM), .S_FTM(S_FTM),
                   .ENTRIES(ENTRIES), .DT_SHIFT(DT_SHIFT)) u_eu (
    .clk, .rst_n, .cfg,
    .start(eu_start), .idle(eu_idle), .nbr(nbl[eu_in[0]]), .t_now(tj), .budget,
    .pf_req_valid, .pf_req_ready, .pf_cnt, .pf_vid, .pf_rsp_valid, .pf_vec,
    .self_valid(eu_self_valid), .self_ready(eu_self_ready), .self_vec(eu_self),
    .out_valid(eu_out_valid), .out_ready(1'b1), .h(eu_h));

  assign job_ready = (st == C_IDLE);
  assign res_valid = (st == C_RES);
  assign res_vid   = vid;
  assign res_t     = tj;
  assign res_mem   = snew;
  assign res_nbr   = nbl;
  assign res_h     = hres;
  always_comb
    for (int p = 0; p < 2; p++) begin
      for (int i = 0; i < M; i++) begin
        res_mail[p][i]   = snew[p][i];
        res_mail[p][M+i] = snew[1-p][i];
      end
      for (int i = 0; i < FE; i++) res_mail[p][2*M+i] = fe[i];
    end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE; mu_in <= '0; mu_out <= '0; eu_in <= '0; eu_out <= '0; s_ok <= '0;
      tj <= '0;
      for (int p = 0; p < 2; p++) begin
        vid[p] <= '0; last[p] <= '0;
        for (int i = 0; i < M; i++) begin snew[p][i] <= '0; mem[p][i] <= '0; end
        for (int i = 0; i < F_MAIL; i++) mail[p][i] <= '0;
        for (int i = 0; i < N; i++) nbl[p][i] <= '0;
        for (int i = 0; i < FF; i++) feat[p][i] <= '0;
        for (int i = 0; i < E; i++) hres[p][i] <= '0;
      end
      for (int i = 0; i < FE; i++) fe[i] <= '0;
    end else begin
      case (st)
        C_IDLE: if (job_valid) begin
          vid <= job_vid; tj <= job_t; fe <= job_fe; mail <= job_mail; mem <= job_mem;
          last <= job_last; nbl <= job_nbr; feat <= job_feat;
          mu_in <= '0; mu_out <= '0; eu_in <= '0; eu_out <= '0; s_ok <= '0;
          st <= C_RUN;
        end
        C_RUN: begin
          if (mu_in_valid && mu_in_ready) mu_in <= mu_in + 1'b1;
          if (mu_out_valid) begin
            snew[mu_out[0]] <= mu_out_mem;
            s_ok[mu_out[0]] <= 1'b1;
            mu_out <= mu_out + 1'b1;
          end
          if (eu_start) eu_in <= eu_in + 1'b1;
          if (eu_out_valid) begin
            hres[eu_out[0]] <= eu_h;
            eu_out <= eu_out + 1'b1;
          end
          if (mu_out == 2'd2 && eu_out == 2'd2) st <= C_RES;
        end
        C_RES: if (res_ready) st <= C_IDLE;
        default: st <= C_IDLE;
      endcase
    end
  end

  // the MUU returns the endpoints in the order they were sent
  a_muu_order: assert property (@(posedge clk) disable iff (!rst_n)
    mu_out_valid |-> (mu_out_vid == vid[mu_out[0]]) && (mu_out < 2'd2));

endmodule
