// tgnn_top: memory-based temporal GNN inference accelerator.
//
// New edges stream in from the host (DMA side) as word packets. The edge
// parser turns them into edge records; the data loader fetches the vertex
// memory, cached message, neighbour row and features of both endpoints and
// hands the edges round robin to NCU computation units. Each CU updates the
// two vertex memories with its GRU memory update unit and computes both
// embeddings with its embedding unit, prefetching the kept neighbours'
// memories through the data loader. Results are gathered one round (one
// edge per CU, in hand-out order) at a time; the neighbour updater pushes
// the partner vertex into each endpoint's most-recent-neighbour row, and the
// updater cache writes the new memory, message and neighbour rows back in
// time order, dropping superseded ones. Embeddings leave on emb_* when a
// round is gathered.
//
// Batches. A batch ends with the edge whose last word carries s_last, or
// after BATCH_MAX edges. The controller runs each batch in three phases:
//   LOAD    edges are loaded and computed (prefetches continue);
//   DRAIN   no new edges; wait until every edge of the batch has gone into
//           the updater;
//   COMMIT  the updater writes back; when it is empty the next batch starts.
// All reads of a batch therefore see the tables as they were before the
// batch (the usual rule that dependencies inside a batch are ignored), and
// the updater's order and de-duplication decide the final rows. Two edges of
// one batch that touch the same vertex both start from its old neighbour
// row, so only the later push survives.
//
// External memory: the table read channels of the data loader and one
// write channel (tw_*) that writes a vertex's memory row, mailbox row and
// neighbour row together; the DDR controller and the tables themselves are
// outside this module. Learned tables are loaded through cfg.
//
// Following the paper: the Edge Parser, Data Loader, Computation Units
// (MUU + EU) and Updater of Fig. 2, round-robin edge assignment, prefetch of
// neighbour memories, the commit order of the updater, NCU = 2, S_g = 8,
// S_FAM = 16, S_FTM = 8x8, 10 neighbours, 128 LUT intervals, a 3-line
// commit window. This design's own: the batch phases (the paper overlaps the
// load, compute and update periods of consecutive batches, Fig. 4; here a
// batch's update finishes before the next batch loads), BATCH_MAX, the
// cache size and all interface layouts.
module tgnn_top
  import tgnn_pkg::*;
#(
  parameter int M         = F_MEM,
  parameter int FE        = F_EDGE,
  parameter int FF        = F_FEAT,
  parameter int E         = F_EMB,
  parameter int N         = MR,
  parameter int K         = KMAX,
  parameter int NCU       = 2,
  parameter int SG        = 8,
  parameter int S_FAM     = 16,
  parameter int S_FTM     = 8,
  parameter int ENTRIES   = LUT_N,
  parameter int DT_SHIFT  = 4,
  parameter int BATCH_MAX = 16,
  parameter int LINES     = 32,
  parameter int SCAN      = 3,
  localparam int F_MAIL   = 2 * M + FE,
  localparam int D        = M + FF,
  localparam int PW       = M * 16 + T_W + F_MAIL * 16 + N * $bits(nbr_t)
) (
  input  logic clk,
  input  logic rst_n,
  input  cfg_t cfg,
  input  logic [$clog2(K+1)-1:0] budget,
  // edge packets from the DMA
  input  logic        s_valid,
  output logic        s_ready,
  input  logic [31:0] s_data,
  input  logic        s_last,
  // table read channels
  output logic vm_req_valid, input logic vm_req_ready, output vid_t vm_req_addr,
  input  logic vm_rsp_valid, input fix_t vm_rsp_mem [M], input ts_t vm_rsp_t,
  output logic ml_req_valid, input logic ml_req_ready, output vid_t ml_req_addr,
  input  logic ml_rsp_valid, input fix_t ml_rsp [F_MAIL],
  output logic nb_req_valid, input logic nb_req_ready, output vid_t nb_req_addr,
  input  logic nb_rsp_valid, input nbr_t nb_rsp [N],
  output logic ft_req_valid, input logic ft_req_ready, output vid_t ft_req_addr,
  input  logic ft_rsp_valid, input fix_t ft_rsp [FF],
  // table write channel
  output logic tw_valid,
  input  logic tw_ready,
  output vid_t tw_vid,
  output fix_t tw_mem [M],
  output ts_t  tw_t,
  output fix_t tw_mail [F_MAIL],
  output nbr_t tw_nbr [N],
  // embeddings, one pulse per CU and round
  output logic emb_valid [NCU],
  output vid_t emb_vid [NCU][2],
  output fix_t emb_h [NCU][2][E],
  // status
  output logic batch_done
);

  localparam int BW = $clog2(BATCH_MAX + 1);
  localparam int NIN = 2 * NCU;

  // ---------------- edge parser ----------------
  logic ep_valid, ep_ready, ep_be;
  vid_t ep_src, ep_dst;
  ts_t  ep_t;
  fix_t ep_fe [FE];

  edge_parser #(.FE(FE)) u_parser (
    .clk, .rst_n, .s_valid, .s_ready, .s_data, .s_last,
    .edge_valid(ep_valid), .edge_ready(ep_ready), .edge_src(ep_src), .edge_dst(ep_dst),
    .edge_t(ep_t), .edge_fe(ep_fe), .edge_batch_end(ep_be));

  // ---------------- batch controller ----------------
  typedef enum logic [1:0] {P_LOAD, P_DRAIN, P_COMMIT} ph_e;
  ph_e ph;
  logic [BW-1:0] n_disp, n_coll;
  logic load_en, rr_clear, commit_en, closing;

  // ---------------- data loader ----------------
  logic job_valid [NCU];
  logic job_ready [NCU];
  vid_t job_vid  [2];
  ts_t  job_t;
  fix_t job_fe   [FE];
  fix_t job_mail [2][F_MAIL];
  fix_t job_mem  [2][M];
  ts_t  job_last [2];
  nbr_t job_nbr  [2][N];
  fix_t job_feat [2][FF];
  logic job_be;
  logic pf_req_valid [NCU];
  logic pf_req_ready [NCU];
  logic [$clog2(K+1)-1:0] pf_cnt [NCU];
  vid_t pf_vid [NCU][K];
  logic pf_rsp_valid [NCU];
  fix_t pf_vec [K][D];

  data_loader #(.M(M), .FE(FE), .FF(FF), .N(N), .K(K), .NCU(NCU)) u_loader (
    .clk, .rst_n, .load_en, .rr_clear,
    .edge_valid(ep_valid), .edge_ready(ep_ready), .edge_src(ep_src), .edge_dst(ep_dst),
    .edge_t(ep_t), .edge_fe(ep_fe), .edge_batch_end(ep_be),
    .vm_req_valid, .vm_req_ready, .vm_req_addr, .vm_rsp_valid, .vm_rsp_mem, .vm_rsp_t,
    .ml_req_valid, .ml_req_ready, .ml_req_addr, .ml_rsp_valid, .ml_rsp,
    .nb_req_valid, .nb_req_ready, .nb_req_addr, .nb_rsp_valid, .nb_rsp,
    .ft_req_valid, .ft_req_ready, .ft_req_addr, .ft_rsp_valid, .ft_rsp,
    .job_valid, .job_ready, .job_vid, .job_t, .job_fe, .job_mail, .job_mem, .job_last,
    .job_nbr, .job_feat, .job_batch_end(job_be),
    .pf_req_valid, .pf_req_ready, .pf_cnt, .pf_vid, .pf_rsp_valid, .pf_vec);

  // ---------------- computation units ----------------
  logic res_valid [NCU];
  logic res_ready [NCU];
  vid_t res_vid  [NCU][2];
  ts_t  res_t    [NCU];
  fix_t res_mem  [NCU][2][M];
  fix_t res_mail [NCU][2][F_MAIL];
  nbr_t res_nbr  [NCU][2][N];
  fix_t res_h    [NCU][2][E];

  for (genvar c = 0; c < NCU; c++) begin : g_cu
    computation_unit #(.M(M), .FE(FE), .FF(FF), .E(E), .N(N), .K(K), .SG(SG),
                       .S_FAM(S_FAM), .S_FTM(S_FTM), .ENTRIES(ENTRIES),
                       .DT_SHIFT(DT_SHIFT)) u_cu (
      .clk, .rst_n, .cfg, .budget,
      .job_valid(job_valid[c]), .job_ready(job_ready[c]), .job_vid, .job_t, .job_fe,
      .job_mail, .job_mem, .job_last, .job_nbr, .job_feat,
      .pf_req_valid(pf_req_valid[c]), .pf_req_ready(pf_req_ready[c]), .pf_cnt(pf_cnt[c]),
      .pf_vid(pf_vid[c]), .pf_rsp_valid(pf_rsp_valid[c]), .pf_vec,
      .res_valid(res_valid[c]), .res_ready(res_ready[c]), .res_vid(res_vid[c]),
      .res_t(res_t[c]), .res_mem(res_mem[c]), .res_mail(res_mail[c]), .res_nbr(res_nbr[c]),
      .res_h(res_h[c]));
  end

  // ---------------- round collector and neighbour updater ----------------
  // edges of the current batch still to be gathered, at most NCU per round
  logic [BW-1:0] left;
  int            exp_n;
  logic          round_ok;
  assign left = n_disp - n_coll;
  always_comb begin
    if (int'(left) >= NCU)  exp_n = NCU;
    else if (closing)       exp_n = int'(left);
    else                    exp_n = 0;        // wait for the round to fill
    round_ok = (exp_n > 0);
    for (int c = 0; c < NCU; c++)
      if (c < exp_n && !res_valid[c]) round_ok = 1'b0;
  end

  logic          up_in_valid, up_in_ready;
  logic          up_slot [NIN];
  vid_t          up_vid  [NIN];
  logic [PW-1:0] up_data [NIN];
  nbr_t          nbr_new [NCU][2][N];

  for (genvar c = 0; c < NCU; c++) begin : g_nbr
    for (genvar p = 0; p < 2; p++) begin : g_ep
      neighbor_sampler #(.N(N)) u_ns (
        .row_in(res_nbr[c][p]), .new_vid(res_vid[c][1-p]), .new_t(res_t[c]),
        .row_out(nbr_new[c][p]));
    end
  end

  function automatic logic [PW-1:0] pack_rec(input fix_t s [M], input ts_t t,
                                             input fix_t ml [F_MAIL], input nbr_t nb [N]);
    logic [PW-1:0] r;
    int b;
    r = '0;
    b = 0;
    for (int i = 0; i < M; i++)      begin r[b +: 16] = s[i];  b += 16; end
    r[b +: T_W] = t; b += T_W;
    for (int i = 0; i < F_MAIL; i++) begin r[b +: 16] = ml[i]; b += 16; end
    for (int i = 0; i < N; i++)      begin r[b +: $bits(nbr_t)] = nb[i]; b += $bits(nbr_t); end
    return r;
  endfunction

  assign up_in_valid = round_ok;
  always_comb
    for (int c = 0; c < NCU; c++) begin
      res_ready[c] = round_ok && up_in_ready && (c < exp_n);
      for (int p = 0; p < 2; p++) begin
        up_slot[2*c+p] = (c < exp_n);
        up_vid[2*c+p]  = res_vid[c][p];
        up_data[2*c+p] = pack_rec(res_mem[c][p], res_t[c], res_mail[c][p], nbr_new[c][p]);
      end
    end

  logic          up_out_valid, up_pending;
  vid_t          up_out_vid;
  logic [PW-1:0] up_out_data;

  updater #(.LINES(LINES), .NIN(NIN), .SCAN(SCAN), .PW(PW)) u_updater (
    .clk, .rst_n, .in_valid(up_in_valid), .in_ready(up_in_ready), .in_slot(up_slot),
    .in_vid(up_vid), .in_data(up_data), .commit_en,
    .out_valid(up_out_valid), .out_ready(tw_ready), .out_vid(up_out_vid),
    .out_data(up_out_data), .pending(up_pending));

  assign tw_valid = up_out_valid;
  assign tw_vid   = up_out_vid;
  always_comb begin
    int b;
    b = 0;
    for (int i = 0; i < M; i++)      begin tw_mem[i] = fix_t'(up_out_data[b +: 16]); b += 16; end
    tw_t = up_out_data[b +: T_W]; b += T_W;
    for (int i = 0; i < F_MAIL; i++) begin tw_mail[i] = fix_t'(up_out_data[b +: 16]); b += 16; end
    for (int i = 0; i < N; i++)      begin tw_nbr[i] = nbr_t'(up_out_data[b +: $bits(nbr_t)]); b += $bits(nbr_t); end
  end

  always_comb
    for (int c = 0; c < NCU; c++) begin
      emb_valid[c] = res_valid[c] && res_ready[c];
      emb_vid[c]   = res_vid[c];
      emb_h[c]     = res_h[c];
    end

  // ---------------- batch phases ----------------
  logic disp;
  always_comb begin
    disp = 1'b0;
    for (int c = 0; c < NCU; c++) if (job_valid[c] && job_ready[c]) disp = 1'b1;
  end
  logic [BW-1:0] n_coll_round;
  assign n_coll_round = (up_in_valid && up_in_ready) ? BW'(exp_n) : '0;

  assign load_en   = (ph == P_LOAD) && !closing;
  assign commit_en = (ph == P_COMMIT);
  assign rr_clear  = (ph == P_COMMIT) && !up_pending;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph <= P_LOAD; n_disp <= '0; n_coll <= '0; closing <= 1'b0; batch_done <= 1'b0;
    end else begin
      batch_done <= 1'b0;
      if (disp) begin
        n_disp <= n_disp + 1'b1;
        if (job_be || int'(n_disp) + 1 == BATCH_MAX) closing <= 1'b1;
      end
      n_coll <= n_coll + n_coll_round;
      case (ph)
        P_LOAD:  if (closing) ph <= P_DRAIN;
        P_DRAIN: if (n_coll == n_disp && !round_ok) ph <= P_COMMIT;
        P_COMMIT: if (!up_pending) begin
          ph <= P_LOAD; n_disp <= '0; n_coll <= '0; closing <= 1'b0;
          batch_done <= 1'b1;
        end
        default: ph <= P_LOAD;
      endcase
    end
  end

  // a batch never holds more results than the updater can keep
  a_batch_fits: assert property (@(posedge clk) disable iff (!rst_n)
    int'(n_disp) <= BATCH_MAX);

endmodule
