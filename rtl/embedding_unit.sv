// embedding_unit (EU): one-layer temporal attention aggregation for one
// vertex at a time.
//
//   1. attention (AM): logits from the neighbours' dt, pruning to `budget`
//      neighbours, softmax -> alpha[k] and the kept neighbour ids;
//   2. time encoding: for each kept neighbour the EU time LUT returns the
//      time encoding of dt_k already multiplied by the value weights
//      (F_EMB elements); tsum = sum alpha[k] * LUT(dt_k);
//   3. prefetch: the kept ids go out on pf_req; pf_rsp returns each kept
//      neighbour's vector [s_u || f_u] (D elements);
//   4. feature aggregation (FAM): agg = sum alpha[k] * [s_u || f_u];
//   5. the vertex's own updated vector [s_v || f_v] arrives on self_* (from
//      the memory update unit) and is added: agg += [s_v || f_v];
//   6. feature transformation (FTM): h = W_o agg + b_o + tsum on an
//      S_FTM x S_FTM mac_array; h is offered on out_valid/out_ready.
// Steps 1-4 need no updated memory, so they overlap the vertex's memory
// update; the EU only waits at step 5.
//
// Following the paper: AM, FAM and FTM as the three parts of the EU, the
// attention computed before the neighbours' memories are prefetched, the
// look-up-table time encoding, FTM as a multiply-accumulate array (8x8 on
// the U200). This design's own: the value weights are applied after
// aggregation (the product is linear, so W(sum alpha x) = sum alpha W x),
// the vertex itself enters the aggregation with weight 1, neighbours' edge
// features are not aggregated, and the step order above.
module embedding_unit
  import tgnn_pkg::*;
#(
  parameter int N        = MR,
  parameter int K        = KMAX,
  parameter int D        = F_MEM + F_FEAT,
  parameter int E        = F_EMB,
  parameter int S_FAM    = 16,
  parameter int S_FTM    = 8,
  parameter int ENTRIES  = LUT_N,
  parameter int DT_SHIFT = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  cfg_t cfg,
  // job
  input  logic start,
  output logic idle,
  input  nbr_t nbr [N],
  input  ts_t  t_now,
  input  logic [$clog2(K+1)-1:0] budget,
  // prefetch of the kept neighbours
  output logic pf_req_valid,
  input  logic pf_req_ready,
  output logic [$clog2(K+1)-1:0] pf_cnt,
  output vid_t pf_vid [K],
  input  logic pf_rsp_valid,
  input  fix_t pf_vec [K][D],
  // the vertex's own updated vector
  input  logic self_valid,
  output logic self_ready,
  input  fix_t self_vec [D],
  // embedding
  output logic out_valid,
  input  logic out_ready,
  output fix_t h [E]
);

  localparam int KW = $clog2(K+1);

  typedef enum logic [3:0] {E_IDLE, E_AM, E_TE, E_PF_REQ, E_PF_WAIT, E_FAM, E_SELF,
                            E_FTM_GO, E_FTM, E_OUT} st_e;
  st_e st;

  // attention
  logic am_busy, am_done;
  logic [KW-1:0] sel_cnt;
  logic [$clog2(N)-1:0] sel_idx [K];
  vid_t sel_vid [K];
  ts_t  sel_dt [K];
  fix_t alpha [K];

  attention_module #(.N(N), .K(K), .DT_SHIFT(DT_SHIFT)) u_am (
    .clk, .rst_n, .cfg, .start(start && st == E_IDLE), .nbr, .t_now, .budget,
    .busy(am_busy), .done(am_done), .sel_cnt, .sel_idx, .sel_vid, .sel_dt, .alpha);

  // time encoding of the kept neighbours
  logic [KW-1:0] tk, tk_d;
  logic te_req, te_vld;
  logic [$clog2(ENTRIES)-1:0] te_idx;
  fix_t te_vec [E];
  acc_t tsum [E];

  assign te_req = (st == E_TE) && (tk < sel_cnt);

  time_lut #(.ENTRIES(ENTRIES), .DIM(E), .TGT_THR(CFG_ET_THR), .TGT_VAL(CFG_ET_VAL)) u_tlut (
    .clk, .rst_n, .cfg, .req(te_req), .dt(sel_dt[tk]), .vld(te_vld), .idx(te_idx), .vec(te_vec));

  // aggregation
  fix_t xk [K][D];
  logic fam_busy, fam_done, fam_seen;
  fix_t agg [D];
  feature_aggregation_module #(.D(D), .K(K), .S(S_FAM)) u_fam (
    .clk, .rst_n, .start(st == E_FAM && !fam_busy && !fam_seen), .cnt(sel_cnt), .alpha,
    .x(xk), .busy(fam_busy), .done(fam_done), .agg);

  // transformation
  fix_t xt [D];
  logic ftm_busy, ftm_done;
  fix_t yo [E];
  mac_array #(.IN(D), .OUT(E), .SG_R(S_FTM), .SG_C(S_FTM), .SPLIT(0),
              .TGT_W(CFG_W_O), .TGT_B(CFG_B_O)) u_ftm (
    .clk, .rst_n, .cfg, .start(st == E_FTM_GO), .x(xt), .busy(ftm_busy), .done(ftm_done), .y(yo));

  assign idle         = (st == E_IDLE);
  assign pf_req_valid = (st == E_PF_REQ);
  assign pf_cnt       = sel_cnt;
  assign pf_vid       = sel_vid;
  assign self_ready   = (st == E_SELF);
  assign out_valid    = (st == E_OUT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= E_IDLE; tk <= '0; tk_d <= '0; fam_seen <= 1'b0;
      for (int e = 0; e < E; e++) begin tsum[e] <= '0; h[e] <= '0; end
      for (int d = 0; d < D; d++) xt[d] <= '0;
      for (int k = 0; k < K; k++) for (int d = 0; d < D; d++) xk[k][d] <= '0;
    end else begin
      if (te_vld)
        for (int e = 0; e < E; e++) tsum[e] <= tsum[e] + fmul(alpha[tk_d], te_vec[e]);
      tk_d <= tk;
      case (st)
        E_IDLE: if (start) st <= E_AM;
        E_AM: if (am_done) begin
          tk <= '0;
          for (int e = 0; e < E; e++) tsum[e] <= '0;
          st <= E_TE;
        end
        E_TE: begin
          if (tk < sel_cnt) tk <= tk + 1'b1;
          else if (!te_vld) st <= E_PF_REQ;
        end
        E_PF_REQ: if (pf_req_ready) st <= E_PF_WAIT;
        E_PF_WAIT: if (pf_rsp_valid) begin
          xk <= pf_vec;
          fam_seen <= 1'b0;
          st <= E_FAM;
        end
        E_FAM: begin
          if (!fam_busy && !fam_seen) fam_seen <= 1'b1;
          if (fam_done) st <= E_SELF;
        end
        E_SELF: if (self_valid) begin
          for (int d = 0; d < D; d++) xt[d] <= sat_add(agg[d], self_vec[d]);
          st <= E_FTM_GO;
        end
        E_FTM_GO: st <= E_FTM;
        E_FTM: if (ftm_done) begin
          for (int e = 0; e < E; e++) h[e] <= sat_add(yo[e], sat_acc(tsum[e]));
          st <= E_OUT;
        end
        E_OUT: if (out_ready) st <= E_IDLE;
        default: st <= E_IDLE;
      endcase
    end
  end

endmodule
