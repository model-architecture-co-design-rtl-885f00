// data_loader: fetches vertex data from the external tables for the
// computation units.
//
// Two kinds of work share the four table read channels (vertex memory with
// its last-update time, mailbox, neighbour table, vertex features). Each
// channel is a request (valid/ready, row address = vertex id) followed, in
// order, by a response (valid, row data).
//   Edge load: for an edge from the edge parser the loader reads, for the
//     source and then the destination, the memory row, the cached message,
//     the neighbour row and the feature row (the four reads of one vertex
//     are issued together), and places the complete job in a one-entry job
//     buffer. The buffer is offered to CU rr (job_valid[rr]) and rr moves to
//     the next CU, round robin, when that CU takes it. Edge loads are allowed
//     only while load_en is high; rr_clear (with the job buffer empty) sends
//     the next edge to CU 0 again, so each batch starts at CU 0.
//   Prefetch: a CU asks for up to K neighbour ids; for each the loader reads
//     the memory row and the feature row and returns the vectors
//     [s_u || f_u] with a one-cycle pf_rsp_valid pulse to that CU.
// Prefetches go first (a CU waits on them); the job buffer lets prefetches
// run while a loaded job waits for its CU, so the two cannot block each other.
//
// Following the paper: the Data Loader with memory, mail, neighbour and
// feature loaders, round-robin assignment of edges to CUs, prefetching of
// the kept neighbours' memories. This design's own: the channel handshake,
// the job buffer, serving one vertex at a time and the priority rule.
module data_loader
  import tgnn_pkg::*;
#(
  parameter int M      = F_MEM,
  parameter int FE     = F_EDGE,
  parameter int FF     = F_FEAT,
  parameter int N      = MR,
  parameter int K      = KMAX,
  parameter int NCU    = 2,
  localparam int F_MAIL = 2 * M + FE,
  localparam int D      = M + FF
) (
  input  logic clk,
  input  logic rst_n,
  input  logic load_en,
  input  logic rr_clear,
  // edges
  input  logic edge_valid,
  output logic edge_ready,
  input  vid_t edge_src,
  input  vid_t edge_dst,
  input  ts_t  edge_t,
  input  fix_t edge_fe [FE],
  input  logic edge_batch_end,
  // table read channels
  output logic vm_req_valid, input logic vm_req_ready, output vid_t vm_req_addr,
  input  logic vm_rsp_valid, input fix_t vm_rsp_mem [M], input ts_t vm_rsp_t,
  output logic ml_req_valid, input logic ml_req_ready, output vid_t ml_req_addr,
  input  logic ml_rsp_valid, input fix_t ml_rsp [F_MAIL],
  output logic nb_req_valid, input logic nb_req_ready, output vid_t nb_req_addr,
  input  logic nb_rsp_valid, input nbr_t nb_rsp [N],
  output logic ft_req_valid, input logic ft_req_ready, output vid_t ft_req_addr,
  input  logic ft_rsp_valid, input fix_t ft_rsp [FF],
  // jobs to the CUs
  output logic job_valid [NCU],
  input  logic job_ready [NCU],
  output vid_t job_vid  [2],
  output ts_t  job_t,
  output fix_t job_fe   [FE],
  output fix_t job_mail [2][F_MAIL],
  output fix_t job_mem  [2][M],
  output ts_t  job_last [2],
  output nbr_t job_nbr  [2][N],
  output fix_t job_feat [2][FF],
  output logic job_batch_end,
  // prefetch
  input  logic pf_req_valid [NCU],
  output logic pf_req_ready [NCU],
  input  logic [$clog2(K+1)-1:0] pf_cnt [NCU],
  input  vid_t pf_vid [NCU][K],
  output logic pf_rsp_valid [NCU],
  output fix_t pf_vec [K][D]
);

  localparam int CW = (NCU > 1) ? $clog2(NCU) : 1;
  localparam int KW = $clog2(K+1);

  typedef enum logic [2:0] {L_IDLE, L_EDGE, L_PF_ACC, L_PF, L_PF_RSP} st_e;
  st_e st;

  // per-channel request/response tracking for the current vertex
  logic [3:0] need, sent, got;      // 0 vm, 1 ml, 2 nb, 3 ft
  vid_t       cur;
  logic       ep;                   // endpoint being loaded (edge load)
  logic [KW-1:0] pk, pn;            // prefetch index and count
  logic [CW-1:0] pcu, rr;
  vid_t       pids [K];

  // latched edge and job buffer
  logic jb_full;
  vid_t e_vid [2];
  ts_t  e_t;
  fix_t e_fe [FE];
  logic e_be;

  assign vm_req_valid = need[0] && !sent[0];
  assign ml_req_valid = need[1] && !sent[1];
  assign nb_req_valid = need[2] && !sent[2];
  assign ft_req_valid = need[3] && !sent[3];
  assign vm_req_addr  = cur;
  assign ml_req_addr  = cur;
  assign nb_req_addr  = cur;
  assign ft_req_addr  = cur;

  logic [3:0] got_n;
  assign got_n = got | ({ft_rsp_valid, nb_rsp_valid, ml_rsp_valid, vm_rsp_valid} & need);

  // pick a CU that waits for a prefetch, round robin from pcu
  logic          pf_any;
  logic [CW-1:0] pf_pick;
  always_comb begin
    pf_any  = 1'b0;
    pf_pick = '0;
    for (int i = NCU - 1; i >= 0; i--)
      if (pf_req_valid[(int'(pcu) + i) % NCU]) begin
        pf_any  = 1'b1;
        pf_pick = CW'((int'(pcu) + i) % NCU);
      end
  end

  assign edge_ready = (st == L_IDLE) && !pf_any && !jb_full && load_en;

  always_comb
    for (int c = 0; c < NCU; c++) begin
      job_valid[c]    = jb_full && (CW'(c) == rr);
      pf_req_ready[c] = (st == L_PF_ACC) && (CW'(c) == pcu);
    end

  assign job_vid       = e_vid;
  assign job_t         = e_t;
  assign job_fe        = e_fe;
  assign job_batch_end = e_be;

  logic jb_take;
  always_comb begin
    jb_take = 1'b0;
    for (int c = 0; c < NCU; c++) if (job_valid[c] && job_ready[c]) jb_take = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= L_IDLE; need <= '0; sent <= '0; got <= '0; cur <= '0; ep <= 1'b0;
      pk <= '0; pn <= '0; pcu <= '0; rr <= '0; jb_full <= 1'b0;
      e_t <= '0; e_be <= 1'b0;
      for (int p = 0; p < 2; p++) begin
        e_vid[p] <= '0; job_last[p] <= '0;
        for (int i = 0; i < F_MAIL; i++) job_mail[p][i] <= '0;
        for (int i = 0; i < M; i++) job_mem[p][i] <= '0;
        for (int i = 0; i < N; i++) job_nbr[p][i] <= '0;
        for (int i = 0; i < FF; i++) job_feat[p][i] <= '0;
      end
      for (int i = 0; i < FE; i++) e_fe[i] <= '0;
      for (int k = 0; k < K; k++) begin
        pids[k] <= '0;
        for (int d = 0; d < D; d++) pf_vec[k][d] <= '0;
      end
      for (int c = 0; c < NCU; c++) pf_rsp_valid[c] <= 1'b0;
    end else begin
      for (int c = 0; c < NCU; c++) pf_rsp_valid[c] <= 1'b0;
      if (jb_take) begin
        jb_full <= 1'b0;
        rr      <= (int'(rr) == NCU - 1) ? '0 : rr + 1'b1;
      end else if (rr_clear) rr <= '0;
      // request handshakes
      if (vm_req_valid && vm_req_ready) sent[0] <= 1'b1;
      if (ml_req_valid && ml_req_ready) sent[1] <= 1'b1;
      if (nb_req_valid && nb_req_ready) sent[2] <= 1'b1;
      if (ft_req_valid && ft_req_ready) sent[3] <= 1'b1;
      got <= got_n;

      case (st)
        L_IDLE: begin
          if (pf_any) begin
            pcu <= pf_pick;
            st  <= L_PF_ACC;
          end else if (edge_valid && edge_ready) begin
            e_vid[0] <= edge_src; e_vid[1] <= edge_dst; e_t <= edge_t;
            e_fe <= edge_fe; e_be <= edge_batch_end;
            cur  <= edge_src; ep <= 1'b0;
            need <= 4'b1111; sent <= '0; got <= '0;
            st   <= L_EDGE;
          end
        end
        L_EDGE: begin
          if (vm_rsp_valid && need[0]) begin
            for (int i = 0; i < M; i++) job_mem[ep][i] <= vm_rsp_mem[i];
            job_last[ep] <= vm_rsp_t;
          end
          if (ml_rsp_valid && need[1]) for (int i = 0; i < F_MAIL; i++) job_mail[ep][i] <= ml_rsp[i];
          if (nb_rsp_valid && need[2]) for (int i = 0; i < N; i++)      job_nbr[ep][i]  <= nb_rsp[i];
          if (ft_rsp_valid && need[3]) for (int i = 0; i < FF; i++)     job_feat[ep][i] <= ft_rsp[i];
          if (got_n == need) begin
            if (!ep) begin
              ep <= 1'b1; cur <= e_vid[1]; sent <= '0; got <= '0;
            end else begin
              need <= '0; sent <= '0; got <= '0;
              jb_full <= 1'b1;
              st <= L_IDLE;
            end
          end
        end
        L_PF_ACC: begin
          pids <= pf_vid[pcu];
          pn   <= pf_cnt[pcu];
          pk   <= '0;
          if (pf_cnt[pcu] == 0) st <= L_PF_RSP;
          else begin
            cur  <= pf_vid[pcu][0];
            need <= 4'b1001; sent <= '0; got <= '0;
            st   <= L_PF;
          end
        end
        L_PF: begin
          if (vm_rsp_valid && need[0])
            for (int i = 0; i < M; i++) pf_vec[pk][i] <= vm_rsp_mem[i];
          if (ft_rsp_valid && need[3])
            for (int i = 0; i < FF; i++) pf_vec[pk][M+i] <= ft_rsp[i];
          if (got_n == need) begin
            sent <= '0; got <= '0;
            if (pk == pn - 1'b1) begin
              need <= '0;
              st   <= L_PF_RSP;
            end else begin
              pk  <= pk + 1'b1;
              cur <= pids[pk + 1'b1];
            end
          end
        end
        L_PF_RSP: begin
          pf_rsp_valid[pcu] <= 1'b1;
          pcu <= (int'(pcu) == NCU - 1) ? '0 : pcu + 1'b1;
          st  <= L_IDLE;
        end
        default: st <= L_IDLE;
      endcase
    end
  end

  // a response only comes for a request that was sent
  a_vm_rsp: assert property (@(posedge clk) disable iff (!rst_n) vm_rsp_valid |-> sent[0]);
  a_ft_rsp: assert property (@(posedge clk) disable iff (!rst_n) ft_rsp_valid |-> sent[3]);

endmodule
