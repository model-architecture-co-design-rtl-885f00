// attention_module (AM): simplified temporal attention with neighbour pruning.
//
// Given the MR most recent neighbours of a vertex (vertex id and time of each
// interaction, most recent first) and the current time t_now, it computes
//   logits = a + W_t * dt,   dt_j = t_now - t_j
// keeps the `budget` neighbours with the largest logits (pruning) and applies
// softmax over those only. Outputs are the kept neighbours' list positions,
// ids, dt values and attention weights alpha (Q8.8, summing to about 1).
// No vertex memory is needed, so the kept ids can be used to prefetch the
// neighbours' memories before the memory update of the vertex finishes.
//
// Sequence after start (one vertex at a time): 1 cycle to scale dt, MR
// cycles for the logits (one row of W_t per cycle), one cycle per kept
// neighbour for the top-k search, then exponent, reciprocal of the sum and
// normalisation, 1 cycle each; done pulses with the outputs valid.
//
// Following the paper: eq. (14) logits a + W_t dt with a learned vector a
// and matrix W_t, top-logit pruning with softmax over the kept neighbours
// only, budgets of 6/4/2 (NP(L/M/S)). This design's own: dt enters as
// (t_now - t_j) >> DT_SHIFT saturated to Q8.8, empty neighbour slots are
// skipped and enter the logits with dt = 0, ties go to the more recent neighbour, exp is the base-2
// shift-and-linear approximation e^x = 2^(x log2 e), and the sum is inverted
// by one divider. `budget` is a run-time input from 1 to KMAX.
module attention_module
  import tgnn_pkg::*;
#(
  parameter int N        = MR,
  parameter int K        = KMAX,
  parameter int DT_SHIFT = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  cfg_t cfg,
  input  logic start,
  input  nbr_t nbr [N],
  input  ts_t  t_now,
  input  logic [$clog2(K+1)-1:0] budget,
  output logic busy,
  output logic done,
  output logic [$clog2(K+1)-1:0] sel_cnt,
  output logic [$clog2(N)-1:0]   sel_idx [K],
  output vid_t sel_vid [K],
  output ts_t  sel_dt  [K],
  output fix_t alpha   [K]
);

  localparam int IW = $clog2(N);
  localparam int KW = $clog2(K+1);
  localparam logic signed [16:0] LOG2E = 17'sd369;   // log2(e) in Q8.8

  fix_t a_vec [N];
  fix_t w_t   [N][N];

  always_ff @(posedge clk) begin
    if (cfg.we && cfg.tgt == CFG_ATT_A && int'(cfg.col) < N)
      a_vec[cfg.col] <= fix_t'(cfg.data[15:0]);
    if (cfg.we && cfg.tgt == CFG_ATT_W && int'(cfg.row) < N && int'(cfg.col) < N)
      w_t[cfg.row][cfg.col] <= fix_t'(cfg.data[15:0]);
  end

  typedef enum logic [2:0] {S_IDLE, S_SCALE, S_LOGIT, S_SEL, S_EXP, S_DIV, S_NORM} st_e;
  st_e st;

  nbr_t          nb [N];
  ts_t           tn;
  logic [KW-1:0] bud;
  fix_t          dtf [N];
  fix_t          logit [N];
  logic [IW-1:0] row;
  logic [N-1:0]  taken;
  logic [16:0]   e [K];
  logic [19:0]   esum;
  logic [32:0]   recip;

  // best remaining neighbour
  logic          found;
  logic [IW-1:0] best;
  always_comb begin
    found = 1'b0;
    best  = '0;
    for (int j = 0; j < N; j++)
      if (nb[j].valid && !taken[j])
        if (!found || logit[j] > logit[best]) begin
          found = 1'b1;
          best  = IW'(j);
        end
  end

  // logit of the current row
  fix_t row_logit;
  always_comb begin
    acc_t s;
    s = acc_t'(a_vec[row]) <<< FRAC;
    for (int j = 0; j < N; j++) s = s + fmul(w_t[row][j], dtf[j]);
    row_logit = sat_acc(s);
  end

  // e^(l - lmax) for each kept neighbour, Q0.16
  function automatic logic [16:0] exp_neg(input fix_t l, input fix_t lmax);
    logic signed [16:0] d;
    logic signed [33:0] x;
    logic [16:0]        y;
    logic [8:0]         ip;
    logic [7:0]         fp;
    d  = 17'(l) - 17'(lmax);
    x  = (34'(d) * 34'(LOG2E)) >>> FRAC;
    y  = 17'(-x);
    ip = 9'(y >> 8);
    fp = y[7:0];
    if (ip >= 9'd17) return '0;
    return (17'd65536 - {2'b0, fp, 7'b0}) >> ip;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; busy <= 1'b0; done <= 1'b0;
      row <= '0; taken <= '0; tn <= '0; bud <= '0;
      esum <= '0; recip <= '0; sel_cnt <= '0;
      for (int j = 0; j < N; j++) begin nb[j] <= '0; dtf[j] <= '0; logit[j] <= '0; end
      for (int k = 0; k < K; k++) begin
        e[k] <= '0; sel_idx[k] <= '0; sel_vid[k] <= '0; sel_dt[k] <= '0; alpha[k] <= '0;
      end
    end else begin
      done <= 1'b0;
      case (st)
        S_IDLE: if (start) begin
          nb   <= nbr;
          tn   <= t_now;
          bud  <= (budget > KW'(K)) ? KW'(K) : budget;
          busy <= 1'b1;
          st   <= S_SCALE;
        end
        S_SCALE: begin
          for (int j = 0; j < N; j++) begin
            ts_t d;
            d = (nb[j].valid && tn >= nb[j].t) ? (tn - nb[j].t) : '0;
            d = d >> DT_SHIFT;
            dtf[j] <= (d > 32'd32767) ? 16'sh7fff : fix_t'(d[15:0]);
          end
          row <= '0;
          st  <= S_LOGIT;
        end
        S_LOGIT: begin
          logit[row] <= row_logit;
          if (int'(row) == N - 1) begin
            taken   <= '0;
            sel_cnt <= '0;
            st      <= S_SEL;
          end else row <= row + 1'b1;
        end
        S_SEL: begin
          if (found && sel_cnt < bud) begin
            sel_idx[sel_cnt] <= best;
            sel_vid[sel_cnt] <= nb[best].vid;
            sel_dt[sel_cnt]  <= (tn >= nb[best].t) ? (tn - nb[best].t) : '0;
            taken[best]      <= 1'b1;
            sel_cnt          <= sel_cnt + 1'b1;
          end else st <= S_EXP;
        end
        S_EXP: begin
          logic [19:0] s;
          s = '0;
          for (int k = 0; k < K; k++) begin
            logic [16:0] ek;
            ek = (k < int'(sel_cnt)) ? exp_neg(logit[sel_idx[k]], logit[sel_idx[0]]) : '0;
            e[k] <= ek;
            s = s + 20'(ek);
          end
          esum <= s;
          st   <= S_DIV;
        end
        S_DIV: begin
          recip <= (esum == 0) ? '0 : 33'((64'd1 << 32) / 64'(esum));
          st    <= S_NORM;
        end
        S_NORM: begin
          for (int k = 0; k < K; k++) begin
            logic [49:0] p;
            p = 50'(e[k]) * 50'(recip);
            alpha[k] <= fix_t'(p >> 24);
          end
          busy <= 1'b0;
          done <= 1'b1;
          st   <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
