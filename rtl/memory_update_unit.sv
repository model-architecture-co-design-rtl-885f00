// memory_update_unit (MUU): GRU memory updater of one computation unit.
//
// For one vertex it takes the cached message m (F_MAIL elements: s_self,
// s_other and the edge features), the old memory s (F_MEM) and dt, the time
// since the memory was last updated, and produces the new memory
//   r  = sigma(W_r [m||s] + b_r + T_r(dt))          update gate
//   z  = sigma(W_z [m||s] + b_z + T_z(dt))          reset gate
//   n  = tanh(W_in m + b_in + T_n(dt) + r*(W_hn s + b_hn))   memory gate
//   s' = (1 - z) n + z s                            merging gate
// where T_r, T_z, T_n are the three F_MEM-element slices of one time_lut
// whose entries hold the time encoding already multiplied by the
// time-encoding columns of W_ir, W_iz and W_in (so the time part of the
// message is not stored or multiplied here).
//
// Two pipeline stages with a one-entry hand-off between them: stage A runs
// the time LUT and the update and reset gates in parallel (two mac_arrays);
// stage B runs the memory gate (one block-diagonal mac_array computing
// W_in m and W_hn s in one pass) and the merging gate. While stage B works
// on one vertex, stage A can work on the next. Input and output use
// valid/ready; a vertex takes about ceil(F_MEM/SG)*ceil((F_MAIL+F_MEM)/SG)
// cycles per stage.
//
// Following the paper: one SG x SG multiply-accumulate array per gate, the
// gate names of eq. (6)-(9), the time-encoding LUT in place of the time
// encoder, gates in a pipeline. This design's own: piecewise-linear sigmoid
// and tanh, the two-stage grouping and the fixed-point format.
module memory_update_unit
  import tgnn_pkg::*;
#(
  parameter int M       = F_MEM,
  parameter int F_MAIL  = 2 * F_MEM + F_EDGE,
  parameter int SG      = 8,
  parameter int ENTRIES = LUT_N
) (
  input  logic clk,
  input  logic rst_n,
  input  cfg_t cfg,
  input  logic in_valid,
  output logic in_ready,
  input  vid_t in_vid,
  input  fix_t in_mail [F_MAIL],
  input  fix_t in_mem  [M],
  input  ts_t  in_dt,
  output logic out_valid,
  input  logic out_ready,
  output vid_t out_vid,
  output fix_t out_mem [M]
);

  localparam int XI = F_MAIL + M;

  // ---------------- stage A: time LUT, update gate, reset gate -------------
  typedef enum logic [1:0] {A_IDLE, A_RUN, A_HOLD} a_state_e;
  a_state_e a_st;
  fix_t xa [XI];
  vid_t a_vid;
  logic a_start, r_done, z_done, r_busy, z_busy, r_seen, z_seen;
  fix_t yr [M];
  fix_t yz [M];
  logic te_vld;
  logic [$clog2(ENTRIES)-1:0] te_idx;
  fix_t te [3*M];
  fix_t te_n_a [M];
  logic a_to_b;
  logic a_start_d;

  assign in_ready = (a_st == A_IDLE);
  assign a_start  = in_valid && in_ready;

  mac_array #(.IN(XI), .OUT(M), .SG_R(SG), .SG_C(SG), .SPLIT(0),
              .TGT_W(CFG_W_R), .TGT_B(CFG_B_R)) u_gate_r (
    .clk, .rst_n, .cfg, .start(a_start_d), .x(xa), .busy(r_busy), .done(r_done), .y(yr));
  mac_array #(.IN(XI), .OUT(M), .SG_R(SG), .SG_C(SG), .SPLIT(0),
              .TGT_W(CFG_W_Z), .TGT_B(CFG_B_Z)) u_gate_z (
    .clk, .rst_n, .cfg, .start(a_start_d), .x(xa), .busy(z_busy), .done(z_done), .y(yz));
  time_lut #(.ENTRIES(ENTRIES), .DIM(3*M), .TGT_THR(CFG_MT_THR), .TGT_VAL(CFG_MT_VAL)) u_tlut (
    .clk, .rst_n, .cfg, .req(a_start), .dt(in_dt), .vld(te_vld), .idx(te_idx), .vec(te));

  // the arrays start one cycle after the input is latched
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) a_start_d <= 1'b0;
    else        a_start_d <= a_start;

  fix_t r_g [M];
  fix_t z_g [M];
  fix_t te_r_a [M];
  fix_t te_z_a [M];
  always_comb
    for (int i = 0; i < M; i++) begin
      r_g[i] = hsigmoid(sat_add(yr[i], te_r_a[i]));
      z_g[i] = hsigmoid(sat_add(yz[i], te_z_a[i]));
    end

  // ---------------- stage B: memory gate, merging gate ---------------------
  typedef enum logic [1:0] {B_IDLE, B_START, B_RUN, B_OUT} b_state_e;
  b_state_e b_st;
  fix_t xb [XI];
  fix_t rb [M];
  fix_t zb [M];
  fix_t te_n_b [M];
  vid_t b_vid;
  logic n_done, n_busy;
  fix_t yn [2*M];

  assign a_to_b = (a_st == A_HOLD) && (b_st == B_IDLE);

  mac_array #(.IN(XI), .OUT(2*M), .SG_R(SG), .SG_C(SG), .SPLIT(F_MAIL),
              .TGT_W(CFG_W_N), .TGT_B(CFG_B_N)) u_gate_n (
    .clk, .rst_n, .cfg, .start(b_st == B_START), .x(xb), .busy(n_busy), .done(n_done), .y(yn));

  fix_t s_new [M];
  always_comb
    for (int i = 0; i < M; i++) begin
      fix_t pre, n, s_old;
      pre   = sat_add(sat_add(yn[i], te_n_b[i]), fmul_q(rb[i], yn[M+i]));
      n     = htanh(pre);
      s_old = xb[F_MAIL+i];
      s_new[i] = sat_add(n, fmul_q(zb[i], sat_add(s_old, -n)));
    end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_st <= A_IDLE; b_st <= B_IDLE;
      a_vid <= '0; b_vid <= '0; out_vid <= '0;
      r_seen <= 1'b0; z_seen <= 1'b0;
      for (int i = 0; i < XI; i++) begin xa[i] <= '0; xb[i] <= '0; end
      for (int i = 0; i < M; i++) begin
        rb[i] <= '0; zb[i] <= '0;
        te_r_a[i] <= '0; te_z_a[i] <= '0; te_n_a[i] <= '0; te_n_b[i] <= '0;
        out_mem[i] <= '0;
      end
    end else begin
      // stage A
      case (a_st)
        A_IDLE: if (a_start) begin
          for (int i = 0; i < F_MAIL; i++) xa[i] <= in_mail[i];
          for (int i = 0; i < M; i++)      xa[F_MAIL+i] <= in_mem[i];
          a_vid  <= in_vid;
          r_seen <= 1'b0; z_seen <= 1'b0;
          a_st   <= A_RUN;
        end
        A_RUN: begin
          if (te_vld)
            for (int i = 0; i < M; i++) begin
              te_r_a[i] <= te[i]; te_z_a[i] <= te[M+i]; te_n_a[i] <= te[2*M+i];
            end
          if (r_done) r_seen <= 1'b1;
          if (z_done) z_seen <= 1'b1;
          if ((r_done || r_seen) && (z_done || z_seen)) begin
            a_st <= A_HOLD;
          end
        end
        A_HOLD: begin
          if (a_to_b) a_st <= A_IDLE;
        end
        default: a_st <= A_IDLE;
      endcase

      // stage B
      case (b_st)
        B_IDLE: if (a_to_b) begin
          for (int i = 0; i < XI; i++) xb[i] <= xa[i];
          for (int i = 0; i < M; i++) begin
            rb[i] <= r_g[i]; zb[i] <= z_g[i]; te_n_b[i] <= te_n_a[i];
          end
          b_vid <= a_vid;
          b_st  <= B_START;
        end
        B_START: b_st <= B_RUN;
        B_RUN: if (n_done) begin
          for (int i = 0; i < M; i++) out_mem[i] <= s_new[i];
          out_vid <= b_vid;
          b_st    <= B_OUT;
        end
        B_OUT: if (out_ready) b_st <= B_IDLE;
        default: b_st <= B_IDLE;
      endcase
    end
  end

  assign out_valid = (b_st == B_OUT);

endmodule
