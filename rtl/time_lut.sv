// time_lut: look-up-table time encoder.
//
// Replaces the time encoder cos(w*dt + phi) and the weight product that
// follows it. The dt axis is cut into ENTRIES intervals by ENTRIES-1
// ascending thresholds; the interval index is the number of thresholds that
// dt reaches (dt >= thr[k]). Each entry holds a DIM-element vector that is
// the time encoding of its interval already multiplied by the weight
// matrices that consume it, so the output can be added straight into a
// gate or embedding sum.
//
// Following the paper: 128 intervals with equal numbers of dt occurrences
// each (the thresholds are set by the host from training data), learned
// entries, pre-multiplied by the weights, answer within one clock cycle.
// This design's choices: all thresholds are compared in parallel, the
// result is registered (valid one cycle after the request), and thresholds
// and entries are written through the configuration bus (TGT_THR: col =
// threshold index; TGT_VAL: row = entry, col = element).
module time_lut
  import tgnn_pkg::*;
#(
  parameter int       ENTRIES = LUT_N,
  parameter int       DIM     = 16,
  parameter cfg_tgt_e TGT_THR = CFG_MT_THR,
  parameter cfg_tgt_e TGT_VAL = CFG_MT_VAL
) (
  input  logic clk,
  input  logic rst_n,
  input  cfg_t cfg,
  input  logic req,
  input  ts_t  dt,
  output logic vld,
  output logic [$clog2(ENTRIES)-1:0] idx,
  output fix_t vec [DIM]
);

  localparam int IW = $clog2(ENTRIES);

  ts_t  thr [ENTRIES-1];
  fix_t tab [ENTRIES][DIM];

  logic [IW-1:0] sel;
  always_comb begin
    sel = '0;
    for (int k = 0; k < ENTRIES - 1; k++)
      if (dt >= thr[k]) sel = sel + 1'b1;
  end

  always_ff @(posedge clk) begin
    if (cfg.we && cfg.tgt == TGT_THR && int'(cfg.col) < ENTRIES - 1)
      thr[cfg.col] <= cfg.data;
    if (cfg.we && cfg.tgt == TGT_VAL && int'(cfg.row) < ENTRIES && int'(cfg.col) < DIM)
      tab[cfg.row][cfg.col] <= fix_t'(cfg.data[15:0]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld <= 1'b0;
      idx <= '0;
      for (int d = 0; d < DIM; d++) vec[d] <= '0;
    end else begin
      vld <= req;
      if (req) begin
        idx <= sel;
        for (int d = 0; d < DIM; d++) vec[d] <= tab[sel][d];
      end
    end
  end

endmodule
