// updater: write-back cache that keeps vertex updates in time order and
// drops superseded ones.
//
// A fully associative ring of LINES cache lines, each holding one vertex
// record (PW bits: memory, message, neighbours, time), its vertex id and a
// valid flag. The computation units deliver their results together, one
// write of NIN slots per round in the round-robin order in which edges were
// handed out; slot i lands at write pointer i = wptr + i, so a later edge
// always sits behind an earlier one and ring order is time order. Every new
// vertex id is compared with the id of every line still waiting; a waiting
// line with the same id is invalidated (its update is stale), and among the
// slots of one write only the last one of an id stays valid.
//
// The commit pointer looks at SCAN consecutive lines per cycle. When
// commit_en is high it sends the first valid line of that window to
// external memory (out_valid/out_ready) and moves just past it; if the whole
// window is invalidated it moves past the window. A write is accepted
// (in_ready) when at least NIN lines are free. `pending` is high while any
// line is still waiting.
//
// Following the paper (Fig. 3 and Sec. IV-B): fully associative cache with
// rotating write pointers and a commit pointer, per-line vid and flag,
// comparison of incoming vids with every line and invalidation of
// uncommitted duplicates, a commit window of 3 lines. This design's own:
// each CU writes both endpoints of its edge at once, so there are two write
// pointers per CU (the paper's figure shows one per CU), invalid slots still
// take a line, one line is committed per cycle, and the ring size.
module updater
  import tgnn_pkg::*;
#(
  parameter int LINES = 16,
  parameter int NIN   = 4,
  parameter int SCAN  = 3,
  parameter int PW    = 64
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic          in_slot [NIN],
  input  vid_t          in_vid  [NIN],
  input  logic [PW-1:0] in_data [NIN],
  input  logic          commit_en,
  output logic          out_valid,
  input  logic          out_ready,
  output vid_t          out_vid,
  output logic [PW-1:0] out_data,
  output logic          pending
);

  localparam int LW = $clog2(LINES);
  localparam int CW = $clog2(LINES + 1);

  logic          flag [LINES];
  vid_t          lvid [LINES];
  logic [PW-1:0] ldat [LINES];
  logic [LW-1:0] wptr, cptr;
  logic [CW-1:0] count;

  assign in_ready = (CW'(LINES) - count) >= CW'(NIN);
  logic wr;
  assign wr = in_valid && in_ready;

  // flags of the new slots: a later slot with the same id wins
  logic new_flag [NIN];
  always_comb
    for (int i = 0; i < NIN; i++) begin
      new_flag[i] = in_slot[i];
      for (int j = i + 1; j < NIN; j++)
        if (in_slot[j] && in_vid[j] == in_vid[i]) new_flag[i] = 1'b0;
    end

  // id comparison against every line
  logic hit [LINES];
  always_comb
    for (int l = 0; l < LINES; l++) begin
      hit[l] = 1'b0;
      for (int i = 0; i < NIN; i++)
        if (wr && in_slot[i] && in_vid[i] == lvid[l]) hit[l] = 1'b1;
    end

  // commit window
  logic          found;
  logic [LW-1:0] off;
  logic [CW-1:0] span;
  always_comb begin
    found = 1'b0;
    off   = '0;
    span  = (count < CW'(SCAN)) ? count : CW'(SCAN);
    for (int o = SCAN - 1; o >= 0; o--)
      if (CW'(o) < count && flag[LW'(cptr + LW'(o))]) begin
        found = 1'b1;
        off   = LW'(o);
      end
  end

  logic [LW-1:0] cline;
  assign cline     = cptr + off;
  assign out_valid = commit_en && found;
  assign out_vid   = lvid[cline];
  assign out_data  = ldat[cline];
  assign pending   = (count != 0);

  logic [CW-1:0] adv;
  always_comb begin
    adv = '0;
    if (commit_en) begin
      if (found) begin
        if (out_ready) adv = CW'(off) + 1'b1;
      end else adv = span;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0; cptr <= '0; count <= '0;
      for (int l = 0; l < LINES; l++) begin flag[l] <= 1'b0; lvid[l] <= '0; ldat[l] <= '0; end
    end else begin
      for (int l = 0; l < LINES; l++)
        if (hit[l]) flag[l] <= 1'b0;
      if (out_valid && out_ready) flag[cline] <= 1'b0;
      if (wr) begin
        for (int i = 0; i < NIN; i++) begin
          flag[LW'(wptr + LW'(i))] <= new_flag[i];
          lvid[LW'(wptr + LW'(i))] <= in_vid[i];
          ldat[LW'(wptr + LW'(i))] <= in_data[i];
        end
        wptr <= wptr + LW'(NIN);
      end
      cptr  <= cptr + LW'(adv);
      count <= count + (wr ? CW'(NIN) : '0) - adv;
    end
  end

  // rules of the ring
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) count <= CW'(LINES));
  a_ring_pow2:   assert property (@(posedge clk) disable iff (!rst_n) (LINES & (LINES - 1)) == 0);

endmodule
