// tb_updater: self-checking test of updater.
//
// Records carry a global sequence number as data, so age is visible.
// Phase 1 writes 7 rounds of 4 slots (ids from a set of 6, some slots
// empty) with commits disabled, then enables commits with random output
// back-pressure: every id must be committed exactly once, with its newest
// record, and commits must come out in sequence order. Phase 2 writes and
// commits at the same time for 60 rounds; the final contents of a
// reference table (last committed value per id) must match the newest
// record of each id, and the records of one id must be committed in
// increasing age. It also counts the cycles where a 3-line window held no
// valid line and was skipped, and the cycles where a write waited on a full
// cache.
module tb_updater;
  import tgnn_pkg::*;
  localparam int LINES = 32, NIN = 4, PW = 64, NV = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, commit_en, out_valid, out_ready, pending;
  logic in_slot [NIN];
  vid_t in_vid [NIN];
  logic [PW-1:0] in_data [NIN];
  vid_t out_vid;
  logic [PW-1:0] out_data;

  updater #(.LINES(LINES), .NIN(NIN), .SCAN(3), .PW(PW)) dut (.clk, .rst_n, .in_valid,
    .in_ready, .in_slot, .in_vid, .in_data, .commit_en, .out_valid, .out_ready, .out_vid,
    .out_data, .pending);

  longint newest [NV];     // newest sequence number written per id
  longint table_v [NV];    // committed value per id
  int     ncommit [NV];
  longint last_seq = -1;
  longint seq = 0;
  bit     phase1 = 1'b1;
  int     skips = 0, stalls = 0;

  always @(posedge clk) if (rst_n) begin
    if (commit_en && !dut.found && dut.count != 0) skips++;
    if (in_valid && !in_ready) stalls++;
    if (out_valid && out_ready) begin
      int v;
      v = int'(out_vid);
      checks++;
      if (phase1 && longint'(out_data) <= last_seq) begin
        failures++; $display("commit out of order: %0d after %0d", out_data, last_seq);
      end
      if (!phase1 && longint'(out_data) <= table_v[v]) begin
        failures++; $display("id %0d: older record %0d after %0d", v, out_data, table_v[v]);
      end
      last_seq = longint'(out_data);
      table_v[v] = longint'(out_data);
      ncommit[v]++;
    end
  end

  task automatic write_round();
    for (int i = 0; i < NIN; i++) begin
      in_slot[i] = ($urandom_range(4) != 0);
      in_vid[i]  = $urandom_range(NV - 1);
      in_data[i] = seq;
      if (in_slot[i]) newest[in_vid[i]] = seq;
      seq++;
    end
    in_valid = 1'b1;
    do @(posedge clk); while (!in_ready);
    #1; in_valid = 1'b0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) out_ready = phase1 ? ($urandom_range(2) != 0) : ($urandom_range(3) != 0);

  initial begin
    in_valid = 0; commit_en = 0;
    for (int i = 0; i < NIN; i++) begin in_slot[i] = 0; in_vid[i] = 0; in_data[i] = 0; end
    for (int v = 0; v < NV; v++) begin newest[v] = -1; table_v[v] = -1; ncommit[v] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1; #1;
    // phase 1
    for (int r = 0; r < 7; r++) write_round();
    @(posedge clk); #1;
    commit_en = 1;
    while (pending) begin @(posedge clk); #1; end
    commit_en = 0;
    for (int v = 0; v < NV; v++) begin
      checks += 2;
      if (newest[v] >= 0 && ncommit[v] != 1) begin
        failures++; $display("id %0d committed %0d times", v, ncommit[v]);
      end
      if (table_v[v] != newest[v]) begin
        failures++; $display("id %0d holds %0d, newest %0d", v, table_v[v], newest[v]);
      end
    end
    // phase 2
    phase1 = 0;
    commit_en = 1;
    for (int r = 0; r < 60; r++) begin
      write_round();
      if ($urandom_range(3) == 0) begin @(posedge clk); #1; end
    end
    while (pending) begin @(posedge clk); #1; end
    for (int v = 0; v < NV; v++) begin
      checks++;
      if (table_v[v] != newest[v]) begin
        failures++; $display("phase 2: id %0d holds %0d, newest %0d", v, table_v[v], newest[v]);
      end
    end
    checks++;
    if (skips == 0) begin failures++; $display("window skip never happened"); end
    $display("window skips %0d, write stalls %0d", skips, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
