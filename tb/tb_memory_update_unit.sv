// tb_memory_update_unit: self-checking test of the MUU (GRU updater).
//
// Small sizes: memory 8, edge features 4 (message 20), 4x4 arrays, 8 LUT
// intervals. Random weights, biases, thresholds and LUT rows are loaded;
// 8 vertices are streamed in back to back. The reference GRU here computes
// r, z, n and s' from the same weights with clamp-style sigmoid and tanh;
// each new memory must match exactly and come out in input order. The
// two-stage pipeline must overlap: vertices leave at most
// max(stage A, stage B) + 4 cycles apart once the pipe is full, against
// more than stage A + stage B for one vertex alone.
module tb_memory_update_unit;
  import tgnn_pkg::*;
  localparam int M = 8, FE = 4, FM = 2 * M + FE, XI = FM + M, SG = 4, ENT = 8, NV = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc++;

  cfg_t cfg;
  logic in_valid, in_ready, out_valid, out_ready;
  vid_t in_vid, out_vid;
  fix_t in_mail [FM];
  fix_t in_mem [M];
  ts_t  in_dt;
  fix_t out_mem [M];

  memory_update_unit #(.M(M), .F_MAIL(FM), .SG(SG), .ENTRIES(ENT)) dut (.clk, .rst_n, .cfg,
    .in_valid, .in_ready, .in_vid, .in_mail, .in_mem, .in_dt, .out_valid, .out_ready,
    .out_vid, .out_mem);

  fix_t wr_ [M][XI];
  fix_t wz_ [M][XI];
  fix_t wn_ [2*M][XI];
  fix_t br_ [M];
  fix_t bz_ [M];
  fix_t bn_ [2*M];
  ts_t  thr [ENT-1];
  fix_t lut [ENT][3*M];

  fix_t vx [NV][XI];
  ts_t  vdt [NV];
  fix_t exp_s [NV][M];

  function automatic fix_t rnd(int range);
    return fix_t'($signed($urandom_range(2 * range)) - range);
  endfunction
  function automatic fix_t sat(longint v);
    return (v > 32767) ? 16'sh7fff : (v < -32768) ? 16'sh8000 : fix_t'(v);
  endfunction
  function automatic fix_t sig(fix_t x);
    longint y;
    y = (longint'(x) >>> 2) + 128;
    return fix_t'((y < 0) ? 0 : (y > 256) ? 256 : y);
  endfunction
  function automatic fix_t th(fix_t x);
    return (x > 256) ? 16'sd256 : (x < -256) ? -16'sd256 : x;
  endfunction
  function automatic fix_t mq(fix_t a, fix_t b);
    return sat((longint'(a) * longint'(b)) >>> 8);
  endfunction

  task automatic wr(cfg_tgt_e t, int r, int c, logic [31:0] v);
    cfg.we = 1'b1; cfg.tgt = t; cfg.row = 16'(r); cfg.col = 16'(c); cfg.data = v;
    @(posedge clk); #1;
    cfg.we = 1'b0;
  endtask

  task automatic reference(int v);
    int e;
    e = 0;
    for (int k = 0; k < ENT - 1; k++) if (vdt[v] >= thr[k]) e++;
    for (int i = 0; i < M; i++) begin
      longint sr, sz, sn, sh;
      fix_t r, z, n;
      sr = 0; sz = 0; sn = 0; sh = 0;
      for (int j = 0; j < XI; j++) begin
        sr += longint'(wr_[i][j]) * vx[v][j];
        sz += longint'(wz_[i][j]) * vx[v][j];
        if (j < FM) sn += longint'(wn_[i][j]) * vx[v][j];
        else        sh += longint'(wn_[M+i][j]) * vx[v][j];
      end
      r = sig(sat(longint'(sat(longint'(sat(sr >>> 8)) + br_[i])) + lut[e][i]));
      z = sig(sat(longint'(sat(longint'(sat(sz >>> 8)) + bz_[i])) + lut[e][M+i]));
      n = th(sat(longint'(sat(longint'(sat(longint'(sat(sn >>> 8)) + bn_[i])) + lut[e][2*M+i]))
                 + mq(r, sat(longint'(sat(sh >>> 8)) + bn_[M+i]))));
      exp_s[v][i] = sat(longint'(n) + mq(z, sat(longint'(vx[v][FM+i]) - n)));
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int got = 0;
  int out_cyc [NV];
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    out_cyc[got] = cyc;
    checks++;
    if (out_vid != vid_t'(100 + got)) begin failures++; $display("out %0d vid %0d", got, out_vid); end
    for (int i = 0; i < M; i++) begin
      checks++;
      if (out_mem[i] !== exp_s[got][i]) begin
        failures++; $display("vertex %0d s[%0d] = %0d exp %0d", got, i, out_mem[i], exp_s[got][i]);
      end
    end
    got++;
  end

  initial begin
    int t_in0, single;
    ts_t t;
    cfg = '0; in_valid = 0; in_vid = 0; in_dt = 0; out_ready = 1;
    for (int i = 0; i < FM; i++) in_mail[i] = 0;
    for (int i = 0; i < M; i++) in_mem[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1; #1;
    for (int i = 0; i < M; i++) begin
      for (int j = 0; j < XI; j++) begin
        wr_[i][j] = rnd(120); wr(CFG_W_R, i, j, 32'($signed(wr_[i][j])));
        wz_[i][j] = rnd(120); wr(CFG_W_Z, i, j, 32'($signed(wz_[i][j])));
      end
      br_[i] = rnd(100); wr(CFG_B_R, i, 0, 32'($signed(br_[i])));
      bz_[i] = rnd(100); wr(CFG_B_Z, i, 0, 32'($signed(bz_[i])));
    end
    for (int i = 0; i < 2 * M; i++) begin
      for (int j = 0; j < XI; j++) begin
        wn_[i][j] = rnd(120); wr(CFG_W_N, i, j, 32'($signed(wn_[i][j])));
      end
      bn_[i] = rnd(100); wr(CFG_B_N, i, 0, 32'($signed(bn_[i])));
    end
    t = 0;
    for (int k = 0; k < ENT - 1; k++) begin t += 1 + $urandom_range(50); thr[k] = t; wr(CFG_MT_THR, 0, k, t); end
    for (int e = 0; e < ENT; e++)
      for (int d = 0; d < 3 * M; d++) begin lut[e][d] = rnd(200); wr(CFG_MT_VAL, e, d, 32'($signed(lut[e][d]))); end
    for (int v = 0; v < NV; v++) begin
      for (int j = 0; j < XI; j++) vx[v][j] = rnd(300);
      vdt[v] = $urandom_range(400);
      reference(v);
    end
    // vertex 0 alone, to measure the unpipelined latency
    for (int v = 0; v < NV; v++) begin
      for (int j = 0; j < FM; j++) in_mail[j] = vx[v][j];
      for (int j = 0; j < M; j++)  in_mem[j]  = vx[v][FM+j];
      in_dt = vdt[v]; in_vid = vid_t'(100 + v);
      in_valid = 1;
      do @(posedge clk); while (!in_ready);
      if (v == 0) t_in0 = cyc;
      #1; in_valid = 0;
      if (v == 0) begin
        while (got == 0) begin @(posedge clk); #1; end
        single = out_cyc[0] - t_in0;
      end
    end
    while (got < NV) begin @(posedge clk); #1; end
    checks += 2;
    // stage A: ceil(8/4)*ceil(28/4) = 14; stage B: 2*5 + 2*2 = 14
    if (single <= 28) begin failures++; $display("single latency %0d too short", single); end
    for (int v = 3; v < NV; v++)
      if (out_cyc[v] - out_cyc[v-1] > 14 + 4) begin
        failures++; $display("no overlap: outputs %0d cycles apart", out_cyc[v] - out_cyc[v-1]); break;
      end
    $display("single-vertex latency %0d cycles, streaming interval %0d", single, out_cyc[NV-1] - out_cyc[NV-2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
