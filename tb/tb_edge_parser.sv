// tb_edge_parser: self-checking test of edge_parser.
//
// Sends 12 random edge packets (src, dst, t, then 172 features two per word)
// with random gaps between words, and random back-pressure on the edge
// output. Every parsed edge is compared field by field with the packet that
// was sent, including the batch-end flag carried by s_last. With no gaps an
// edge appears P = 3 + 86 = 89 cycles after its first word.
module tb_edge_parser;
  import tgnn_pkg::*;
  localparam int FE = F_EDGE, NW = 3 + (FE + 1) / 2, NE = 12;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic s_valid, s_ready, s_last, edge_valid, edge_ready, edge_be;
  logic [31:0] s_data;
  vid_t src, dst;
  ts_t  t;
  fix_t fe [FE];

  edge_parser #(.FE(FE)) dut (.clk, .rst_n, .s_valid, .s_ready, .s_data, .s_last,
    .edge_valid, .edge_ready, .edge_src(src), .edge_dst(dst), .edge_t(t), .edge_fe(fe),
    .edge_batch_end(edge_be));

  vid_t es [NE];
  vid_t ed [NE];
  ts_t  et [NE];
  fix_t ef [NE][FE];
  logic eb [NE];
  bit   gaps = 1'b0;
  int   first_word_cyc [NE];
  int   cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sender
  initial begin
    s_valid = 0; s_data = 0; s_last = 0;
    for (int e = 0; e < NE; e++) begin
      es[e] = $urandom; ed[e] = $urandom; et[e] = $urandom; eb[e] = (e % 4 == 3);
      for (int i = 0; i < FE; i++) ef[e][i] = fix_t'($urandom);
    end
    repeat (3) @(posedge clk);
    rst_n = 1; #1;
    for (int e = 0; e < NE; e++) begin
      gaps = (e >= 2);
      for (int w = 0; w < NW; w++) begin
        while (gaps && $urandom_range(3) == 0) begin s_valid = 0; @(posedge clk); #1; end
        s_valid = 1;
        case (w)
          0: s_data = es[e];
          1: s_data = ed[e];
          2: s_data = et[e];
          default: s_data = {(2*(w-3)+1 < FE) ? ef[e][2*(w-3)+1] : 16'h0, ef[e][2*(w-3)]};
        endcase
        s_last = eb[e] && (w == NW - 1);
        do @(posedge clk); while (!s_ready);
        if (w == 0) first_word_cyc[e] = cyc;
        #1;
      end
      s_valid = 0; s_last = 0;
    end
  end

  // receiver
  initial begin
    edge_ready = 0;
    for (int e = 0; e < NE; e++) begin
      edge_ready = (e >= 2) ? ($urandom_range(1) == 1) : 1'b1;
      forever begin
        @(posedge clk);
        if (edge_valid && edge_ready) break;
        #1; edge_ready = (e >= 2) ? ($urandom_range(1) == 1) : 1'b1;
      end
      checks += 5;
      if (src !== es[e]) begin failures++; $display("edge %0d src", e); end
      if (dst !== ed[e]) begin failures++; $display("edge %0d dst", e); end
      if (t   !== et[e]) begin failures++; $display("edge %0d t", e); end
      if (edge_be !== eb[e]) begin failures++; $display("edge %0d batch end", e); end
      for (int i = 0; i < FE; i++) if (fe[i] !== ef[e][i]) begin
        failures++; $display("edge %0d fe[%0d]", e, i); break;
      end
      if (e == 0) begin
        checks++;
        if (cyc - first_word_cyc[0] != NW) begin
          failures++; $display("edge 0 after %0d cycles, expected %0d", cyc - first_word_cyc[0], NW);
        end
      end
      #1; edge_ready = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
