// edge_parser: turns the DMA word stream into edge records.
//
// Each new edge arrives as a packet of 32-bit words: source vertex id,
// destination vertex id, timestamp, then the FE edge-feature elements packed
// two Q8.8 values per word (element 2i in bits 15:0, element 2i+1 in bits
// 31:16). s_last, set on the final word of a packet, marks that edge as the
// last of its batch. One word is taken per cycle when s_ready is high; a
// finished edge is held on edge_valid until edge_ready, and the parser
// takes no new word meanwhile. A packet of P = 3 + ceil(FE/2) words thus
// yields its edge P cycles after the first word at the earliest.
//
// Following the paper: the Edge Parser receives the new edges from the host
// through DMA and parses src, dst, f_e and t_e. This design's own: the word
// layout and the batch-end flag.
module edge_parser
  import tgnn_pkg::*;
#(
  parameter int FE = F_EDGE
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        s_valid,
  output logic        s_ready,
  input  logic [31:0] s_data,
  input  logic        s_last,
  output logic        edge_valid,
  input  logic        edge_ready,
  output vid_t        edge_src,
  output vid_t        edge_dst,
  output ts_t         edge_t,
  output fix_t        edge_fe [FE],
  output logic        edge_batch_end
);

  localparam int NW = 3 + (FE + 1) / 2;

  logic [$clog2(NW+1)-1:0] wc;
  logic full;

  assign s_ready    = !full;
  assign edge_valid = full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wc <= '0; full <= 1'b0; edge_src <= '0; edge_dst <= '0; edge_t <= '0;
      edge_batch_end <= 1'b0;
      for (int i = 0; i < FE; i++) edge_fe[i] <= '0;
    end else begin
      if (full && edge_ready) full <= 1'b0;
      if (s_valid && s_ready) begin
        case (int'(wc))
          0: edge_src <= s_data;
          1: edge_dst <= s_data;
          2: edge_t   <= s_data;
          default: begin
            int unsigned e;
            e = (int'(wc) - 3) * 2;
            if (e < FE)     edge_fe[e]   <= fix_t'(s_data[15:0]);
            if (e + 1 < FE) edge_fe[e+1] <= fix_t'(s_data[31:16]);
          end
        endcase
        if (int'(wc) == NW - 1) begin
          wc             <= '0;
          full           <= 1'b1;
          edge_batch_end <= s_last;
        end else wc <= wc + 1'b1;
      end
    end
  end

  // a packet ends exactly at its last word
  a_last_pos: assert property (@(posedge clk) disable iff (!rst_n)
    (s_valid && s_ready && s_last) |-> (int'(wc) == NW - 1));

endmodule
