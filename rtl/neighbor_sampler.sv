// neighbor_sampler: FIFO-based most-recent temporal neighbour sampler.
//
// A vertex's row of the neighbour table is a FIFO of its N most recent
// interactions (neighbour id and time), newest first. A new interaction is
// pushed at the front, every entry moves one place back and the oldest
// falls out, so the row always holds exactly the most recent N neighbours
// in time order and sampling is just reading the row. Purely combinational.
//
// Following the paper: the temporal sampler is replaced by an on-chip FIFO
// that keeps the mr most recent neighbours (UpdateNeighbor of Algorithm 1).
// This design's own: entry layout (valid, id, time) and newest-first order.
module neighbor_sampler
  import tgnn_pkg::*;
#(
  parameter int N = MR
) (
  input  nbr_t row_in  [N],
  input  vid_t new_vid,
  input  ts_t  new_t,
  output nbr_t row_out [N]
);

  always_comb begin
    row_out[0].valid = 1'b1;
    row_out[0].vid   = new_vid;
    row_out[0].t     = new_t;
    for (int i = 1; i < N; i++) row_out[i] = row_in[i-1];
  end

endmodule
