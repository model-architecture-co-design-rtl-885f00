// tb_neighbor_sampler: self-checking test of neighbor_sampler.
//
// Keeps a reference list (a queue, newest first, at most 10 entries) and
// pushes 40 random interactions into both it and the sampler row, which is
// fed back each step. After each push the row must equal the first 10 queue
// entries, with the rest of the row empty while fewer than 10 exist.
module tb_neighbor_sampler;
  import tgnn_pkg::*;
  localparam int N = 10;
  int checks = 0, failures = 0;

  nbr_t row_in [N];
  nbr_t row_out [N];
  vid_t nv;
  ts_t  nt;

  neighbor_sampler #(.N(N)) dut (.row_in, .new_vid(nv), .new_t(nt), .row_out);

  nbr_t q [$];

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) row_in[i] = '0;
    nt = 100;
    for (int s = 0; s < 40; s++) begin
      nbr_t e;
      nv = $urandom_range(1000);
      nt = nt + $urandom_range(50);
      e.valid = 1'b1; e.vid = nv; e.t = nt;
      q.push_front(e);
      if (q.size() > N) void'(q.pop_back());
      #1;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (i < q.size()) begin
          if (row_out[i] !== q[i]) begin failures++; $display("step %0d slot %0d wrong", s, i); end
        end else if (row_out[i].valid) begin
          failures++; $display("step %0d slot %0d should be empty", s, i);
        end
      end
      row_in = row_out;
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
