// tb_table_mem: behavioural model of the external vertex tables (not
// synthesizable, testbench only).
//
// Holds NV rows of each table: vertex memory with last-update time,
// mailbox, neighbour row and vertex features. Each read channel accepts one
// request at a time (ready while no answer is pending) and answers LAT
// cycles later with a one-cycle response valid. The write channel writes the
// memory, mailbox and neighbour rows of one vertex; tw_ready is random when
// BUSY_WR is set, to exercise back-pressure. Testbenches fill and inspect
// the arrays directly.
module tb_table_mem
  import tgnn_pkg::*;
#(
  parameter int M = 8, parameter int FE = 4, parameter int FF = 4, parameter int N = 4,
  parameter int NV = 16, parameter int LAT = 3, parameter bit BUSY_WR = 1'b1,
  localparam int FM = 2 * M + FE
) (
  input  logic clk, input logic rst_n,
  input  logic vm_req_valid, output logic vm_req_ready, input vid_t vm_req_addr,
  output logic vm_rsp_valid, output fix_t vm_rsp_mem [M], output ts_t vm_rsp_t,
  input  logic ml_req_valid, output logic ml_req_ready, input vid_t ml_req_addr,
  output logic ml_rsp_valid, output fix_t ml_rsp [FM],
  input  logic nb_req_valid, output logic nb_req_ready, input vid_t nb_req_addr,
  output logic nb_rsp_valid, output nbr_t nb_rsp [N],
  input  logic ft_req_valid, output logic ft_req_ready, input vid_t ft_req_addr,
  output logic ft_rsp_valid, output fix_t ft_rsp [FF],
  input  logic tw_valid, output logic tw_ready, input vid_t tw_vid,
  input  fix_t tw_mem [M], input ts_t tw_t, input fix_t tw_mail [FM], input nbr_t tw_nbr [N]
);
  fix_t mem  [NV][M];
  ts_t  last [NV];
  fix_t mail [NV][FM];
  nbr_t nbr  [NV][N];
  fix_t feat [NV][FF];
  int   writes = 0, reads = 0;

  int vm_c = 0, ml_c = 0, nb_c = 0, ft_c = 0;
  int vm_a, ml_a, nb_a, ft_a;
  assign vm_req_ready = (vm_c == 0);
  assign ml_req_ready = (ml_c == 0);
  assign nb_req_ready = (nb_c == 0);
  assign ft_req_ready = (ft_c == 0);

  initial begin
    vm_rsp_valid = 0; ml_rsp_valid = 0; nb_rsp_valid = 0; ft_rsp_valid = 0; tw_ready = 1;
    vm_rsp_t = 0;
    for (int i = 0; i < M; i++) vm_rsp_mem[i] = 0;
    for (int i = 0; i < FM; i++) ml_rsp[i] = 0;
    for (int i = 0; i < N; i++) nb_rsp[i] = '0;
    for (int i = 0; i < FF; i++) ft_rsp[i] = 0;
  end

  always @(posedge clk) if (!rst_n) begin
    vm_c <= 0; ml_c <= 0; nb_c <= 0; ft_c <= 0;
    vm_rsp_valid <= 0; ml_rsp_valid <= 0; nb_rsp_valid <= 0; ft_rsp_valid <= 0;
  end else begin
    vm_rsp_valid <= 0; ml_rsp_valid <= 0; nb_rsp_valid <= 0; ft_rsp_valid <= 0;
    if (vm_c > 0) begin vm_c <= vm_c - 1; if (vm_c == 1) begin
      vm_rsp_valid <= 1; vm_rsp_mem <= mem[vm_a]; vm_rsp_t <= last[vm_a]; end end
    else if (vm_req_valid) begin vm_c <= LAT; vm_a <= int'(vm_req_addr) % NV; reads++; end
    if (ml_c > 0) begin ml_c <= ml_c - 1; if (ml_c == 1) begin
      ml_rsp_valid <= 1; ml_rsp <= mail[ml_a]; end end
    else if (ml_req_valid) begin ml_c <= LAT; ml_a <= int'(ml_req_addr) % NV; reads++; end
    if (nb_c > 0) begin nb_c <= nb_c - 1; if (nb_c == 1) begin
      nb_rsp_valid <= 1; nb_rsp <= nbr[nb_a]; end end
    else if (nb_req_valid) begin nb_c <= LAT; nb_a <= int'(nb_req_addr) % NV; reads++; end
    if (ft_c > 0) begin ft_c <= ft_c - 1; if (ft_c == 1) begin
      ft_rsp_valid <= 1; ft_rsp <= feat[ft_a]; end end
    else if (ft_req_valid) begin ft_c <= LAT; ft_a <= int'(ft_req_addr) % NV; reads++; end
    if (tw_valid && tw_ready) begin
      mem[int'(tw_vid) % NV]  <= tw_mem;
      last[int'(tw_vid) % NV] <= tw_t;
      mail[int'(tw_vid) % NV] <= tw_mail;
      nbr[int'(tw_vid) % NV]  <= tw_nbr;
      writes++;
    end
    tw_ready <= BUSY_WR ? ($urandom_range(3) != 0) : 1'b1;
  end
endmodule
