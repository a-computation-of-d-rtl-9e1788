// dedekind_accelerator: the FPGA kernel that turns a stream of bottoms into a stream of
// per-bottom P-coefficient sums for one top.
//
// For a top alpha (a monotone Boolean function of 7 variables, held on the alpha port for a
// whole job) and each bottom beta arriving on the input stream, the kernel returns
//   pcoeff_sum  = sum over the 5040 variable permutations gamma of beta with alpha <= gamma of
//                 2^C(alpha,gamma), C being the number of connected components of
//                 gamma AND NOT alpha,
//   valid_count = the number of such gamma (the "valid permutation count" the host uses to
//                 detect corrupted buffers),
// in the same order as the bottoms came in. The host weights and adds these sums; that part,
// the PCIe transfers and the on-board DDR buffers are outside this module, whose streams stand
// for the buffer reads and writes.
//
// N_PIPELINES pipelines (10 on the die, each with N_CORES = 30 CountConnected cores, 300 in all,
// as the paper reports) take bottoms in round-robin order; results are collected in the same
// round-robin order, which keeps the output in input order without tags. The round-robin
// distribution is this design's choice; the paper gives the pipeline and core counts.
//
// Interface: valid/ready streams on both sides (a transfer happens when both are high). idle is
// high when no bottom is in flight; alpha may change only then. Reset: active-low synchronous.
module dedekind_accelerator
  import dedekind_pkg::*;
#(
  parameter int unsigned N_PIPELINES = 10,
  parameter int unsigned N_CORES     = 30,
  parameter int unsigned K_SEQ       = 4
) (
  input  logic           clk,
  input  logic           rst_n,
  input  tt_t            alpha,
  input  logic           in_valid,
  input  tt_t            in_bottom,
  output logic           in_ready,
  output logic           out_valid,
  input  logic           out_ready,
  output bottom_result_t out_result,
  output logic           idle
);
  localparam int unsigned PTR_W = (N_PIPELINES > 1) ? $clog2(N_PIPELINES) : 1;

  logic [PTR_W-1:0] in_ptr_q, out_ptr_q;
  logic             p_in_valid  [N_PIPELINES];
  logic             p_in_ready  [N_PIPELINES];
  logic             p_out_valid [N_PIPELINES];
  logic             p_out_ready [N_PIPELINES];
  bottom_result_t   p_result    [N_PIPELINES];
  logic             p_idle      [N_PIPELINES];

  for (genvar p = 0; p < N_PIPELINES; p++) begin : g_pipe
    assign p_in_valid[p]  = in_valid && (in_ptr_q == PTR_W'(p));
    assign p_out_ready[p] = out_ready && (out_ptr_q == PTR_W'(p));
    pcoeff_pipeline #(.N_CORES(N_CORES), .K_SEQ(K_SEQ)) u_pipe (
      .clk, .rst_n, .alpha,
      .in_valid(p_in_valid[p]), .in_bottom, .in_ready(p_in_ready[p]),
      .out_valid(p_out_valid[p]), .out_ready(p_out_ready[p]), .out_result(p_result[p]),
      .idle(p_idle[p])
    );
  end

  assign in_ready   = p_in_ready[in_ptr_q];
  assign out_valid  = p_out_valid[out_ptr_q];
  assign out_result = p_result[out_ptr_q];

  always_comb begin
    idle = 1'b1;
    for (int p = 0; p < N_PIPELINES; p++) idle &= p_idle[p];
  end

  function automatic logic [PTR_W-1:0] next_ptr(input logic [PTR_W-1:0] ptr);
    return (ptr == PTR_W'(N_PIPELINES - 1)) ? '0 : ptr + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      in_ptr_q  <= '0;
      out_ptr_q <= '0;
    end else begin
      if (in_valid && in_ready)   in_ptr_q  <= next_ptr(in_ptr_q);
      if (out_valid && out_ready) out_ptr_q <= next_ptr(out_ptr_q);
    end
  end
endmodule
