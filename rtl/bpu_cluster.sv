// bpu_cluster: the pipelined cluster of 7 BPUs computing one 2D convolution output
// per cycle.
//
// BPU i works on kernel row i: it receives the image word of input row r+i (from the
// crossbar) and the weights of kernel row i. The 8-bit row sums of the BPUs with
// i < k are added into a signed 16-bit output. While the window slides horizontally
// one new column enters all image CSRs per cycle, so once the window is full one
// output leaves per cycle.
// Pipeline: CSR shift (edge 0) -> BPU row-sum register (edge 1) -> output register
// (edge 2). A tag entered with a shift (valid + output column) travels through the
// same two stages and leaves as out_valid / out_col aligned with out.
// The 7x7 organisation and the widths 8 and 16 follow the published figure; the
// register placement and the tag are this design's choices.
module bpu_cluster
  import xnorbin_pkg::*;
#(
  parameter int unsigned N_BPU = KMAX,
  parameter int unsigned COL_W = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [3:0]              k,
  input  logic                    img_shift,
  input  word_t [N_BPU-1:0]       img_in,
  input  logic [N_BPU-1:0]        wgt_shift,
  input  word_t                   wgt_in,
  input  logic                    tag_valid,   // the window is complete after this shift
  input  logic [COL_W-1:0]        tag_col,
  output logic                    out_valid,
  output logic [COL_W-1:0]        out_col,
  output logic signed [OUT_W-1:0] out
);
  logic signed [BPU_W-1:0] rs [N_BPU];
  logic signed [OUT_W-1:0] sum_c;
  logic [2:0]              v_q;
  logic [COL_W-1:0]        c_q [3];

  for (genvar i = 0; i < N_BPU; i++) begin : g_bpu
    bpu #(.N_XS(N_BPU)) u_bpu (
      .clk, .rst_n, .k,
      .img_shift, .img_in(img_in[i]),
      .wgt_shift(wgt_shift[i]), .wgt_in,
      .row_sum(rs[i])
    );
  end

  always_comb begin
    sum_c = '0;
    for (int i = 0; i < N_BPU; i++)
      if (i < int'(k)) sum_c += OUT_W'(rs[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q <= '0; c_q[0] <= '0; c_q[1] <= '0; c_q[2] <= '0; out <= '0;
    end else begin
      v_q    <= {v_q[1:0], tag_valid & img_shift};
      if (img_shift) c_q[0] <= tag_col;
      c_q[1] <= c_q[0];
      c_q[2] <= c_q[1];
      out    <= sum_c;
    end
  end
  assign out_valid = v_q[2];
  assign out_col   = c_q[2];
endmodule
