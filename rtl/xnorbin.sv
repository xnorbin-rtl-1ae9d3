// xnorbin: top level of the binary CNN accelerator.
//
// Feature maps and weights are bipolar (+1/-1, stored as 1/0) and packed 16 maps per
// 16-bit word, so a convolution reduces to XNOR and popcount. The accelerator runs a
// network layer by layer:
//   * two image memories (128 and 256 kbit) hold the input maps of the current layer
//     (source) and its partial sums and output maps (sink); they swap roles per layer;
//   * the DMA copies input rows of one 16-map slice into 7 row banks;
//   * a crossbar connects the banks, rotated by the output row, to the 7 BPUs of the
//     cluster and steers weights into their weight CSRs;
//   * each BPU shifts one pixel word per cycle into its image CSR and computes a 7-tap
//     1D convolution with 7 xnor_sum units; the cluster adds the 7 rows into one 2D
//     convolution result per cycle (kernels up to 7 x 7);
//   * the near-memory compute unit of the DMA accumulates the result over input
//     slices in the sink memory (read-add-write), then thresholds (activation plus
//     batch normalisation) and packs 16 output bits per word, optionally followed by
//     2 x 2 OR (max) pooling;
//   * a parameter buffer holds weights, thresholds and layer descriptors; the
//     scheduler runs the loops; io_ctrl is the pin interface.
// Ports are the 18 input and 6 output signal pins (plus clock and reset). The block
// structure and sizes follow the published design; see the module headers for what
// each block adds of its own.
module xnorbin
  import xnorbin_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [15:0] io_din,
  input  logic        io_valid,
  input  logic        io_cmd,
  output logic [3:0]  io_dout,
  output logic        io_dvalid,
  output logic        io_done
);
  // ---------------------------------------------------------------- signals
  logic                io_m_sel, io_m_re, io_m_we;
  logic [LINE_AW-1:0]  io_m_addr;
  logic [MEM_W-1:0]    io_m_wdata, io_m_rdata;
  logic                p_we;
  logic [PARAM_AW-1:0] p_waddr;
  logic [MEM_W-1:0]    p_wdata;
  logic                start, sch_done, sch_busy;
  logic [PARAM_AW-1:0] cfg_ptr;

  logic                prm_re, sch_prm_re, dma_prm_re;
  logic [PARAM_AW-1:0] prm_addr, sch_prm_addr, dma_prm_addr;
  logic [MEM_W-1:0]    prm_rdata;

  logic                cmd_valid, dma_busy, dma_done, first, role;
  dma_cmd_e            cmd;
  layer_desc_t         desc;
  logic [15:0]         og, s, y, r;
  logic [3:0]          l;
  logic [2:0]          rot;

  logic                src_re, snk_re, snk_we;
  logic [1:0]          snk_be;
  logic [LINE_AW-1:0]  src_addr, snk_addr;
  logic [MEM_W-1:0]    src_rdata, snk_wdata, snk_rdata;

  logic [1:0]              m_re, m_we;
  logic [1:0][1:0]         m_be;
  logic [1:0][LINE_AW-1:0] m_addr;
  logic [1:0][MEM_W-1:0]   m_wdata, m_rdata;

  logic                rb_we, rb_re;
  logic [2:0]          rb_bank;
  logic [7:0]          rb_waddr, rb_raddr;
  word_t               rb_wdata;
  word_t [KMAX-1:0]    bank_rdata, bpu_img;

  logic                wgt_valid;
  logic [2:0]          wgt_bpu;
  word_t               wgt_data, bpu_wgt;
  logic [KMAX-1:0]     bpu_wgt_shift;

  logic                img_shift, tag_valid, cl_valid;
  logic [7:0]          tag_col, cl_col;
  logic signed [OUT_W-1:0] cl_out;
  logic [31:0]         n_sweeps;
  logic [15:0]         n_layers;

  // ---------------------------------------------------------------- IO
  io_ctrl u_io (
    .clk, .rst_n, .io_din, .io_valid, .io_cmd, .io_dout, .io_dvalid, .io_done,
    .m_sel(io_m_sel), .m_re(io_m_re), .m_we(io_m_we), .m_addr(io_m_addr),
    .m_wdata(io_m_wdata), .m_rdata(io_m_rdata),
    .p_we, .p_addr(p_waddr), .p_wdata,
    .start, .cfg_ptr, .core_done(sch_done)
  );

  // ---------------------------------------------------------------- memories
  mem_interconnect u_ic (
    .clk, .rst_n, .role,
    .io_sel(io_m_sel), .io_re(io_m_re), .io_we(io_m_we), .io_addr(io_m_addr),
    .io_wdata(io_m_wdata), .io_rdata(io_m_rdata),
    .src_re, .src_addr, .src_rdata,
    .snk_re, .snk_we, .snk_be, .snk_addr, .snk_wdata, .snk_rdata,
    .m_re, .m_we, .m_be, .m_addr, .m_wdata, .m_rdata
  );

  main_memory u_mem (
    .clk, .re(m_re), .we(m_we), .be(m_be), .addr(m_addr), .wdata(m_wdata), .rdata(m_rdata)
  );

  // the scheduler reads descriptors only while the DMA is idle
  assign prm_re   = sch_prm_re | dma_prm_re;
  assign prm_addr = dma_prm_re ? dma_prm_addr : sch_prm_addr;

  param_buffer u_prm (
    .clk, .we(p_we), .waddr(p_waddr), .wdata(p_wdata),
    .re(prm_re), .raddr(prm_addr), .rdata(prm_rdata)
  );

  for (genvar b = 0; b < KMAX; b++) begin : g_bank
    row_bank #(.DEPTH(BANK_DEPTH), .W(VEC)) u_bank (
      .clk,
      .we(rb_we && (int'(rb_bank) == b)), .waddr(rb_waddr), .wdata(rb_wdata),
      .re(rb_re), .raddr(rb_raddr), .rdata(bank_rdata[b])
    );
  end

  // ---------------------------------------------------------------- control
  scheduler u_sch (
    .clk, .rst_n, .start, .cfg_ptr, .busy(sch_busy), .done(sch_done),
    .prm_re(sch_prm_re), .prm_addr(sch_prm_addr), .prm_rdata,
    .cmd_valid, .cmd, .desc, .og, .s, .y, .l, .r, .first, .dma_done,
    .role, .rot, .rb_re, .rb_raddr, .img_shift, .tag_valid, .tag_col,
    .n_sweeps, .n_layers
  );

  dma u_dma (
    .clk, .rst_n, .cmd_valid, .cmd, .desc, .og, .s, .y, .l, .r, .first,
    .busy(dma_busy), .done(dma_done),
    .src_re, .src_addr, .src_rdata,
    .snk_re, .snk_we, .snk_be, .snk_addr, .snk_wdata, .snk_rdata,
    .prm_re(dma_prm_re), .prm_addr(dma_prm_addr), .prm_rdata,
    .rb_we, .rb_bank, .rb_addr(rb_waddr), .rb_wdata,
    .wgt_valid, .wgt_bpu, .wgt_data,
    .cl_valid, .cl_col, .cl_out
  );

  // ---------------------------------------------------------------- compute
  crossbar #(.N(KMAX)) u_xbar (
    .bank_rdata, .rot, .bpu_img,
    .wgt_valid, .wgt_bpu, .wgt_data, .bpu_wgt_shift, .bpu_wgt
  );

  bpu_cluster #(.N_BPU(KMAX)) u_cluster (
    .clk, .rst_n, .k(desc.k), .img_shift, .img_in(bpu_img),
    .wgt_shift(bpu_wgt_shift), .wgt_in(bpu_wgt),
    .tag_valid, .tag_col, .out_valid(cl_valid), .out_col(cl_col), .out(cl_out)
  );

  a_prm_shared: assert property (@(posedge clk) disable iff (!rst_n) !(sch_prm_re && dma_prm_re));
endmodule
