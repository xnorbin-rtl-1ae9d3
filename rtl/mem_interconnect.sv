// mem_interconnect: connects the IO interface and the two DMA ports to the two image
// memories.
//
// The DMA has a read-only source port (input feature maps) and a read/write sink
// port (partial sums, binary output maps). role = 0 maps source to Mem1 and sink to
// Mem2; role = 1 swaps them, so the output of one layer becomes the input of the
// next without moving data. The IO port reaches either memory directly (io_sel) and
// wins a memory it uses in that cycle; it is meant for use while the core is idle,
// which an assertion checks. Read data is steered back with the select of the cycle
// the read was issued in (memories answer one clock later).
module mem_interconnect
  import xnorbin_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    role,
  // IO port
  input  logic                    io_sel,
  input  logic                    io_re,
  input  logic                    io_we,
  input  logic [LINE_AW-1:0]      io_addr,
  input  logic [MEM_W-1:0]        io_wdata,
  output logic [MEM_W-1:0]        io_rdata,
  // DMA source port
  input  logic                    src_re,
  input  logic [LINE_AW-1:0]      src_addr,
  output logic [MEM_W-1:0]        src_rdata,
  // DMA sink port
  input  logic                    snk_re,
  input  logic                    snk_we,
  input  logic [1:0]              snk_be,
  input  logic [LINE_AW-1:0]      snk_addr,
  input  logic [MEM_W-1:0]        snk_wdata,
  output logic [MEM_W-1:0]        snk_rdata,
  // memory side, index 0 = Mem1, 1 = Mem2
  output logic [1:0]              m_re,
  output logic [1:0]              m_we,
  output logic [1:0][1:0]         m_be,
  output logic [1:0][LINE_AW-1:0] m_addr,
  output logic [1:0][MEM_W-1:0]   m_wdata,
  input  logic [1:0][MEM_W-1:0]   m_rdata
);
  logic io_sel_q, role_q;
  logic io_act;
  assign io_act = io_re | io_we;

  always_comb begin
    for (int m = 0; m < 2; m++) begin
      logic is_src;
      is_src = (m == int'(role));
      if (io_act && (int'(io_sel) == m)) begin
        m_re[m] = io_re;  m_we[m] = io_we;  m_be[m] = 2'b11;
        m_addr[m] = io_addr;  m_wdata[m] = io_wdata;
      end else if (is_src) begin
        m_re[m] = src_re; m_we[m] = 1'b0;   m_be[m] = 2'b00;
        m_addr[m] = src_addr; m_wdata[m] = '0;
      end else begin
        m_re[m] = snk_re; m_we[m] = snk_we; m_be[m] = snk_be;
        m_addr[m] = snk_addr; m_wdata[m] = snk_wdata;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin io_sel_q <= 1'b0; role_q <= 1'b0; end
    else begin
      if (io_act) io_sel_q <= io_sel;
      role_q <= role;
    end
  end

  assign io_rdata  = m_rdata[io_sel_q];
  assign src_rdata = m_rdata[role_q];
  assign snk_rdata = m_rdata[~role_q];

  // The host may only use a memory while the core leaves it alone.
  a_no_conflict: assert property (@(posedge clk) disable iff (!rst_n)
    io_act |-> !((src_re && (io_sel == role)) || ((snk_re || snk_we) && (io_sel != role))));
endmodule
