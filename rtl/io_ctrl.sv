// io_ctrl: the off-chip interface (18 input and 6 output signal pins).
//
// Inputs: io_din[15:0], io_valid, io_cmd. A word with io_cmd = 1 is a header:
//   [15:14] = 0 / 1 / 2: write Mem1 / Mem2 / the parameter buffer from line [13:0];
//            the following data words (io_cmd = 0) come in pairs, low half first, and
//            each pair writes one 32-bit line, the line address counting up.
//   [15:14] = 3, [13] = 0: start the accelerator with the descriptor list at
//            parameter line [8:0].
//   [15:14] = 3, [13] = 1: read back from Mem1 ([12] = 0) or Mem2 ([12] = 1); two data
//            words follow, the first line and the number of lines.
// Outputs: io_dout[3:0] and io_dvalid stream read lines out as 8 nibbles each, least
// significant first; io_done is high from the end of a run until the next start.
// The pin counts follow the published pad list; the protocol is this design's own
// (the interface is only named). One clock is used for core and IO here.
module io_ctrl
  import xnorbin_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  // pins
  input  logic [15:0]           io_din,
  input  logic                  io_valid,
  input  logic                  io_cmd,
  output logic [3:0]            io_dout,
  output logic                  io_dvalid,
  output logic                  io_done,
  // image memories (through the interconnect)
  output logic                  m_sel,
  output logic                  m_re,
  output logic                  m_we,
  output logic [LINE_AW-1:0]    m_addr,
  output logic [MEM_W-1:0]      m_wdata,
  input  logic [MEM_W-1:0]      m_rdata,
  // parameter buffer write port
  output logic                  p_we,
  output logic [PARAM_AW-1:0]   p_addr,
  output logic [MEM_W-1:0]      p_wdata,
  // core control
  output logic                  start,
  output logic [PARAM_AW-1:0]   cfg_ptr,
  input  logic                  core_done
);
  typedef enum logic [2:0] { I_IDLE, I_WR, I_RADDR, I_RCNT, I_RREQ, I_RWAIT, I_ROUT } state_e;

  state_e            st;
  logic [1:0]        tgt;        // 0 Mem1, 1 Mem2, 2 parameter buffer
  logic [LINE_AW-1:0] addr;
  logic [15:0]       lo_half;
  logic              have_lo;
  logic [15:0]       rcnt;
  logic [MEM_W-1:0]  line;
  logic [2:0]        nib;
  logic              wr_fire;

  assign wr_fire = (st == I_WR) && io_valid && !io_cmd && have_lo;

  always_comb begin
    m_sel   = tgt[0];
    m_re    = (st == I_RREQ);
    m_we    = wr_fire && (tgt != 2'd2);
    m_addr  = addr;
    m_wdata = {io_din, lo_half};
    p_we    = wr_fire && (tgt == 2'd2);
    p_addr  = addr[PARAM_AW-1:0];
    p_wdata = {io_din, lo_half};
    io_dout = line[3:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= I_IDLE; tgt <= '0; addr <= '0; lo_half <= '0; have_lo <= 1'b0; rcnt <= '0;
      line <= '0; nib <= '0; io_dvalid <= 1'b0; io_done <= 1'b0; start <= 1'b0; cfg_ptr <= '0;
    end else begin
      start <= 1'b0;
      if (core_done) io_done <= 1'b1;
      if (io_valid && io_cmd) begin
        // a header aborts whatever was going on
        have_lo <= 1'b0; io_dvalid <= 1'b0;
        unique case (io_din[15:14])
          2'd0, 2'd1, 2'd2: begin
            tgt <= io_din[15:14]; addr <= LINE_AW'(io_din[13:0]); st <= I_WR;
          end
          default: begin
            if (!io_din[13]) begin
              start <= 1'b1; cfg_ptr <= io_din[PARAM_AW-1:0]; io_done <= 1'b0; st <= I_IDLE;
            end else begin
              tgt <= {1'b0, io_din[12]}; st <= I_RADDR;
            end
          end
        endcase
      end else begin
        unique case (st)
          I_WR: if (io_valid) begin
            if (!have_lo) begin lo_half <= io_din; have_lo <= 1'b1; end
            else begin have_lo <= 1'b0; addr <= addr + 1'b1; end
          end
          I_RADDR: if (io_valid) begin addr <= LINE_AW'(io_din); st <= I_RCNT; end
          I_RCNT:  if (io_valid) begin rcnt <= io_din; st <= (io_din == 16'd0) ? I_IDLE : I_RREQ; end
          I_RREQ:  st <= I_RWAIT;
          I_RWAIT: begin line <= m_rdata; nib <= '0; io_dvalid <= 1'b1; st <= I_ROUT; end
          I_ROUT: begin
            nib  <= nib + 1'b1;
            line <= line >> 4;
            if (nib == 3'd7) begin
              io_dvalid <= 1'b0;
              addr <= addr + 1'b1;
              rcnt <= rcnt - 1'b1;
              st   <= (rcnt == 16'd1) ? I_IDLE : I_RREQ;
            end
          end
          default: st <= I_IDLE;
        endcase
      end
    end
  end
endmodule
