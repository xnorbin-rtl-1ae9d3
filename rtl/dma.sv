// dma: data mover between the image memories, the parameter buffer, the row banks,
// the BPU cluster and (through the compute unit) back to memory.
//
// Commands (one at a time, cmd_valid while idle, done pulses when finished):
//   CMD_LOAD_ROW  copy input row y of slice s (W words) from the source memory into
//                 row bank y mod 7; one word per cycle.
//   CMD_LOAD_WGT  read the K x K weight words of output map og*16+l, slice s from the
//                 parameter buffer and shift kernel row ky into the weight CSR of
//                 BPU ky, in the order kx = 0..K-1; one word per cycle.
//   CMD_BINARIZE  load the 16 thresholds of output group og, then for every output
//                 pixel read the 16 partial sums, threshold them in the compute unit
//                 and write the 16 bits packed into one word (bit l = map og*16+l).
//   CMD_POOL      2 x 2, stride 2 max pooling of the packed binary output of group og:
//                 on bipolar bits the maximum is the OR of the four words.
// Independently of the commands, every valid cluster output is accumulated into the
// partial-sum map of output map l, row r (read-add-write): two neighbouring columns
// share one 32-bit line, so a line is read when the odd column (or a trailing even
// column) arrives and written back the next cycle. The single-port sink memory thus
// sees one read and one write per two outputs and keeps pace with one cluster output
// per cycle.
// Memory layout, all chosen by this design (addresses in 16-bit half-words unless
// noted): input x,y of slice s at IN + (s*H + y)*W + x; partial sum of map l (0..15
// within the group), output row r, column c in line PSUM + (l*OH + r)*ceil(OW/2) +
// c/2, half c mod 2; binary output at OUT + (og*OH + r)*OW + c (og taken as 0 when
// the layer pools: the unpooled map is then a per-group staging area); pooled output at
// POOL + (og*(OH/2) + pr)*(OW/2) + pc; weight (map m, slice s, ky, kx) at
// WGT + ((m*NS + s)*K + ky)*K + kx; threshold of map m at THR + m. Convolutions are
// stride 1 without padding: OW = W-K+1, OH = H-K+1.
// The functions (row-bank filling, read-add-write accumulation, thresholding, packing
// into 16-bit words) are the published ones; the sequencing, layout and pooling
// window are this design's.
module dma
  import xnorbin_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  // command interface from the scheduler
  input  logic                    cmd_valid,
  input  dma_cmd_e                cmd,
  input  layer_desc_t             desc,
  input  logic [15:0]             og,
  input  logic [15:0]             s,
  input  logic [15:0]             y,
  input  logic [3:0]              l,
  input  logic [15:0]             r,
  input  logic                    first,     // current slice is the first one (s == 0)
  output logic                    busy,
  output logic                    done,
  // source memory (read only)
  output logic                    src_re,
  output logic [LINE_AW-1:0]      src_addr,
  input  logic [MEM_W-1:0]        src_rdata,
  // sink memory
  output logic                    snk_re,
  output logic                    snk_we,
  output logic [1:0]              snk_be,
  output logic [LINE_AW-1:0]      snk_addr,
  output logic [MEM_W-1:0]        snk_wdata,
  input  logic [MEM_W-1:0]        snk_rdata,
  // parameter buffer read port
  output logic                    prm_re,
  output logic [PARAM_AW-1:0]     prm_addr,
  input  logic [MEM_W-1:0]        prm_rdata,
  // row bank write port
  output logic                    rb_we,
  output logic [2:0]              rb_bank,
  output logic [7:0]              rb_addr,
  output word_t                   rb_wdata,
  // weights to the crossbar
  output logic                    wgt_valid,
  output logic [2:0]              wgt_bpu,
  output word_t                   wgt_data,
  // results of the BPU cluster
  input  logic                    cl_valid,
  input  logic [7:0]              cl_col,
  input  logic signed [OUT_W-1:0] cl_out
);
  typedef enum logic [3:0] {
    S_IDLE, S_ROW, S_WGT, S_THR, S_BRD, S_BWAIT, S_BWR, S_PRD, S_PWAIT, S_PWR, S_DRAIN
  } state_e;

  state_e      st;
  logic [31:0] ow, oh, owl, ph, pw, kk;
  logic [15:0] cnt;          // element counter within a command phase
  logic [15:0] px, py;       // pixel counters for binarize / pool
  logic [4:0]  sub;          // reads issued for the current pixel
  logic [2:0]  ky, kx;
  // one-cycle delayed read bookkeeping
  logic        rd_v;
  logic        rd_half;
  logic [4:0]  rd_sub;
  logic [15:0] rd_x;
  word_t       acc_bits;
  logic signed [OUT_W-1:0] thr [VEC];
  // accumulation path
  logic signed [OUT_W-1:0] lo_q;
  logic        pair_v;
  logic        pair_first;
  logic [1:0]  pair_be;
  logic [LINE_AW-1:0] pair_line;
  logic signed [OUT_W-1:0] pair_lo, pair_hi;
  logic        pair_done;
  logic        tail_q;
  logic [7:0]  tail_col, pair_col;
  logic [LINE_AW-1:0] pair_line_c;
  logic [MEM_W-1:0]   acc_line;
  logic        bin_bit;
  word_t       bin_half;

  // half-word (16-bit) addresses of the element each state reads or writes
  logic [31:0] h_row, h_wgt, h_thr, h_bout, h_pin, h_pout;
  logic [15:0] og_out;
  assign og_out = desc.pool ? 16'd0 : og;

  function automatic word_t half_of(input logic [MEM_W-1:0] line, input logic hi);
    return hi ? line[MEM_W-1:VEC] : line[VEC-1:0];
  endfunction

  always_comb begin
    kk  = int'(desc.k) * int'(desc.k);
    ow  = int'(desc.w) - int'(desc.k) + 1;
    oh  = int'(desc.h) - int'(desc.k) + 1;
    owl = (ow + 1) / 2;
    pw  = ow / 2;
    ph  = oh / 2;
    h_row  = int'(desc.in_base) + (int'(s) * int'(desc.h) + int'(y)) * int'(desc.w) + int'(cnt);
    h_wgt  = int'(desc.wgt_base) + ((int'(og) * VEC + int'(l)) * int'(desc.ns) + int'(s)) * kk + int'(cnt);
    h_thr  = int'(desc.thr_base) + int'(og) * VEC + int'(cnt);
    // with pooling the unpooled map of a group is only a staging area, reused per group
    h_bout = int'(desc.out_base) + (int'(og_out) * oh + int'(py)) * ow + int'(px);
    h_pin  = int'(desc.out_base) + (int'(og_out) * oh + 2 * int'(py) + int'(sub[1])) * ow
             + 2 * int'(px) + int'(sub[0]);
    h_pout = int'(desc.pool_base) + (int'(og) * ph + int'(py)) * pw + int'(px);
  end

  // --------------------------------------------------------------- accumulation
  // An odd column completes a pair. A trailing even column (odd OW) is held one
  // cycle as tail so that its read does not collide with the write of the pair before.
  always_comb begin
    pair_done   = (cl_valid && cl_col[0]) || tail_q;
    pair_col    = tail_q ? tail_col : cl_col;
    pair_line_c = LINE_AW'(int'(desc.psum_base) + (int'(l) * oh + int'(r)) * owl + int'(pair_col) / 2);
  end

  compute_unit u_cu (
    .psum_line(snk_rdata),
    .new_lo(pair_lo), .new_hi(pair_hi), .first(pair_first),
    .acc_line,
    .bin_psum(signed'(half_of(snk_rdata, rd_half))),
    .bin_thr(thr[rd_sub[3:0]]),
    .bin_bit
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lo_q <= '0; pair_v <= 1'b0; pair_first <= 1'b0; pair_be <= '0; pair_line <= '0;
      pair_lo <= '0; pair_hi <= '0; tail_q <= 1'b0; tail_col <= '0;
    end else begin
      pair_v <= pair_done;
      tail_q <= cl_valid && !cl_col[0] && (int'(cl_col) == ow - 1);
      if (cl_valid && !cl_col[0]) begin lo_q <= cl_out; tail_col <= cl_col; end
      if (pair_done) begin
        pair_first <= first;
        pair_line  <= pair_line_c;
        pair_be    <= tail_q ? 2'b01 : 2'b11;
        pair_lo    <= lo_q;
        pair_hi    <= tail_q ? '0 : cl_out;
      end
    end
  end

  // ------------------------------------------------------------ command engine
  always_comb begin
    src_re = 1'b0; src_addr = '0;
    snk_re = 1'b0; snk_we = 1'b0; snk_be = '0; snk_addr = '0; snk_wdata = '0;
    prm_re = 1'b0; prm_addr = '0;
    case (st)
      S_ROW: begin src_re = 1'b1; src_addr = LINE_AW'(h_row / 2); end
      S_WGT: begin prm_re = 1'b1; prm_addr = PARAM_AW'(h_wgt / 2); end
      S_THR: begin prm_re = 1'b1; prm_addr = PARAM_AW'(h_thr / 2); end
      S_BRD: begin
        snk_re = 1'b1;
        snk_addr = LINE_AW'(int'(desc.psum_base) + (int'(sub) * oh + int'(py)) * owl + int'(px) / 2);
      end
      S_BWR: begin
        snk_we = 1'b1; snk_addr = LINE_AW'(h_bout / 2); snk_be = h_bout[0] ? 2'b10 : 2'b01;
        snk_wdata = {acc_bits, acc_bits};
      end
      S_PRD: begin snk_re = 1'b1; snk_addr = LINE_AW'(h_pin / 2); end
      S_PWR: begin
        snk_we = 1'b1; snk_addr = LINE_AW'(h_pout / 2); snk_be = h_pout[0] ? 2'b10 : 2'b01;
        snk_wdata = {acc_bits, acc_bits};
      end
      default: ;
    endcase
    // the accumulation path uses the sink port while the scheduler sweeps
    if (pair_done && !first) begin
      snk_re = 1'b1; snk_addr = pair_line_c;
    end
    if (pair_v) begin
      snk_we = 1'b1; snk_addr = pair_line; snk_be = pair_be; snk_wdata = acc_line;
    end
  end

  assign bin_half = half_of(snk_rdata, rd_half);

  assign busy = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; cnt <= '0; px <= '0; py <= '0; sub <= '0; ky <= '0; kx <= '0;
      rd_v <= 1'b0; rd_half <= 1'b0; rd_sub <= '0; rd_x <= '0; acc_bits <= '0; done <= 1'b0;
      rb_we <= 1'b0; rb_bank <= '0; rb_addr <= '0; rb_wdata <= '0;
      wgt_valid <= 1'b0; wgt_bpu <= '0; wgt_data <= '0;
      for (int i = 0; i < VEC; i++) thr[i] <= '0;
    end else begin
      done      <= 1'b0;
      rd_v      <= 1'b0;
      rb_we     <= 1'b0;
      wgt_valid <= 1'b0;
      unique case (st)
        S_IDLE: if (cmd_valid) begin
          cnt <= '0; px <= '0; py <= '0; sub <= '0; ky <= '0; kx <= '0; acc_bits <= '0;
          unique case (cmd)
            CMD_LOAD_ROW: st <= S_ROW;
            CMD_LOAD_WGT: st <= S_WGT;
            CMD_BINARIZE: st <= S_THR;
            CMD_POOL:     st <= S_PRD;
            default:      st <= S_IDLE;
          endcase
        end
        S_ROW: begin
          rd_v <= 1'b1; rd_half <= h_row[0]; rd_x <= cnt;
          cnt <= cnt + 1'b1;
          if (int'(cnt) == int'(desc.w) - 1) st <= S_DRAIN;
        end
        S_WGT: begin
          rd_v <= 1'b1; rd_half <= h_wgt[0]; rd_x <= {13'd0, ky};
          cnt <= cnt + 1'b1;
          if (int'(kx) == int'(desc.k) - 1) begin kx <= '0; ky <= ky + 1'b1; end
          else kx <= kx + 1'b1;
          if (int'(cnt) == kk - 1) st <= S_DRAIN;
        end
        S_THR: begin
          rd_v <= 1'b1; rd_half <= h_thr[0]; rd_sub <= cnt[4:0];
          cnt <= cnt + 1'b1;
          if (int'(cnt) == VEC - 1) st <= S_DRAIN;
        end
        S_BRD: begin
          rd_v <= 1'b1; rd_half <= px[0]; rd_sub <= sub;
          sub <= sub + 1'b1;
          if (int'(sub) == VEC - 1) st <= S_BWAIT;
        end
        S_BWAIT: st <= S_BWR;
        S_BWR: begin
          acc_bits <= '0; sub <= '0;
          if (int'(px) == ow - 1) begin
            px <= '0;
            if (int'(py) == oh - 1) begin st <= S_IDLE; done <= 1'b1; end
            else begin py <= py + 1'b1; st <= S_BRD; end
          end else begin
            px <= px + 1'b1; st <= S_BRD;
          end
        end
        S_PRD: begin
          rd_v <= 1'b1; rd_half <= h_pin[0]; rd_sub <= sub;
          sub <= sub + 1'b1;
          if (sub == 5'd3) st <= S_PWAIT;
        end
        S_PWAIT: st <= S_PWR;
        S_PWR: begin
          acc_bits <= '0; sub <= '0;
          if (int'(px) == pw - 1) begin
            px <= '0;
            if (int'(py) == ph - 1) begin st <= S_IDLE; done <= 1'b1; end
            else begin py <= py + 1'b1; st <= S_PRD; end
          end else begin
            px <= px + 1'b1; st <= S_PRD;
          end
        end
        S_DRAIN: begin
          // last read of a streaming phase returns in this cycle
          if (cmd == CMD_BINARIZE) begin st <= S_BRD; sub <= '0; end
          else begin st <= S_IDLE; done <= 1'b1; end
        end
        default: st <= S_IDLE;
      endcase
      // consume read data (issued one cycle earlier)
      if (rd_v) begin
        unique case (cmd)
          CMD_LOAD_ROW: begin
            rb_we <= 1'b1; rb_bank <= 3'(int'(y) % KMAX); rb_addr <= rd_x[7:0];
            rb_wdata <= half_of(src_rdata, rd_half);
          end
          CMD_LOAD_WGT: begin
            wgt_valid <= 1'b1; wgt_bpu <= rd_x[2:0]; wgt_data <= half_of(prm_rdata, rd_half);
          end
          CMD_BINARIZE: begin
            if (st == S_THR || (st == S_DRAIN))
              thr[rd_sub[3:0]] <= signed'(half_of(prm_rdata, rd_half));
            else
              acc_bits[rd_sub[3:0]] <= bin_bit;
          end
          CMD_POOL: acc_bits <= acc_bits | bin_half;
          default: ;
        endcase
      end
    end
  end

  // the accumulation path and the command engine never share the sink port
  a_sink_free: assert property (@(posedge clk) disable iff (!rst_n)
    (pair_done || pair_v) |-> (st inside {S_IDLE, S_ROW, S_WGT, S_DRAIN}));
endmodule
