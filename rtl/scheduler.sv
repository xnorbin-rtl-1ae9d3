// scheduler: sequences the layers of a binary CNN on the accelerator.
//
// On start it reads the descriptor of layer 0 (6 lines at cfg_ptr; layer n at
// cfg_ptr + 8n) from the parameter buffer and runs the loop nest
//   for og in output groups of 16 maps
//     for s in input slices of 16 maps
//       for r in output rows
//         load the new input rows into the row banks (K rows at r = 0, else row r+K-1)
//         for l in 0..15: load the K x K weights of map og*16+l, slice s; sweep row r
//     binarize group og; pool it if the layer asks for it
// then swaps the roles of the two image memories and continues with the next
// descriptor until one is marked last.
// Sweep: for c = 0..W-1 all row banks read word c; one cycle later the words reach
// the image CSRs through the crossbar (rotation r mod 7) and shift in; from c = K-1
// on each shift completes a window whose output column c-K+1 is tagged for the DMA.
// After a sweep the scheduler waits DRAIN cycles for the cluster pipeline and the
// read-add-write to finish.
// The per-layer, per-16-map-slice, per-row, per-output-map ordering and binarization
// after every 16th output map follow the published schedule; the phases here run
// one after the other instead of overlapping as in that schedule (this design's
// simplification). Commands to the DMA are held stable while it is busy.
module scheduler
  import xnorbin_pkg::*;
#(
  parameter int unsigned DRAIN = 5
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [PARAM_AW-1:0]   cfg_ptr,
  output logic                  busy,
  output logic                  done,        // one-cycle pulse after the last layer
  // parameter buffer read port (used only while the DMA is idle)
  output logic                  prm_re,
  output logic [PARAM_AW-1:0]   prm_addr,
  input  logic [MEM_W-1:0]      prm_rdata,
  // DMA command interface
  output logic                  cmd_valid,
  output dma_cmd_e              cmd,
  output layer_desc_t           desc,
  output logic [15:0]           og,
  output logic [15:0]           s,
  output logic [15:0]           y,
  output logic [3:0]            l,
  output logic [15:0]           r,
  output logic                  first,
  input  logic                  dma_done,
  // memory roles and row-bank rotation
  output logic                  role,
  output logic [2:0]            rot,
  // convolution sweep
  output logic                  rb_re,
  output logic [7:0]            rb_raddr,
  output logic                  img_shift,
  output logic                  tag_valid,
  output logic [7:0]            tag_col,
  // event counters (observability)
  output logic [31:0]           n_sweeps,
  output logic [15:0]           n_layers
);
  typedef enum logic [3:0] {
    T_IDLE, T_DESC, T_OG, T_ROWS, T_WGT, T_SWEEP, T_LAST, T_DRAIN, T_BIN, T_POOL, T_NEXT, T_WAIT
  } state_e;

  state_e         st, ret;
  logic [PARAM_AW-1:0] lay_ptr;
  logic [2:0]     di;          // descriptor line counter
  logic           d_v;
  logic [2:0]     d_i;
  logic [15:0]    c;
  logic [15:0]    y_end;
  logic [7:0]     dcnt;
  logic           sw_v;
  logic [15:0]    sw_c;
  logic [31:0]    oh;

  assign oh    = int'(desc.h) - int'(desc.k) + 1;
  assign busy  = (st != T_IDLE);
  assign first = (s == 16'd0);
  assign rot   = 3'(int'(r) % KMAX);

  always_comb begin
    prm_re   = (st == T_DESC) && (int'(di) < 6);
    prm_addr = lay_ptr + PARAM_AW'(di);
    rb_re    = (st == T_SWEEP);
    rb_raddr = c[7:0];
    img_shift = sw_v;
    tag_valid = sw_v && (int'(sw_c) >= int'(desc.k) - 1);
    tag_col   = 8'(int'(sw_c) - int'(desc.k) + 1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= T_IDLE; ret <= T_IDLE; lay_ptr <= '0; di <= '0; d_v <= 1'b0; d_i <= '0;
      desc <= '0; og <= '0; s <= '0; y <= '0; l <= '0; r <= '0; c <= '0; y_end <= '0;
      dcnt <= '0; cmd_valid <= 1'b0; cmd <= CMD_NONE; role <= 1'b0; done <= 1'b0;
      sw_v <= 1'b0; sw_c <= '0;
      n_sweeps <= '0; n_layers <= '0;
    end else begin
      done      <= 1'b0;
      cmd_valid <= 1'b0;
      // sweep pipeline: bank read in one cycle, CSR shift in the next
      sw_v      <= (st == T_SWEEP);
      sw_c      <= c;
      // descriptor capture, one cycle after each read
      d_v <= prm_re; d_i <= di;
      if (d_v) begin
        unique case (d_i)
          3'd0: begin desc.w <= prm_rdata[15:0]; desc.h <= prm_rdata[31:16]; end
          3'd1: begin desc.k <= prm_rdata[3:0]; desc.pool <= prm_rdata[4];
                      desc.last <= prm_rdata[5]; desc.ns <= prm_rdata[31:16]; end
          3'd2: begin desc.nog <= prm_rdata[15:0]; desc.wgt_base <= prm_rdata[31:16]; end
          3'd3: begin desc.thr_base <= prm_rdata[15:0]; desc.in_base <= prm_rdata[31:16]; end
          3'd4: begin desc.out_base <= prm_rdata[15:0]; desc.psum_base <= prm_rdata[31:16]; end
          3'd5: begin desc.pool_base <= prm_rdata[15:0]; end
          default: ;
        endcase
      end
      unique case (st)
        T_IDLE: if (start) begin
          lay_ptr <= cfg_ptr; di <= '0; role <= 1'b0; st <= T_DESC;
        end
        T_DESC: begin
          if (int'(di) < 6) di <= di + 1'b1;
          else if (!d_v) begin
            og <= '0; s <= '0; r <= '0; l <= '0; y <= '0; st <= T_OG;
          end
        end
        T_OG: begin
          // start of row r of slice s: rows to load
          if (r == 16'd0) begin y <= '0;     y_end <= 16'(int'(desc.k) - 1); end
          else            begin y <= 16'(int'(r) + int'(desc.k) - 1); y_end <= 16'(int'(r) + int'(desc.k) - 1); end
          cmd <= CMD_LOAD_ROW; cmd_valid <= 1'b1; ret <= T_ROWS; st <= T_WAIT;
        end
        T_ROWS: begin
          if (y != y_end) begin
            y <= y + 1'b1; cmd <= CMD_LOAD_ROW; cmd_valid <= 1'b1; ret <= T_ROWS; st <= T_WAIT;
          end else begin
            l <= '0; cmd <= CMD_LOAD_WGT; cmd_valid <= 1'b1; ret <= T_SWEEP; st <= T_WAIT;
            c <= '0;
          end
        end
        T_WGT: begin
          cmd <= CMD_LOAD_WGT; cmd_valid <= 1'b1; ret <= T_SWEEP; st <= T_WAIT; c <= '0;
        end
        T_SWEEP: begin
          c <= c + 1'b1;
          if (int'(c) == int'(desc.w) - 1) st <= T_LAST;
        end
        T_LAST: begin dcnt <= '0; st <= T_DRAIN; n_sweeps <= n_sweeps + 1; end
        T_DRAIN: begin
          dcnt <= dcnt + 1'b1;
          if (int'(dcnt) == int'(DRAIN) - 1) begin
            if (l != 4'(VEC - 1)) begin
              l <= l + 1'b1; st <= T_WGT;
            end else if (int'(r) != oh - 1) begin
              r <= r + 1'b1; st <= T_OG;
            end else if (int'(s) != int'(desc.ns) - 1) begin
              r <= '0; s <= s + 1'b1; st <= T_OG;
            end else begin
              cmd <= CMD_BINARIZE; cmd_valid <= 1'b1;
              ret <= desc.pool ? T_POOL : T_NEXT; st <= T_WAIT;
            end
          end
        end
        T_POOL: begin
          cmd <= CMD_POOL; cmd_valid <= 1'b1; ret <= T_NEXT; st <= T_WAIT;
        end
        T_NEXT: begin
          if (int'(og) != int'(desc.nog) - 1) begin
            og <= og + 1'b1; s <= '0; r <= '0; st <= T_OG;
          end else begin
            role <= ~role; n_layers <= n_layers + 1'b1;
            if (desc.last) begin st <= T_IDLE; done <= 1'b1; end
            else begin lay_ptr <= lay_ptr + PARAM_AW'(DESC_LINES); di <= '0; st <= T_DESC; end
          end
        end
        T_WAIT: if (dma_done) st <= ret;
        default: st <= T_IDLE;
      endcase
    end
  end
endmodule
