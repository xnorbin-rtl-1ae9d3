// compute_unit: the near-memory compute unit of the DMA.
//
// Accumulation (read-add-write): input maps are processed in slices of 16, so every
// output value is a sum over slices. For a pair of neighbouring outputs (one 32-bit
// memory line holds two 16-bit partial sums) the CU adds the two new cluster results
// to the partial sums just read from memory; for the first slice (first = 1) the old
// partial sums are ignored. Sums wrap at 16 bit (binary AlexNet-sized layers stay far
// below that).
// Re-binarization: a final partial sum is compared with the pre-computed threshold of
// its output map (activation and batch normalisation folded into one threshold):
// bit = (psum >= thr), i.e. +1 -> 1, -1 -> 0.
// Purely combinational; the DMA issues the read and registers the write.
module compute_unit
  import xnorbin_pkg::*;
(
  input  logic [MEM_W-1:0]        psum_line,   // {hi, lo} partial sums read from memory
  input  logic signed [OUT_W-1:0] new_lo,
  input  logic signed [OUT_W-1:0] new_hi,
  input  logic                    first,
  output logic [MEM_W-1:0]        acc_line,
  input  logic signed [OUT_W-1:0] bin_psum,
  input  logic signed [OUT_W-1:0] bin_thr,
  output logic                    bin_bit
);
  logic signed [OUT_W-1:0] old_lo, old_hi;

  always_comb begin
    old_lo   = first ? '0 : signed'(psum_line[OUT_W-1:0]);
    old_hi   = first ? '0 : signed'(psum_line[MEM_W-1:OUT_W]);
    acc_line = {old_hi + new_hi, old_lo + new_lo};
    bin_bit  = (bin_psum >= bin_thr);
  end
endmodule
