// codebook_decoder: turns the demodulated symbols of one chirp back into data
// bits, the inverse of im_mapper.
//
// The IM codebook entry number is rebuilt from the estimated indices as
// b_idx*NF + f_idx and placed in the lowest NIM bits; the L phase symbols
// follow, segment 0 first. An entry number that does not fit in NIM bits
// (possible when NB*NF is not a power of two) is flagged with out_err.
// The bit layout and natural-binary labelling are this design's choice; the
// paper only states that the final data are read from the codebook for the
// estimated IM and PM symbols. Registered: out_valid one clock after in_valid.
module codebook_decoder
  import isac_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic [BIW-1:0]           b_idx,
  input  logic [FIW-1:0]           f_idx,
  input  logic [L_SEG-1:0][MB-1:0] sym,
  output logic                     out_valid,
  output logic                     out_err,
  output logic [NIM+L_SEG*MB-1:0]  out_bits
);

  logic [BIW+FIW:0] entry;
  assign entry = (BIW+FIW+1)'(b_idx) * (BIW+FIW+1)'(NF) + (BIW+FIW+1)'(f_idx);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_err   <= 1'b0;
      out_bits  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_err  <= (entry >= (BIW+FIW+1)'(1 << NIM));
        out_bits <= {sym, NIM'(entry)};
      end
    end
  end

endmodule
