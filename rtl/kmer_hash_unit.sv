// kmer_hash_unit: canonical k-mer and its hash, for one k-mer of a window.
//
// Takes K base codes (kmer[0] is the first base of the k-mer), builds the
// forward 2-bit value (first base in the most significant bits) and the
// reverse-complement value, keeps the smaller of the two as the canonical
// k-mer and hashes it with gs_pkg::hash64 over 2K bits. str is 1 when the
// reverse complement was the smaller value. A k-mer holding an N (or any
// code that is not A, C, G or T) is marked invalid. Purely combinational; the
// seed extractor places W copies side by side, one per k-mer of the window,
// as the paper describes, and registers their outputs.
module kmer_hash_unit
  import gs_pkg::*;
#(
  parameter int unsigned K = 15
) (
  input  base_e             kmer [K],
  output logic [2*K-1:0]    hash,
  output logic              str,
  output logic              valid
);
  logic [63:0] fwd, rev, canon;
  localparam logic [63:0] MASK = (64'd1 << (2*K)) - 64'd1;

  always_comb begin
    fwd   = '0;
    rev   = '0;
    valid = 1'b1;
    for (int j = 0; j < int'(K); j++) begin
      fwd = (fwd << 2) | {62'd0, kmer[j][1:0]};
      rev = rev | ({62'd0, ~kmer[j][1:0]} << (2*j));
      if (kmer[j][3:2] != 2'b00) valid = 1'b0;
    end
    str   = (rev < fwd);
    canon = str ? rev : fwd;
    hash  = hash64(canon, MASK)[2*K-1:0];
  end

endmodule
