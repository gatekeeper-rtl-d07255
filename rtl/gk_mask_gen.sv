// gk_mask_gen: one shifted Hamming mask of the GateKeeper filter.
//
// The read is shifted by SHIFT bases (SHIFT>0: toward the end of the read,
// the paper's "r >> i", used for deletions; SHIFT<0: toward the start, the
// paper's "r << i", used for insertions; 0: no shift). Shifting is a plain
// logical shift of the 2-bit code vector, so vacated bases read as code 00,
// exactly as the paper's pseudocode writes it. The shifted read is XORed with
// the reference, giving the 2m-bit Hamming mask, and every bit pair is ORed
// into one bit (the paper's resource-halving encoding): bit = 1 means the two
// bases differ. Purely combinational; the shift is fixed wiring.
//
// Ports: read_i, ref_i are 2*READ_LEN bits, base 1 in the top pair.
//        mask_o is READ_LEN bits, base 1 in the top bit.
module gk_mask_gen #(
  parameter int unsigned READ_LEN = gk_pkg::READ_LEN_DEF,
  parameter int          SHIFT    = 0
) (
  input  logic [2*READ_LEN-1:0] read_i,
  input  logic [2*READ_LEN-1:0] ref_i,
  output logic [READ_LEN-1:0]   mask_o
);
  localparam int unsigned ASH = (SHIFT < 0) ? -SHIFT : SHIFT;

  logic [2*READ_LEN-1:0] shifted;
  logic [2*READ_LEN-1:0] ham;

  always_comb begin
    if (SHIFT > 0)      shifted = read_i >> (2 * ASH);
    else if (SHIFT < 0) shifted = read_i << (2 * ASH);
    else                shifted = read_i;
    ham = shifted ^ ref_i;
    for (int b = 0; b < READ_LEN; b++)
      mask_o[b] = ham[2*b+1] | ham[2*b];
  end
endmodule
