// gk_amend: the GateKeeper amending network.
//
// Short streaks of zeros in a Hamming mask (a single 0 between ones, "101",
// or a double 0, "1001") carry no identical section, so they are flipped to
// ones before the masks are ANDed. Each output bit is an independent 5-input
// function of its own mask bit and two neighbours on each side, as in the
// paper's LUT-per-bit architecture:
//   A_i = E_i | (E_{i-1} ~E_i E_{i+1}) | (E_{i-2} ~E_{i-1} ~E_i E_{i+1})
//             | (E_{i-1} ~E_i ~E_{i+1} E_{i+2})
// The first and last bit are copied unchanged. For the second and next-to-last
// bit the paper gives shortened formulas; they equal the general one with the
// missing neighbour read as 0, which is how they are built here (e[0] and
// e[READ_LEN+1] are constant 0). Combinational.
//
// Ports: mask_i / mask_o, READ_LEN bits, base 1 in the top bit.
module gk_amend #(
  parameter int unsigned READ_LEN = gk_pkg::READ_LEN_DEF
) (
  input  logic [READ_LEN-1:0] mask_i,
  output logic [READ_LEN-1:0] mask_o
);
  // e[k] holds the mask bit of base k (1-based), e[0] and e[READ_LEN+1] are 0.
  logic [READ_LEN+1:0] e;

  assign e[0]          = 1'b0;
  assign e[READ_LEN+1] = 1'b0;
  for (genvar k = 1; k <= READ_LEN; k++) begin : g_pad
    assign e[k] = mask_i[READ_LEN-k];
  end

  for (genvar k = 1; k <= READ_LEN; k++) begin : g_lut
    if (k == 1 || k == READ_LEN) begin : g_edge
      assign mask_o[READ_LEN-k] = e[k];
    end else begin : g_mid
      assign mask_o[READ_LEN-k] = e[k]
          | ( e[k-1] & ~e[k] &  e[k+1])
          | ( e[k-2] & ~e[k-1] & ~e[k] & e[k+1])
          | ( e[k-1] & ~e[k] & ~e[k+1] & e[k+2]);
    end
  end
endmodule
