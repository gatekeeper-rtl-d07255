// gk_edit_counter: edit estimate of the final (ANDed) GateKeeper mask.
//
// The mask is cut into 4-bit windows from base 1 on. Each window adds, as in
// the paper's counting loop: 0 for 0000; 2 for 0101, 0110, 1001, 1010, 1011
// and 1101; 1 for every other pattern. A read length that is not a multiple of
// four is padded with zeros at the end (own choice; of the paper's read
// lengths 64, 100, 150 and 300 bp only 150 needs it). The window sums are
// added combinationally.
//
// Ports: mask_i READ_LEN bits (base 1 in the top bit), count_o the estimate.
module gk_edit_counter #(
  parameter int unsigned READ_LEN = gk_pkg::READ_LEN_DEF,
  localparam int unsigned NWIN    = (READ_LEN + 3) / 4,
  localparam int unsigned CW      = $clog2(2 * NWIN + 1)
) (
  input  logic [READ_LEN-1:0] mask_i,
  output logic [CW-1:0]       count_o
);
  logic [4*NWIN-1:0] padded;

  function automatic logic [1:0] window_cost(input logic [3:0] w);
    unique case (w)
      4'b0000:                     return 2'd0;
      4'b0101, 4'b0110, 4'b1001,
      4'b1010, 4'b1011, 4'b1101:   return 2'd2;
      default:                     return 2'd1;
    endcase
  endfunction

  always_comb begin
    padded  = '0;
    padded[4*NWIN-1 -: READ_LEN] = mask_i;
    count_o = '0;
    for (int w = 0; w < NWIN; w++)
      count_o = count_o + CW'(window_cost(padded[4*NWIN-1-4*w -: 4]));
  end
endmodule
