// gk_filter: one GateKeeper alignment filter (read versus one reference).
//
// Implements the GateKeeper algorithm as parallel logic, all of it settled in
// one core-clock cycle:
//  * Fast path: the unshifted modified Hamming mask is popcounted; if it holds
//    at most E ones the mapping passes (exact match or substitutions only).
//  * Indel path: 2E further masks are formed with the read shifted by 1..E
//    bases in each direction. All 2E+1 masks are amended (gk_amend), ANDed,
//    and the result's edits are estimated with the 4-bit window count
//    (gk_edit_counter); an estimate of at most E passes.
// The paper's pseudocode evaluates the indel path only when the fast path
// fails; since both are combinational here, pass_o = fast OR indel, which is
// the same decision. "At most E" follows the pseudocode ("e <= E") where one
// sentence of the text says "less than"; see the design notes.
//
// Ports: read_i, ref_i (2*READ_LEN bits each), pass_o, plus the two partial
// decisions ham_pass_o / indel_pass_o for observation. Combinational.
module gk_filter #(
  parameter int unsigned READ_LEN = gk_pkg::READ_LEN_DEF,
  parameter int unsigned E        = gk_pkg::E_DEF
) (
  input  logic [2*READ_LEN-1:0] read_i,
  input  logic [2*READ_LEN-1:0] ref_i,
  output logic                  pass_o,
  output logic                  ham_pass_o,
  output logic                  indel_pass_o
);
  localparam int unsigned NMASK = 2 * E + 1;
  localparam int unsigned NWIN  = (READ_LEN + 3) / 4;
  localparam int unsigned CW    = $clog2(2 * NWIN + 1);
  localparam int unsigned PW    = $clog2(READ_LEN + 1);

  // mask index 0: no shift; 1..E: read shifted right by i; E+1..2E: left by i
  logic [READ_LEN-1:0] mask    [NMASK];
  logic [READ_LEN-1:0] amended [NMASK];
  logic [READ_LEN-1:0] final_mask;
  logic [PW-1:0]       ham_count;
  logic [CW-1:0]       edit_count;

  gk_mask_gen #(.READ_LEN(READ_LEN), .SHIFT(0)) u_mask0 (
    .read_i(read_i), .ref_i(ref_i), .mask_o(mask[0]));

  for (genvar i = 1; i <= int'(E); i++) begin : g_shift
    gk_mask_gen #(.READ_LEN(READ_LEN), .SHIFT(i)) u_del (
      .read_i(read_i), .ref_i(ref_i), .mask_o(mask[i]));
    gk_mask_gen #(.READ_LEN(READ_LEN), .SHIFT(-i)) u_ins (
      .read_i(read_i), .ref_i(ref_i), .mask_o(mask[i+E]));
  end

  for (genvar j = 0; j < int'(NMASK); j++) begin : g_amend
    gk_amend #(.READ_LEN(READ_LEN)) u_amend (.mask_i(mask[j]), .mask_o(amended[j]));
  end

  always_comb begin
    final_mask = '1;
    for (int j = 0; j < int'(NMASK); j++) final_mask &= amended[j];
  end

  always_comb begin
    ham_count = '0;
    for (int b = 0; b < int'(READ_LEN); b++) ham_count += PW'(mask[0][b]);
  end

  gk_edit_counter #(.READ_LEN(READ_LEN)) u_count (.mask_i(final_mask), .count_o(edit_count));

  assign ham_pass_o   = (ham_count  <= PW'(E));
  assign indel_pass_o = (edit_count <= CW'(E));
  assign pass_o       = ham_pass_o | indel_pass_o;
endmodule
