// gk_core: GateKeeper processing core.
//
// Holds one read and checks it against NUM_REFS reference segments at once
// (the paper's configuration aligns each of its five reads against 16
// segments, 80 alignments in flight), with one gk_filter per segment. The core
// runs at the core clock, modelled here as a clock enable ce that is high one
// system cycle in CORE_DIV (the paper's 50 MHz core domain, synchronous to the
// 250 MHz system clock). On a ce cycle the core
//   * loads the next read from its input FIFO into its read register, and
//   * pushes the pass bits computed from the read register into its result
//     FIFO.
// So a read is filtered in the full core-clock period between two ce pulses
// (a multicycle path of CORE_DIV system cycles), one read per core cycle,
// latency two core cycles from the FIFO head to the result. If the result
// FIFO is full the core holds its read and takes no new one. The reference
// segments must stay constant while the core is busy (busy_o); the read
// controller guarantees that. Register and handshake structure are this
// design's own; the paper gives only "one alignment in a single cycle".
module gk_core #(
  parameter int unsigned READ_LEN = gk_pkg::READ_LEN_DEF,
  parameter int unsigned E        = gk_pkg::E_DEF,
  parameter int unsigned NUM_REFS = gk_pkg::NUM_REFS_DEF
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic                                  ce,
  input  logic [NUM_REFS-1:0][2*READ_LEN-1:0]   refs_i,
  input  logic                                  read_valid_i,
  output logic                                  read_ready_o,
  input  logic [2*READ_LEN-1:0]                 read_i,
  output logic                                  res_valid_o,
  input  logic                                  res_ready_i,
  output logic [NUM_REFS-1:0]                   res_o,
  output logic                                  busy_o
);
  logic                  held_q;
  logic [2*READ_LEN-1:0] read_q;
  logic [NUM_REFS-1:0]   pass;
  logic                  fire_out, load;

  for (genvar r = 0; r < int'(NUM_REFS); r++) begin : g_filter
    gk_filter #(.READ_LEN(READ_LEN), .E(E)) u_filter (
      .read_i(read_q), .ref_i(refs_i[r]),
      .pass_o(pass[r]), .ham_pass_o(), .indel_pass_o());
  end

  assign res_valid_o  = ce & held_q;
  assign res_o        = pass;
  assign fire_out     = res_valid_o & res_ready_i;
  assign read_ready_o = ce & (~held_q | res_ready_i);
  assign load         = read_ready_o & read_valid_i;
  assign busy_o       = held_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        held_q <= 1'b0;
    else if (load)     held_q <= 1'b1;
    else if (fire_out) held_q <= 1'b0;
  end

  always_ff @(posedge clk) begin
    if (load) read_q <= read_i;
  end

  a_ce_only: assert property (@(posedge clk) disable iff (!rst_n) (res_valid_o | read_ready_o) |-> ce);
endmodule
