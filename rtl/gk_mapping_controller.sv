// gk_mapping_controller: GateKeeper Mapping Controller.
//
// Collects the results of the processing cores, one FIFO per core, and sends
// them out in the order the reads came in: it takes from core 0, then core 1,
// and so on, the same round-robin order the read controller hands reads out
// in, so result k on the output belongs to read k of the input. Each result
// is the NUM_REFS pass bits of one read, bit r for reference segment r
// (1 = the mapping passed the filter and goes on to verification). The output
// is a valid/ready stream toward the host link; if it is held off, the FIFOs
// fill and the cores stop. The paper gives the ordering rule; FIFO depth and
// handshake are this design's choices.
module gk_mapping_controller #(
  parameter int unsigned NUM_CORES  = gk_pkg::NUM_CORES_DEF,
  parameter int unsigned NUM_REFS   = gk_pkg::NUM_REFS_DEF,
  parameter int unsigned FIFO_DEPTH = gk_pkg::FIFO_DEPTH_DEF
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic [NUM_CORES-1:0]               res_valid_i,
  output logic [NUM_CORES-1:0]               res_ready_o,
  input  logic [NUM_CORES-1:0][NUM_REFS-1:0] res_i,
  output logic                               out_valid,
  input  logic                               out_ready,
  output logic [NUM_REFS-1:0]                out_data,
  output logic                               idle_o
);
  localparam int unsigned CPW = (NUM_CORES > 1) ? $clog2(NUM_CORES) : 1;

  logic [CPW-1:0]                     ptr;
  logic [NUM_CORES-1:0]               f_valid, f_ready, f_empty;
  logic [NUM_CORES-1:0][NUM_REFS-1:0] f_data;

  for (genvar c = 0; c < int'(NUM_CORES); c++) begin : g_fifo
    gk_fifo #(.WIDTH(NUM_REFS), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n,
      .in_valid(res_valid_i[c]), .in_ready(res_ready_o[c]), .in_data(res_i[c]),
      .out_valid(f_valid[c]), .out_ready(f_ready[c]), .out_data(f_data[c]),
      .empty(f_empty[c]));
  end

  assign out_valid = f_valid[ptr];
  assign out_data  = f_data[ptr];
  assign idle_o    = &f_empty;

  always_comb begin
    f_ready      = '0;
    f_ready[ptr] = out_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr <= '0;
    else if (out_valid && out_ready)
      ptr <= (ptr == CPW'(NUM_CORES - 1)) ? '0 : ptr + 1'b1;
  end

  a_stable: assert property (@(posedge clk) disable iff (!rst_n)
      out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
