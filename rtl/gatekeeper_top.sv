// gatekeeper_top: the GateKeeper FPGA engine.
//
// Streams read/reference data in, filters each read against a set of
// reference segments in NUM_CORES parallel processing cores and streams one
// result word per read back out, in input order. Data path:
//   in_* (BUS_W-bit host stream) -> gk_read_controller (reference chunk,
//   round-robin read distribution, per-core FIFOs) -> NUM_CORES x gk_core
//   (NUM_REFS gk_filter each) -> gk_mapping_controller (per-core FIFOs,
//   in-order gather) -> out_* (NUM_REFS pass bits per read).
// The host-side PCIe endpoint and RIFFA channel are not part of this RTL; the
// two streams are where they would connect. The paper runs the system at
// 250 MHz and the cores at 50 MHz in a second, synchronous clock domain; here
// that is one clock, clk, with a core clock enable every CORE_DIV cycles, so
// the filter logic of a core has CORE_DIV clk periods to settle (a multicycle
// path that timing constraints must declare). Throughput: one read per
// ceil(2*READ_LEN/BUS_W) beats from the stream (two beats for 100 bp), which
// NUM_CORES=5 cores at one read per CORE_DIV=5 cycles can always absorb.
//
// Stream framing: a transfer is NUM_REFS reference segments followed by any
// number of reads, each padded to whole beats, in_last on its final beat.
module gatekeeper_top #(
  parameter int unsigned READ_LEN   = gk_pkg::READ_LEN_DEF,
  parameter int unsigned E          = gk_pkg::E_DEF,
  parameter int unsigned BUS_W      = gk_pkg::BUS_W_DEF,
  parameter int unsigned NUM_CORES  = gk_pkg::NUM_CORES_DEF,
  parameter int unsigned NUM_REFS   = gk_pkg::NUM_REFS_DEF,
  parameter int unsigned CORE_DIV   = gk_pkg::CORE_DIV_DEF,
  parameter int unsigned FIFO_DEPTH = gk_pkg::FIFO_DEPTH_DEF
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [BUS_W-1:0]    in_data,
  input  logic                in_last,
  output logic                out_valid,
  input  logic                out_ready,
  output logic [NUM_REFS-1:0] out_data,
  output logic                core_ce,
  output logic                loading_refs
);
  localparam int unsigned RW  = 2 * READ_LEN;
  localparam int unsigned DVW = (CORE_DIV > 1) ? $clog2(CORE_DIV) : 1;

  logic [NUM_REFS-1:0][RW-1:0]  refs;
  logic [NUM_CORES-1:0]         rd_valid, rd_ready, res_valid, res_ready, busy;
  logic [NUM_CORES-1:0][RW-1:0] rd_data;
  logic [NUM_CORES-1:0][NUM_REFS-1:0] res;
  logic [DVW-1:0]               div_cnt;

  // core clock enable: high in the last of every CORE_DIV cycles
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) div_cnt <= '0;
    else        div_cnt <= (div_cnt == DVW'(CORE_DIV - 1)) ? '0 : div_cnt + 1'b1;
  end
  assign core_ce = (div_cnt == DVW'(CORE_DIV - 1));

  gk_read_controller #(
    .READ_LEN(READ_LEN), .BUS_W(BUS_W), .NUM_CORES(NUM_CORES),
    .NUM_REFS(NUM_REFS), .FIFO_DEPTH(FIFO_DEPTH)
  ) u_rc (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data, .in_last,
    .refs_o(refs),
    .rd_valid_o(rd_valid), .rd_ready_i(rd_ready), .rd_data_o(rd_data),
    .cores_busy_i(|busy), .loading_refs_o(loading_refs));

  for (genvar c = 0; c < int'(NUM_CORES); c++) begin : g_core
    gk_core #(.READ_LEN(READ_LEN), .E(E), .NUM_REFS(NUM_REFS)) u_core (
      .clk, .rst_n, .ce(core_ce),
      .refs_i(refs),
      .read_valid_i(rd_valid[c]), .read_ready_o(rd_ready[c]), .read_i(rd_data[c]),
      .res_valid_o(res_valid[c]), .res_ready_i(res_ready[c]), .res_o(res[c]),
      .busy_o(busy[c]));
  end

  gk_mapping_controller #(
    .NUM_CORES(NUM_CORES), .NUM_REFS(NUM_REFS), .FIFO_DEPTH(FIFO_DEPTH)
  ) u_mc (
    .clk, .rst_n,
    .res_valid_i(res_valid), .res_ready_o(res_ready), .res_i(res),
    .out_valid, .out_ready, .out_data, .idle_o());
endmodule
