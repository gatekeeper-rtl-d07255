// gk_read_controller: GateKeeper Read Controller.
//
// Receives the host stream, BUS_W bits per beat (128 bits, the RIFFA package
// size in the paper). A read or reference segment of READ_LEN bases occupies
// BEATS = ceil(2*READ_LEN/BUS_W) beats, first beat holding the first bases
// (most significant bits first), the unused low bits of the last beat ignored.
// As the paper describes, the first data chunk of a transfer is kept as the
// reference for all processing cores: here that chunk is NUM_REFS segments,
// one per filter of a core. Every following read goes to the next core in
// round-robin order (read 0 to core 0, read 1 to core 1, ...), through one
// FIFO per core. in_last marks the final beat of a transfer; the next beat
// starts a new reference chunk. Before the references are overwritten, the
// controller stalls (in_ready low) until its FIFOs are empty and no core is
// busy, so no read is filtered against a half-loaded reference set. A read
// whose target FIFO is full also stalls the stream. Framing, the drain rule
// and the use of in_last are this design's choices; the paper gives only the
// controller's two tasks.
module gk_read_controller #(
  parameter int unsigned READ_LEN   = gk_pkg::READ_LEN_DEF,
  parameter int unsigned BUS_W      = gk_pkg::BUS_W_DEF,
  parameter int unsigned NUM_CORES  = gk_pkg::NUM_CORES_DEF,
  parameter int unsigned NUM_REFS   = gk_pkg::NUM_REFS_DEF,
  parameter int unsigned FIFO_DEPTH = gk_pkg::FIFO_DEPTH_DEF
) (
  input  logic                                clk,
  input  logic                                rst_n,
  // host stream
  input  logic                                in_valid,
  output logic                                in_ready,
  input  logic [BUS_W-1:0]                    in_data,
  input  logic                                in_last,
  // references, shared by all cores
  output logic [NUM_REFS-1:0][2*READ_LEN-1:0] refs_o,
  // per-core read FIFO outputs
  output logic [NUM_CORES-1:0]                rd_valid_o,
  input  logic [NUM_CORES-1:0]                rd_ready_i,
  output logic [NUM_CORES-1:0][2*READ_LEN-1:0] rd_data_o,
  input  logic                                cores_busy_i,
  output logic                                loading_refs_o
);
  localparam int unsigned RW    = 2 * READ_LEN;
  localparam int unsigned BEATS = (RW + BUS_W - 1) / BUS_W;
  localparam int unsigned CHW   = BEATS * BUS_W;
  localparam int unsigned BW    = (BEATS > 1) ? $clog2(BEATS) : 1;
  localparam int unsigned RFW   = (NUM_REFS > 1) ? $clog2(NUM_REFS) : 1;
  localparam int unsigned CPW   = (NUM_CORES > 1) ? $clog2(NUM_CORES) : 1;

  typedef enum logic [1:0] {S_DRAIN, S_REFS, S_READS} state_t;

  state_t             state;
  logic [BW-1:0]      beat;
  logic [RFW-1:0]     ref_idx;
  logic [CPW-1:0]     core_ptr;
  logic [CHW-1:0]     chunk_q;     // beats gathered so far
  logic [CHW-1:0]     chunk_full;  // gathered beats plus the current one
  logic               last_beat, fire;
  logic [NUM_CORES-1:0] fifo_in_ready, fifo_empty, fifo_push;
  logic               all_empty, tgt_ready;

  assign last_beat = (beat == BW'(BEATS - 1));
  assign all_empty = &fifo_empty;
  assign tgt_ready = fifo_in_ready[core_ptr];

  always_comb begin
    chunk_full = chunk_q;
    chunk_full[CHW-1 - int'(beat)*BUS_W -: BUS_W] = in_data;
  end

  always_comb begin
    unique case (state)
      S_DRAIN: in_ready = 1'b0;
      S_REFS:  in_ready = 1'b1;
      default: in_ready = ~last_beat | tgt_ready;
    endcase
  end
  assign fire           = in_valid & in_ready;
  assign loading_refs_o = (state != S_READS);

  always_comb begin
    fifo_push = '0;
    // a read completes on its last beat, whether or not that beat ends the
    // transfer; a transfer that ends mid-read drops the partial read
    if (state == S_READS && fire && last_beat) fifo_push[core_ptr] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_REFS;
      beat     <= '0;
      ref_idx  <= '0;
      core_ptr <= '0;
    end else begin
      unique case (state)
        S_DRAIN: if (all_empty && !cores_busy_i) state <= S_REFS;
        S_REFS: if (fire) begin
          beat <= last_beat ? '0 : beat + 1'b1;
          if (last_beat) begin
            ref_idx <= (ref_idx == RFW'(NUM_REFS - 1)) ? '0 : ref_idx + 1'b1;
            if (ref_idx == RFW'(NUM_REFS - 1)) state <= S_READS;
          end
          if (in_last) begin          // transfer cut short: start over
            beat    <= '0;
            ref_idx <= '0;
            state   <= S_REFS;
          end
        end
        default: if (fire) begin
          beat <= last_beat ? '0 : beat + 1'b1;
          if (last_beat)
            core_ptr <= (core_ptr == CPW'(NUM_CORES - 1)) ? '0 : core_ptr + 1'b1;
          if (in_last) begin
            beat  <= '0;
            state <= S_DRAIN;
          end
        end
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (fire) chunk_q <= last_beat ? '0 : chunk_full;
    if (state == S_REFS && fire && last_beat) refs_o[ref_idx] <= chunk_full[CHW-1 -: RW];
  end

  for (genvar c = 0; c < int'(NUM_CORES); c++) begin : g_fifo
    gk_fifo #(.WIDTH(RW), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n,
      .in_valid(fifo_push[c]), .in_ready(fifo_in_ready[c]), .in_data(chunk_full[CHW-1 -: RW]),
      .out_valid(rd_valid_o[c]), .out_ready(rd_ready_i[c]), .out_data(rd_data_o[c]),
      .empty(fifo_empty[c]));
  end

  a_push_ok: assert property (@(posedge clk) disable iff (!rst_n)
      (|fifo_push) |-> (fifo_push & fifo_in_ready) == fifo_push);
endmodule
