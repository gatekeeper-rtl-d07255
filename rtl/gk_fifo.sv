// gk_fifo: small synchronous FIFO with valid/ready on both sides.
//
// Stands for the per-core FIFOs drawn in the Read and Mapping Controllers of
// the GateKeeper architecture; the paper names them but gives no depth or
// protocol, so this is a plain register-array FIFO of DEPTH entries (own
// choice). A word is written when in_valid and in_ready are both high at a
// rising clock edge and read when out_valid and out_ready are. out_data shows
// the oldest entry combinationally; there is no fall-through from input to
// output in the same cycle. Reset empties it.
module gk_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = gk_pkg::FIFO_DEPTH_DEF
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic             empty
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic [AW:0]      count;
  logic             push, pop;

  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign empty     = (count == '0);
  assign push      = in_valid & in_ready;
  assign pop       = out_valid & out_ready;
  assign out_data  = mem[rd_ptr];

  function automatic logic [AW-1:0] next_ptr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= next_ptr(wr_ptr);
      if (pop)  rd_ptr <= next_ptr(rd_ptr);
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  // Storage needs no reset: an entry is only read after it was written.
  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  // A word offered is held until taken is the writer's rule; the FIFO itself
  // never overflows or underflows.
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) count <= (AW+1)'(DEPTH));
endmodule
