// tb_gk_read_controller: checks gk_read_controller at its defaults (100 bp
// reads in two 128-bit beats, 5 cores, 16 reference segments). Two transfers
// are sent, each 16 reference segments and then reads, with random gaps on
// the stream and random readiness of the cores. Checks: the reference
// registers hold the transfer's segments; every read reaches the right core
// in round-robin order, unchanged (pad bits ignored); the stream stalls when
// a core's FIFO is full; before the second reference chunk the controller
// waits until the FIFOs are drained and the cores report idle.
module tb_gk_read_controller;
  import gk_model_pkg::*;
  localparam int L = 100, BW = 128, NC = 5, NR = 16, BEATS = 2, NREADS = 23;

  int checks = 0, failures = 0;
  int n_full_stall = 0, n_drain_stall = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic iv, ir, il, busy;
  logic [BW-1:0] id;
  logic [NR-1:0][2*L-1:0] refs;
  logic [NC-1:0] rv, rr;
  logic [NC-1:0][2*L-1:0] rd;
  logic loading;

  gk_read_controller #(.READ_LEN(L), .BUS_W(BW), .NUM_CORES(NC), .NUM_REFS(NR)) dut (
    .clk, .rst_n, .in_valid(iv), .in_ready(ir), .in_data(id), .in_last(il),
    .refs_o(refs), .rd_valid_o(rv), .rd_ready_i(rr), .rd_data_o(rd),
    .cores_busy_i(busy), .loading_refs_o(loading));

  logic [2*L-1:0] exp_q[NC][$];
  int next_core = 0;
  int got = 0;
  bit hold_cores = 0;

  task automatic send_beat(logic [BW-1:0] d, logic last);
    @(negedge clk);
    while ($urandom_range(0, 3) == 0) begin iv = 0; @(negedge clk); end
    iv = 1; id = d; il = last;
    @(posedge clk);
    while (!ir) begin
      if (loading) n_drain_stall++; else n_full_stall++;
      @(posedge clk);
    end
    @(negedge clk); iv = 0; il = 0;
  endtask

  task automatic send_chunk(logic [2*L-1:0] v, logic last);
    logic [BEATS*BW-1:0] c;
    c = {v, 56'($urandom) ^ 56'hA5A5_5A5A_0F0F_F0};
    send_beat(c[2*BW-1:BW], 1'b0);
    send_beat(c[BW-1:0], last);
  endtask

  // cores: random readiness, blocked entirely for a while
  always @(negedge clk) begin
    for (int c = 0; c < NC; c++) rr[c] = !hold_cores && ($urandom_range(0, 3) != 0);
  end
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NC; c++) if (rv[c] && rr[c]) begin
      checks++;
      if (exp_q[c].size() == 0 || rd[c] !== exp_q[c][0]) begin
        failures++; $display("FAIL core %0d got unexpected read", c);
      end else void'(exp_q[c].pop_front());
      got++;
    end
  end

  task automatic transfer(int nreads, bit hold_first);
    vec_t v;
    seq_t s;
    logic [2*L-1:0] rv_vec[NR];
    for (int k = 0; k < NR; k++) begin
      s = random_seq(L); v = pack(s); rv_vec[k] = v[2*L-1:0];
      send_chunk(rv_vec[k], 1'b0);
    end
    @(posedge clk); #1;
    for (int k = 0; k < NR; k++) begin
      checks++;
      if (refs[k] !== rv_vec[k]) begin failures++; $display("FAIL reference %0d", k); end
    end
    checks++;
    if (loading) begin failures++; $display("FAIL still loading references"); end
    if (hold_first) begin
      hold_cores = 1;
      fork begin repeat (300) @(posedge clk); hold_cores = 0; end join_none
    end
    for (int i = 0; i < nreads; i++) begin
      s = random_seq(L); v = pack(s);
      exp_q[next_core].push_back(v[2*L-1:0]);
      next_core = (next_core + 1) % NC;
      send_chunk(v[2*L-1:0], i == nreads - 1);
    end
  endtask

  initial begin
    iv = 0; il = 0; id = '0; busy = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    transfer(NREADS, 1'b1);
    // keep the cores "busy" for a while after the transfer: the next
    // reference chunk must wait
    busy = 1;
    fork
      begin repeat (60) @(posedge clk); @(negedge clk); busy = 0; end
      transfer(NREADS, 1'b0);
    join
    repeat (50) @(posedge clk);
    checks++;
    if (got != 2 * NREADS) begin failures++; $display("FAIL delivered %0d reads", got); end
    checks++;
    if (n_full_stall == 0) begin failures++; $display("FAIL FIFO-full stall never seen"); end
    checks++;
    if (n_drain_stall < 50) begin failures++; $display("FAIL reference reload did not wait (%0d)", n_drain_stall); end
    $display("stalls: fifo full %0d, drain %0d", n_full_stall, n_drain_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
