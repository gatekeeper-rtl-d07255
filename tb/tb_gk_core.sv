// tb_gk_core: checks a processing core, gk_core, at its defaults (100 bp,
// E=2, 16 reference segments). The core clock enable is pulsed every fifth
// cycle as in the full design. A read source holds reads valid until taken;
// the result sink is sometimes not ready. Checks: the 16 pass bits of every
// read against gk_model_pkg, results in order, a result two core cycles after
// its read was offered to an idle core, one result per core cycle in steady
// state, and that the core neither takes a read nor loses a result while its
// output is blocked.
module tb_gk_core;
  import gk_model_pkg::*;
  localparam int L = 100, NR = 16, E = 2, DIV = 5, NREADS = 120;

  int checks = 0, failures = 0;
  int n_stall = 0;
  logic clk = 0, rst_n = 0, ce;
  always #5 clk = ~clk;
  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  assign ce = (cyc % DIV) == DIV - 1;

  logic [NR-1:0][2*L-1:0] refs;
  logic          rv, rr, resv, resr, busy;
  logic [2*L-1:0] rdata;
  logic [NR-1:0] res;

  gk_core #(.READ_LEN(L), .E(E), .NUM_REFS(NR)) dut (
    .clk, .rst_n, .ce, .refs_i(refs),
    .read_valid_i(rv), .read_ready_o(rr), .read_i(rdata),
    .res_valid_o(resv), .res_ready_i(resr), .res_o(res), .busy_o(busy));

  seq_t ref_s[NR];
  seq_t reads[NREADS];
  logic [NR-1:0] exp_res[NREADS];
  int sent = 0, got = 0;
  int first_offer_cyc, first_res_cyc;
  int steady_first, steady_last;
  bit block_phase = 0;

  initial begin
    vec_t v;
    result_t r;
    for (int k = 0; k < NR; k++) begin
      ref_s[k] = random_seq(L);
      v = pack(ref_s[k]);
      refs[k] = v[2*L-1:0];
    end
    for (int i = 0; i < NREADS; i++) begin
      reads[i] = mutate(ref_s[i % NR], L, $urandom_range(0, 3), $urandom_range(0, 1), $urandom_range(0, 1));
      for (int k = 0; k < NR; k++) begin
        r = filter(reads[i], ref_s[k], E);
        exp_res[i][k] = r.pass;
      end
    end
  end

  // read source
  vec_t rd_vec;
  always_comb begin
    rd_vec = pack(reads[sent < NREADS ? sent : 0]);
    rv     = rst_n && (sent < NREADS);
    rdata  = rd_vec[2*L-1:0];
  end
  always @(posedge clk) if (rv && rr) sent <= sent + 1;

  // result sink, blocked for a while in the middle of the run
  assign resr = !block_phase;
  always @(posedge clk) begin
    if (resv && !resr) n_stall++;
    if (resv && resr) begin
      checks++;
      if (res !== exp_res[got]) begin
        failures++; $display("FAIL read %0d got %h exp %h", got, res, exp_res[got]);
      end
      if (got == 0) first_res_cyc = cyc;
      if (got == 20) steady_first = cyc;
      if (got == 40) steady_last = cyc;
      got <= got + 1;
    end
  end

  initial begin
    int sent_at_block;
    repeat (3) @(posedge clk);
    // offer the first read just after a ce pulse
    while (!ce) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    first_offer_cyc = cyc;
    wait (got == 60);
    @(negedge clk);
    block_phase = 1;
    repeat (4 * DIV) @(posedge clk);
    sent_at_block = sent;
    repeat (6 * DIV) @(posedge clk);
    checks++;
    if (sent != sent_at_block) begin failures++; $display("FAIL core took reads while blocked"); end
    @(negedge clk);
    block_phase = 0;
    wait (got == NREADS);
    repeat (2 * DIV) @(posedge clk);
    // first read offered right after a ce: loaded at the next ce (DIV cycles),
    // result pushed at the one after (2*DIV cycles)
    checks++;
    if (first_res_cyc - first_offer_cyc != 2 * DIV - 1) begin
      failures++; $display("FAIL latency %0d cycles", first_res_cyc - first_offer_cyc);
    end
    checks++;
    if (steady_last - steady_first != 20 * DIV) begin
      failures++; $display("FAIL throughput: 20 results in %0d cycles", steady_last - steady_first);
    end
    checks++;
    if (n_stall == 0) begin failures++; $display("FAIL output stall never happened"); end
    checks++;
    if (busy) begin failures++; $display("FAIL busy after the last result"); end
    $display("output stalled on %0d core cycles", n_stall);
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
