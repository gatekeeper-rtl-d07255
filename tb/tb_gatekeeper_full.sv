// tb_gatekeeper_full: end-to-end test of the GateKeeper engine at its default
// size (100 bp, E=2, 128-bit stream, 5 cores x 16 reference segments, core
// clock enable every 5 cycles). Two transfers are streamed in as the host
// would: 16 reference segments, then reads, each read derived from one of the
// segments with substitutions, insertions and deletions, or unrelated.
//  * Transfer 1 streams at full rate with the output always ready. Checks
//    that the stream is never stalled after the references (the five cores
//    keep up with one read per two beats) and that results come back in
//    order, with the 16 pass bits of each read matching gk_model_pkg.
//  * Transfer 2 has random gaps and a blocked output for a while, so the
//    core and controller FIFOs fill and the input stalls; it also starts
//    while transfer 1 is still in flight, so the reference reload must wait.
// Counted mechanisms, each of which must occur: accept on the Hamming fast
// path, accept on the indel path only, reject, input stall on full FIFOs,
// output back-pressure, reference-reload wait, and core round-robin wrap.
module tb_gatekeeper_full;
  import gk_model_pkg::*;
  localparam int L = 100, E = 2, BW = 128, NC = 5, NR = 16, BEATS = 2;
  localparam int N1 = 60, N2 = 100;

  int checks = 0, failures = 0;
  int n_fast = 0, n_indel = 0, n_reject = 0;
  int n_full_stall = 0, n_out_bp = 0, n_reload_wait = 0, n_stream_stall1 = 0;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;   // 250 MHz system clock
  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic iv, ir, il, ov, ordy, ce, loading;
  logic [BW-1:0] id;
  logic [NR-1:0] od;

  gatekeeper_top dut (
    .clk, .rst_n, .in_valid(iv), .in_ready(ir), .in_data(id), .in_last(il),
    .out_valid(ov), .out_ready(ordy), .out_data(od), .core_ce(ce), .loading_refs(loading));

  logic [NR-1:0] exp_q[$];
  int got = 0;
  bit phase2 = 0, block_out = 0, full_rate = 1;

  always @(negedge clk)
    ordy = !block_out && (!phase2 || $urandom_range(0, 99) < 60);

  int n_wrap = 0;
  logic [2:0] ptr_q = 0;
  always @(posedge clk) begin
    ptr_q <= 3'(dut.u_rc.core_ptr);
    if (rst_n && ptr_q == 3'(NC - 1) && dut.u_rc.core_ptr == 0) n_wrap++;
  end

  always @(posedge clk) if (rst_n) begin
    if (ov && !ordy) n_out_bp++;
    if (ov && ordy) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("FAIL unexpected result %h", od);
      end else begin
        if (od !== exp_q[0]) begin
          failures++; $display("FAIL result %0d got %h exp %h", got, od, exp_q[0]);
        end
        void'(exp_q.pop_front());
      end
      got <= got + 1;
    end
  end

  task automatic send_beat(logic [BW-1:0] d, logic last, bit is_read);
    @(negedge clk);
    if (!full_rate) while ($urandom_range(0, 4) == 0) begin iv = 0; @(negedge clk); end
    iv = 1; id = d; il = last;
    @(posedge clk);
    while (!ir) begin
      if (loading) n_reload_wait++;
      else n_full_stall++;
      if (!phase2 && is_read) n_stream_stall1++;
      @(posedge clk);
    end
  endtask

  task automatic send_chunk(logic [2*L-1:0] v, logic last, bit is_read);
    logic [BEATS*BW-1:0] c;
    c = {v, 56'h0};
    send_beat(c[2*BW-1:BW], 1'b0, is_read);
    send_beat(c[BW-1:0], last, is_read);
  endtask

  task automatic transfer(int nreads);
    seq_t refs[NR];
    seq_t rd;
    vec_t v;
    result_t r;
    logic [NR-1:0] e;
    for (int k = 0; k < NR; k++) begin
      refs[k] = random_seq(L);
      v = pack(refs[k]);
      send_chunk(v[2*L-1:0], 1'b0, 1'b0);
    end
    for (int i = 0; i < nreads; i++) begin
      case (i % 5)
        0: rd = mutate(refs[i % NR], L, $urandom_range(0, 2), 0, 0);
        1: rd = mutate(refs[i % NR], L, 0, $urandom_range(1, 2), 0);
        2: rd = mutate(refs[i % NR], L, 0, 0, $urandom_range(1, 2));
        3: rd = mutate(refs[i % NR], L, $urandom_range(0, 4), $urandom_range(0, 2), $urandom_range(0, 2));
        default: rd = random_seq(L);
      endcase
      for (int k = 0; k < NR; k++) begin
        r = filter(rd, refs[k], E);
        e[k] = r.pass;
        if (r.ham_pass) n_fast++;
        else if (r.indel_pass) n_indel++;
        else n_reject++;
      end
      exp_q.push_back(e);
      v = pack(rd);
      send_chunk(v[2*L-1:0], i == nreads - 1, 1'b1);
    end
    @(negedge clk); iv = 0; il = 0;
  endtask

  initial begin
    int t_start;
    iv = 0; il = 0; id = '0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    t_start = cyc;
    transfer(N1);
    $display("transfer 1: %0d reads streamed in %0d cycles", N1, cyc - t_start);
    checks++;
    if (n_stream_stall1 != 0) begin
      failures++; $display("FAIL full-rate stream stalled %0d cycles", n_stream_stall1);
    end
    phase2 = 1; full_rate = 0;
    fork
      transfer(N2);
      begin
        repeat (120) @(posedge clk);
        @(negedge clk); block_out = 1;
        repeat (400) @(posedge clk);
        @(negedge clk); block_out = 0;
      end
    join
    wait (got == N1 + N2);
    repeat (20) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d results missing", exp_q.size()); end
    $display("mechanisms: fast-path accepts %0d, indel-path accepts %0d, rejects %0d", n_fast, n_indel, n_reject);
    $display("            input stalls on full FIFOs %0d, output back-pressure %0d, reference reload waits %0d",
             n_full_stall, n_out_bp, n_reload_wait);
    $display("            round-robin wraps %0d", n_wrap);
    checks++; if (n_fast == 0)        begin failures++; $display("FAIL no fast-path accept"); end
    checks++; if (n_indel == 0)       begin failures++; $display("FAIL no indel-path accept"); end
    checks++; if (n_reject == 0)      begin failures++; $display("FAIL no reject"); end
    checks++; if (n_full_stall == 0)  begin failures++; $display("FAIL no FIFO-full stall"); end
    checks++; if (n_out_bp == 0)      begin failures++; $display("FAIL no output back-pressure"); end
    checks++; if (n_reload_wait == 0) begin failures++; $display("FAIL reference reload never waited"); end
    checks++; if (n_wrap < 2) begin failures++; $display("FAIL round robin never wrapped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
