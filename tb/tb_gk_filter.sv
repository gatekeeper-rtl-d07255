// tb_gk_filter: checks one complete GateKeeper filter, gk_filter, at 100 bp
// and E=2 (and a second instance at E=5), against gk_model_pkg. Directed
// cases: exact match, E substitutions (fast Hamming path must accept), a
// single deletion and a single insertion (indel path must accept while the
// Hamming count is high), and unrelated sequences (must reject). Then random
// mixtures of edits. Counts how often each path decided, and fails if a path
// was never exercised.
module tb_gk_filter;
  import gk_model_pkg::*;
  localparam int L = 100;

  int checks = 0, failures = 0;
  int n_ham = 0, n_indel_only = 0, n_reject = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [2*L-1:0] rd, rf;
  logic pass2, ham2, ind2, pass5, ham5, ind5;

  gk_filter #(.READ_LEN(L), .E(2)) u_e2 (.read_i(rd), .ref_i(rf), .pass_o(pass2), .ham_pass_o(ham2), .indel_pass_o(ind2));
  gk_filter #(.READ_LEN(L), .E(5)) u_e5 (.read_i(rd), .ref_i(rf), .pass_o(pass5), .ham_pass_o(ham5), .indel_pass_o(ind5));

  task automatic run(seq_t a, seq_t b, string what, int want_pass2 = -1);
    vec_t va = pack(a), vb = pack(b);
    result_t r2, r5;
    rd = va[2*L-1:0]; rf = vb[2*L-1:0];
    #1;
    r2 = filter(a, b, 2);
    r5 = filter(a, b, 5);
    checks++;
    if ({pass2, ham2, ind2} !== {r2.pass, r2.ham_pass, r2.indel_pass}) begin
      failures++;
      $display("FAIL %s E=2 got p%0d h%0d i%0d exp p%0d h%0d i%0d (ham %0d edits %0d)",
               what, pass2, ham2, ind2, r2.pass, r2.ham_pass, r2.indel_pass, r2.ham, r2.edits);
    end
    checks++;
    if ({pass5, ham5, ind5} !== {r5.pass, r5.ham_pass, r5.indel_pass}) begin
      failures++;
      $display("FAIL %s E=5 got p%0d h%0d i%0d exp p%0d h%0d i%0d", what, pass5, ham5, ind5,
               r5.pass, r5.ham_pass, r5.indel_pass);
    end
    if (want_pass2 >= 0) begin
      checks++;
      if (pass2 !== want_pass2[0]) begin failures++; $display("FAIL %s expected pass=%0d", what, want_pass2); end
    end
    if (ham2) n_ham++;
    else if (ind2) n_indel_only++;
    else n_reject++;
    @(posedge clk);
  endtask

  initial begin
    seq_t b, a;
    b = random_seq(L);
    run(b, b, "exact", 1);
    checks++; if (!ham2) begin failures++; $display("FAIL exact not on fast path"); end
    a = b; a[10] = (a[10] + 1) % 4; a[70] = (a[70] + 2) % 4;
    run(a, b, "two substitutions", 1);
    checks++; if (!ham2) begin failures++; $display("FAIL 2 subs not on fast path"); end
    a = b; a.delete(30); a.push_back(0);
    run(a, b, "one deletion", 1);
    a = b; a.insert(30, (b[30] + 1) % 4); void'(a.pop_back());
    run(a, b, "one insertion", 1);
    run(random_seq(L), b, "unrelated", 0);
    for (int t = 0; t < 600; t++) begin
      b = random_seq(L);
      case (t % 4)
        0: a = mutate(b, L, $urandom_range(0, 6), 0, 0);
        1: a = mutate(b, L, 0, $urandom_range(0, 3), 0);
        2: a = mutate(b, L, 0, 0, $urandom_range(0, 3));
        default: a = mutate(b, L, $urandom_range(0, 3), $urandom_range(0, 2), $urandom_range(0, 2));
      endcase
      run(a, b, "random");
    end
    $display("decisions: fast path %0d, indel path only %0d, reject %0d", n_ham, n_indel_only, n_reject);
    checks++; if (n_ham == 0 || n_indel_only == 0 || n_reject == 0) begin failures++; $display("FAIL a path never used"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
