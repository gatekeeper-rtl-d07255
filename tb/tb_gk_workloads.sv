// tb_gk_workloads: runs the filter on scaled-down versions of the paper's
// simulated read sets: low-substitution, low-indel, substitution-rich,
// insertion-rich and deletion-rich reads (3% and 16% edit rates), at read
// lengths 64, 100, 150 and 300 bp, with edit thresholds E = 2, 3, 4 and 5
// for the four lengths (the paper sweeps E for every length; one E per length
// keeps the number of filter instances small). Reads are derived from random reference segments, as a
// read simulator would derive them from a genome. For every pair the RTL
// decision must equal the reference model's. The testbench also computes the
// true edit distance (Levenshtein, full dynamic programming) and prints the
// false-negative and false-positive counts of the filter for each set; those
// are reported, not checked.
module tb_gk_workloads;
  import gk_model_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  localparam int L0 = 64,  E0 = 2;
  localparam int L1 = 100, E1 = 3;
  localparam int L2 = 150, E2 = 4;
  localparam int L3 = 300, E3 = 5;
  localparam int PAIRS = 60;   // per set and length

  logic [2*L0-1:0] r0, f0;  logic p0;
  logic [2*L1-1:0] r1, f1;  logic p1;
  logic [2*L2-1:0] r2, f2;  logic p2;
  logic [2*L3-1:0] r3, f3;  logic p3;

  gk_filter #(.READ_LEN(L0), .E(E0)) u0 (.read_i(r0), .ref_i(f0), .pass_o(p0), .ham_pass_o(), .indel_pass_o());
  gk_filter #(.READ_LEN(L1), .E(E1)) u1 (.read_i(r1), .ref_i(f1), .pass_o(p1), .ham_pass_o(), .indel_pass_o());
  gk_filter #(.READ_LEN(L2), .E(E2)) u2 (.read_i(r2), .ref_i(f2), .pass_o(p2), .ham_pass_o(), .indel_pass_o());
  gk_filter #(.READ_LEN(L3), .E(E3)) u3 (.read_i(r3), .ref_i(f3), .pass_o(p3), .ham_pass_o(), .indel_pass_o());

  function automatic int edit_distance(seq_t a, seq_t b);
    int n = a.size();
    int prev[$], cur[$];
    for (int j = 0; j <= n; j++) prev.push_back(j);
    for (int i = 1; i <= n; i++) begin
      cur = {};
      cur.push_back(i);
      for (int j = 1; j <= n; j++) begin
        int best = prev[j-1] + ((a[i-1] == b[j-1]) ? 0 : 1);
        if (prev[j] + 1 < best) best = prev[j] + 1;
        if (cur[j-1] + 1 < best) best = cur[j-1] + 1;
        cur.push_back(best);
      end
      prev = cur;
    end
    return prev[n];
  endfunction

  // one pair at length index li
  task automatic run_pair(int li, seq_t rd, seq_t rf, output bit got);
    vec_t vr, vf;
    vr = pack(rd); vf = pack(rf);
    case (li)
      0: begin r0 = vr[2*L0-1:0]; f0 = vf[2*L0-1:0]; #1 got = p0; end
      1: begin r1 = vr[2*L1-1:0]; f1 = vf[2*L1-1:0]; #1 got = p1; end
      2: begin r2 = vr[2*L2-1:0]; f2 = vf[2*L2-1:0]; #1 got = p2; end
      default: begin r3 = vr[2*L3-1:0]; f3 = vf[2*L3-1:0]; #1 got = p3; end
    endcase
  endtask

  initial begin
    int lens[4] = '{L0, L1, L2, L3};
    int es[4]   = '{E0, E1, E2, E3};
    string names[5] = '{"low-substitution", "low-indel", "substitution-rich", "insertion-rich", "deletion-rich"};
    for (int set = 0; set < 5; set++) begin
      for (int li = 0; li < 4; li++) begin
        int L, E, fn, fp, acc, rej, correct;
        L = lens[li]; E = es[li];
        fn = 0; fp = 0; acc = 0; rej = 0; correct = 0;
        for (int t = 0; t < PAIRS; t++) begin
          seq_t rf, rd;
          int k, ed;
          bit got;
          result_t r;
          rf = random_seq(L);
          case (set)
            0: begin k = (L * 3 + 50) / 100; rd = mutate(rf, L, $urandom_range(0, k), 0, 0); end
            1: begin k = (L + 99) / 100; rd = mutate(rf, L, $urandom_range(0, k), $urandom_range(0, k), $urandom_range(0, k)); end
            2: begin k = (L * 16) / 100; rd = mutate(rf, L, $urandom_range(k / 2, k), 0, 0); end
            3: begin k = (L * 16) / 100; rd = mutate(rf, L, 0, $urandom_range(1, k), 0); end
            default: begin k = (L * 16) / 100; rd = mutate(rf, L, 0, 0, $urandom_range(1, k)); end
          endcase
          run_pair(li, rd, rf, got);
          r = filter(rd, rf, E);
          checks++;
          if (got !== r.pass) begin
            failures++; $display("FAIL %s %0d bp pair %0d: rtl %0d model %0d", names[set], L, t, got, r.pass);
          end
          ed = edit_distance(rd, rf);
          if (ed <= E) correct++;
          if (got) acc++; else rej++;
          if (!got && ed <= E) fn++;
          if (got && ed > E) fp++;
          @(posedge clk);
        end
        $display("%-18s %3d bp E=%0d: %0d pairs, %0d within E, accepted %0d, rejected %0d, false neg %0d, false pos %0d",
                 names[set], L, E, PAIRS, correct, acc, rej, fn, fp);
      end
    end
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
