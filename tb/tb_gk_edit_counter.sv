// tb_gk_edit_counter: checks the 4-bit window edit estimate, gk_edit_counter.
// Every 4-bit pattern is checked alone in a 4-bit instance (the paper's table
// gives its cost), then random masks of 100 bases and of 150 bases (which
// needs zero padding) against the model in gk_model_pkg.
module tb_gk_edit_counter;
  import gk_model_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [3:0]   w;
  logic [1:0]   wc;
  logic [99:0]  m100;
  logic [5:0]   c100;
  logic [149:0] m150;
  logic [6:0]   c150;

  gk_edit_counter #(.READ_LEN(4))   u4   (.mask_i(w),    .count_o(wc));
  gk_edit_counter #(.READ_LEN(100)) u100 (.mask_i(m100), .count_o(c100));
  gk_edit_counter #(.READ_LEN(150)) u150 (.mask_i(m150), .count_o(c150));

  initial begin
    mask_t m;
    mvec_t v;
    int exp;
    for (int p = 0; p < 16; p++) begin
      w = 4'(p); #1;
      exp = (p == 0) ? 0 : (p inside {5, 6, 9, 10, 11, 13}) ? 2 : 1;
      checks++;
      if (int'(wc) != exp) begin failures++; $display("FAIL window %b -> %0d exp %0d", w, wc, exp); end
    end
    for (int t = 0; t < 400; t++) begin
      m = {};
      for (int i = 0; i < 100; i++) m.push_back($urandom_range(0, 99) < (t % 4) * 25);
      v = pack_mask(m); m100 = v[99:0];
      m = {};
      for (int i = 0; i < 150; i++) m.push_back($urandom_range(0, 99) < (t % 4) * 25 + 5);
      #1;
      checks++;
      exp = count_edits(unpack_mask({{(MAXL-100){1'b0}}, m100}, 100));
      if (int'(c100) != exp) begin failures++; $display("FAIL 100bp %h -> %0d exp %0d", m100, c100, exp); end
      v = pack_mask(m); m150 = v[149:0];
      #1;
      checks++;
      exp = count_edits(m);
      if (int'(c150) != exp) begin failures++; $display("FAIL 150bp %h -> %0d exp %0d", m150, c150, exp); end
      @(posedge clk);
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
