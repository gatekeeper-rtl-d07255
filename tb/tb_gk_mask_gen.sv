// tb_gk_mask_gen: checks gk_mask_gen, the shifted XOR + pair-OR mask stage.
// Directed: the paper's encoding example (read TCCAT against reference TCCAG
// gives modified mask 00001). Random: 100 bp pairs with shifts 0, +2 and -2,
// against the base-level model in gk_model_pkg.
module tb_gk_mask_gen;
  import gk_model_pkg::*;
  localparam int L = 100;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [9:0]     s_rd, s_rf;
  logic [4:0]     s_m;
  logic [2*L-1:0] rd, rf;
  logic [L-1:0]   m0, mr, ml;

  gk_mask_gen #(.READ_LEN(5), .SHIFT(0))  u_small (.read_i(s_rd), .ref_i(s_rf), .mask_o(s_m));
  gk_mask_gen #(.READ_LEN(L), .SHIFT(0))  u_m0 (.read_i(rd), .ref_i(rf), .mask_o(m0));
  gk_mask_gen #(.READ_LEN(L), .SHIFT(2))  u_mr (.read_i(rd), .ref_i(rf), .mask_o(mr));
  gk_mask_gen #(.READ_LEN(L), .SHIFT(-2)) u_ml (.read_i(rd), .ref_i(rf), .mask_o(ml));

  task automatic check(string what, logic [L-1:0] got, mvec_t exp);
    checks++;
    if (got !== exp[L-1:0]) begin
      failures++;
      $display("FAIL %s got %h exp %h", what, got, exp[L-1:0]);
    end
  endtask

  initial begin
    seq_t a, b;
    vec_t va, vb;
    // encoding example: T C C A T = 11 01 01 00 11
    s_rd = 10'b1101010011;
    s_rf = 10'b1101010010;
    #1;
    checks++;
    if (s_m !== 5'b00001) begin failures++; $display("FAIL example mask %b", s_m); end
    for (int t = 0; t < 300; t++) begin
      b = random_seq(L);
      a = mutate(b, L, $urandom_range(0, 8), $urandom_range(0, 2), $urandom_range(0, 2));
      if (t % 7 == 0) a = b;
      va = pack(a); vb = pack(b);
      rd = va[2*L-1:0]; rf = vb[2*L-1:0];
      #1;
      check("shift0",  m0, pack_mask(mask_of(a, b, 0)));
      check("shift+2", mr, pack_mask(mask_of(a, b, 2)));
      check("shift-2", ml, pack_mask(mask_of(a, b, -2)));
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
