// tb_gk_amend: checks the amending network gk_amend.
// Directed: the 35-bit example mask of the paper's amending figure, whose
// amended form is printed there, plus short edge cases. Random: 100-bit masks
// with sparse and dense ones, against the zero-run model in gk_model_pkg.
module tb_gk_amend;
  import gk_model_pkg::*;
  localparam int L = 100;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [34:0]  f_in, f_out;
  logic [5:0]   e_in, e_out;
  logic [L-1:0] m_in, m_out;

  gk_amend #(.READ_LEN(35)) u_fig (.mask_i(f_in), .mask_o(f_out));
  gk_amend #(.READ_LEN(6))  u_edge (.mask_i(e_in), .mask_o(e_out));
  gk_amend #(.READ_LEN(L))  u_big (.mask_i(m_in), .mask_o(m_out));

  task automatic chk6(logic [5:0] i, logic [5:0] exp);
    e_in = i; #1;
    checks++;
    if (e_out !== exp) begin failures++; $display("FAIL edge %b -> %b exp %b", i, e_out, exp); end
  endtask

  initial begin
    mask_t m;
    mvec_t v, exp;
    f_in = 35'b01001000110100010101100111100010010;
    #1;
    checks++;
    if (f_out !== 35'b01111000111100011111111111100011110) begin
      failures++; $display("FAIL figure example %b", f_out);
    end
    chk6(6'b010000, 6'b010000);  // first bit copied, no right partner
    chk6(6'b101000, 6'b111000);  // 101 at the start
    chk6(6'b100100, 6'b111100);  // 1001 at the start
    chk6(6'b000101, 6'b000111);  // 101 at the end
    chk6(6'b001001, 6'b001111);  // 1001 at the end
    chk6(6'b100010, 6'b100010);  // 10001 stays
    chk6(6'b011110, 6'b011110);  // edge zeros stay
    for (int t = 0; t < 500; t++) begin
      m = {};
      for (int i = 0; i < L; i++) m.push_back(($urandom_range(0, 99) < ((t % 5) * 20 + 10)));
      v = pack_mask(m);
      m_in = v[L-1:0];
      #1;
      exp = pack_mask(amend(m));
      checks++;
      if (m_out !== exp[L-1:0]) begin
        failures++; $display("FAIL random %h -> %h exp %h", m_in, m_out, exp[L-1:0]);
      end
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
