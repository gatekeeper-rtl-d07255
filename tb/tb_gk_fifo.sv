// tb_gk_fifo: checks gk_fifo (depth 4, 16 bits) with random valid/ready on
// both sides against a queue model: data order, full (in_ready low after
// DEPTH words), empty flag, and no loss or duplication.
module tb_gk_fifo;
  localparam int W = 16, D = 4;
  int checks = 0, failures = 0;
  int n_full = 0, n_empty = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic iv, ir, ov, ordy, empty;
  logic [W-1:0] id, od;
  logic [W-1:0] q[$];

  gk_fifo #(.WIDTH(W), .DEPTH(D)) dut (.clk, .rst_n, .in_valid(iv), .in_ready(ir), .in_data(id),
    .out_valid(ov), .out_ready(ordy), .out_data(od), .empty);

  int sent = 0, got = 0;
  always @(posedge clk) if (rst_n) begin
    checks++;
    if (ov !== (q.size() != 0) || ir !== (q.size() < D) || empty !== (q.size() == 0)) begin
      failures++; $display("FAIL flags ov=%0d ir=%0d empty=%0d size=%0d", ov, ir, empty, q.size());
    end
    if (!ir) n_full++;
    if (empty) n_empty++;
    if (ov && ordy) begin
      checks++;
      if (od !== q[0]) begin failures++; $display("FAIL data %h exp %h", od, q[0]); end
      void'(q.pop_front());
      got++;
    end
    if (iv && ir) begin q.push_back(id); sent++; end
  end

  initial begin
    iv = 0; ordy = 0; id = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      iv   = ($urandom_range(0, 99) < ((t / 250) % 2 ? 80 : 30));
      ordy = ($urandom_range(0, 99) < ((t / 250) % 2 ? 30 : 80));
      id   = W'($urandom);
    end
    @(negedge clk); iv = 0; ordy = 1;
    repeat (10) @(posedge clk);
    checks++;
    if (got != sent || q.size() != 0) begin failures++; $display("FAIL sent %0d got %0d", sent, got); end
    checks++;
    if (n_full == 0 || n_empty == 0) begin failures++; $display("FAIL full or empty never seen"); end
    $display("sent %0d, full on %0d cycles, empty on %0d", sent, n_full, n_empty);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
