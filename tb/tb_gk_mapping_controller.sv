// tb_gk_mapping_controller: checks gk_mapping_controller at its defaults
// (5 cores, 16-bit results). Result k is produced by core k mod 5 at a random
// time, later results of the same core after earlier ones, as the cores do.
// The output is sometimes not ready. Checks: results leave in read order with
// their data, a blocked core FIFO holds its producer off, and nothing is lost.
module tb_gk_mapping_controller;
  localparam int NC = 5, NR = 16, N = 200;
  int checks = 0, failures = 0;
  int n_backpressure = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NC-1:0] rv, rr;
  logic [NC-1:0][NR-1:0] rd;
  logic ov, ordy, idle;
  logic [NR-1:0] od;
  logic [NR-1:0] data[N];
  int next_idx[NC];
  int got = 0;

  gk_mapping_controller #(.NUM_CORES(NC), .NUM_REFS(NR)) dut (
    .clk, .rst_n, .res_valid_i(rv), .res_ready_o(rr), .res_i(rd),
    .out_valid(ov), .out_ready(ordy), .out_data(od), .idle_o(idle));

  initial begin
    for (int i = 0; i < N; i++) data[i] = NR'($urandom);
    for (int c = 0; c < NC; c++) next_idx[c] = c;
  end

  always @(negedge clk) begin
    for (int c = 0; c < NC; c++) begin
      rv[c] = rst_n && next_idx[c] < N && ($urandom_range(0, 99) < 20 + 15 * c);
      rd[c] = data[next_idx[c] < N ? next_idx[c] : 0];
    end
    ordy = ($urandom_range(0, 99) < ((got / 50) % 2 ? 25 : 90));
  end

  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NC; c++) begin
      if (rv[c] && rr[c]) next_idx[c] <= next_idx[c] + NC;
      if (rv[c] && !rr[c]) n_backpressure++;
    end
    if (ov && ordy) begin
      checks++;
      if (od !== data[got]) begin failures++; $display("FAIL result %0d got %h exp %h", got, od, data[got]); end
      got <= got + 1;
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (got == N);
    repeat (5) @(posedge clk);
    checks++;
    if (!idle || ov) begin failures++; $display("FAIL not idle at the end"); end
    checks++;
    if (n_backpressure == 0) begin failures++; $display("FAIL no core was ever held off"); end
    $display("core held off on %0d cycles", n_backpressure);
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
