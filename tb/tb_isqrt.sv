// tb_isqrt -- self-checking test of the sequential square root.
// Checks the root of edge values (0, 1, squares and their neighbours, the
// largest radicand) and random radicands against a reference computed by
// refinement in the testbench, and checks the N-cycle latency.
module tb_isqrt;
  localparam int unsigned N = 16;
  logic clk = 0, rst_n = 1, start = 0;
  initial #1 rst_n = 0;  // falling edge applies the asynchronous reset before the first clock
  logic [2*N-1:0] rad;
  logic busy, done;
  logic [N-1:0] root;
  int checks = 0, failures = 0;

  isqrt #(.N(N)) dut (.clk, .rst_n, .start, .radicand(rad), .busy, .done, .root);

  always #5 clk = ~clk;

  function automatic longint unsigned ref_sqrt(longint unsigned v);
    longint unsigned r = 0;
    for (int b = N - 1; b >= 0; b--) begin
      longint unsigned t = r | (64'd1 << b);
      if (t * t <= v) r = t;
    end
    return r;
  endfunction

  task automatic run(input logic [2*N-1:0] v);
    int cyc = 0;
    @(negedge clk); rad = v; start = 1;
    @(negedge clk); start = 0;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (64'(root) != ref_sqrt(64'(v))) begin
      failures++; $display("sqrt(%0d) = %0d, expected %0d", v, root, ref_sqrt(64'(v)));
    end
    checks++;
    if (cyc != N) begin failures++; $display("latency %0d", cyc); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rad = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(0); run(1); run(2); run(3); run(4); run(15); run(16); run(17);
    run(32'hFFFF_FFFF); run(32'hFFFE_0001); run(32'hFFFE_0000);
    for (int i = 0; i < 300; i++) run($urandom);
    for (int i = 0; i < 100; i++) run($urandom & 32'h000F_FFFF);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
