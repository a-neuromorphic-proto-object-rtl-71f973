// tb_vm_sum -- checks one von Mises sum unit (stage P5) on three small
// levels (16x12, 12x9, 8x6) held in testbench memories with one-cycle read
// latency.  The maps after the in-place sum must equal the reference
// S_j = sum_{k>=j} V_k >> k, each pixel must be stored once, and the run must
// take sum_j pixels_j * (6*(3-j) + 1) cycles.
module tb_vm_sum;
  import podvs_pkg::*;
  import podvs_ref_pkg::*;
  localparam int unsigned W0 = 16, H0 = 12, W1 = 12, H1 = 9, W2 = 8, H2 = 6;
  logic clk = 0, rst_n = 1, start = 0;
  initial #1 rst_n = 0;  // falling edge applies the asynchronous reset before the first clock
  logic busy, done;
  logic  rd_en [NLVL], wr_en [NLVL];
  addr_t rd_addr [NLVL], wr_addr [NLVL];
  pix_t  rd_data [NLVL], wr_data [NLVL];
  int checks = 0, failures = 0;
  longint cyc = 0;

  vm_sum #(.W0(W0), .H0(H0), .W1(W1), .H1(H1), .W2(W2), .H2(H2)) dut (.*);
  always #5 clk = ~clk;

  map_t mem [3];
  map_t v [3];
  int lw [3] = '{W0, W1, W2}, lh [3] = '{H0, H1, H2};
  int wcount [3][W0*H0];

  for (genvar l = 0; l < 3; l++) begin : g_m
    always_ff @(posedge clk) begin
      if (rd_en[l]) rd_data[l] <= pix_t'(mem[l][rd_addr[l]]);
      if (wr_en[l]) begin mem[l][wr_addr[l]] = int'(wr_data[l]); wcount[l][wr_addr[l]]++; end
    end
  end
  always @(posedge clk) cyc++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t0, expc;
    for (int l = 0; l < 3; l++) begin
      mem[l] = new[lw[l] * lh[l]];
      foreach (mem[l][a]) mem[l][a] = (l == 0 && a % 7 == 0) ? 250 : $urandom % 256;
      v[l] = mem[l];
    end
    vmsum(v, lw, lh);
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    start = 1; t0 = cyc; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    for (int l = 0; l < 3; l++)
      for (int a = 0; a < lw[l] * lh[l]; a++) begin
        checks++;
        if (mem[l][a] != v[l][a] || wcount[l][a] != 1) begin
          failures++;
          if (failures < 10) $display("level %0d addr %0d: %0d expected %0d", l, a, mem[l][a], v[l][a]);
        end
      end
    expc = 0;
    for (int j = 0; j < 3; j++) expc += longint'(lw[j] * lh[j] * (6 * (3 - j) + 1));
    checks++;
    if (cyc - t0 != expc + 1) begin
      failures++; $display("took %0d cycles, expected %0d", cyc - t0, expc + 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
