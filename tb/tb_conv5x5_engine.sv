// tb_conv5x5_engine -- checks the weighted-sum engine with two signed input
// maps, three lanes (lanes 0, 1 read input 0, lane 2 reads input 1) and
// random coefficients.  Every sum is compared with a zero-padded reference
// convolution; every MAC phase must last 75 cycles; with out_ready held high
// a pixel takes 102 cycles; a second pass with random out_ready stalls must
// give the same sums.
module tb_conv5x5_engine;
  import podvs_pkg::*;
  import podvs_ref_pkg::*;
  localparam int W = 9, H = 7, NI = 2, NO = 3;
  logic clk = 0, rst_n = 1, start = 0;
  initial #1 rst_n = 0;  // falling edge applies the asynchronous reset before the first clock
  logic busy, done, rd_en, mac_active, out_valid, out_ready;
  addr_t rd_addr, out_addr;
  logic signed [15:0] rd_data [NI];
  logic [4:0] tap;
  coef_t coef [NO];
  acc_t out_acc [NO];
  int checks = 0, failures = 0;

  conv5x5_engine #(.W(W), .H(H), .N_IN(NI), .N_OUT(NO), .IN_W(16)) dut (.*);
  always #5 clk = ~clk;

  map_t m [NI];
  int k [NO][25];
  int insel [NO] = '{0, 0, 1};
  for (genvar o = 0; o < NO; o++) begin : g_c
    assign coef[o] = coef_t'(k[o][tap]);
  end
  always_ff @(posedge clk)
    if (rd_en) for (int i = 0; i < NI; i++) rd_data[i] <= 16'(m[i][rd_addr]);

  int mac_run = 0, mac_bad = 0, stalls = 0;
  longint cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (mac_active) mac_run++;
    else if (mac_run != 0) begin
      if (mac_run != 75) mac_bad++;
      mac_run = 0;
    end
    if (out_valid && !out_ready) stalls++;
    if (out_valid && out_ready) begin
      automatic int x = int'(out_addr) % W;
      automatic int y = int'(out_addr) / W;
      for (int o = 0; o < NO; o++) begin
        automatic int kk [25];
        for (int t = 0; t < 25; t++) kk[t] = k[o][t];
        checks++;
        if (int'(out_acc[o]) != wsum(m[insel[o]], W, H, x, y, kk)) begin
          failures++;
          if (failures < 10) $display("addr %0d lane %0d: %0d expected %0d", out_addr, o,
                                      out_acc[o], wsum(m[insel[o]], W, H, x, y, kk));
        end
      end
    end
  end

  bit rand_ready = 0;
  always @(negedge clk) out_ready = rand_ready ? ($urandom % 3 == 0) : 1'b1;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t0;
    for (int i = 0; i < NI; i++) begin
      m[i] = new[W * H];
      foreach (m[i][a]) m[i][a] = int'($urandom % 601) - 300;
    end
    foreach (k[o, t]) k[o][t] = int'($urandom % 255) - 127;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    start = 1; t0 = cyc; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    checks++;
    if (cyc - t0 != 102 * W * H + 1) begin
      failures++; $display("pass took %0d cycles, expected %0d", cyc - t0, 102 * W * H + 1);
    end
    rand_ready = 1;
    start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    checks++; if (mac_bad != 0) begin failures++; $display("%0d MAC phases not 75 cycles", mac_bad); end
    checks++; if (stalls == 0) begin failures++; $display("no stall exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
