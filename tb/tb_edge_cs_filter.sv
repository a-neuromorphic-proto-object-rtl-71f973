// tb_edge_cs_filter -- checks stage P3 on a small random map with a light
// square: all six output maps against the behavioural reference, that each
// pixel is written once, the 75-cycle weighted-sum phase and the
// 120-cycle-per-pixel schedule.
module tb_edge_cs_filter;
  import podvs_pkg::*;
  import podvs_ref_pkg::*;
  localparam int W = 14, H = 11;
  logic clk = 0, rst_n = 1, start = 0;
  initial #1 rst_n = 0;  // falling edge applies the asynchronous reset before the first clock
  logic busy, done, mac_active, rd_en, wr_en;
  addr_t rd_addr, wr_addr;
  pix_t rd_data, wr_data [6];
  int checks = 0, failures = 0;

  edge_cs_filter #(.W(W), .H(H)) dut (.*);
  always #5 clk = ~clk;

  map_t img;
  map_t e [6];
  int got [6][W*H];
  int wcount [W*H];
  always_ff @(posedge clk) if (rd_en) rd_data <= pix_t'(img[rd_addr]);

  int mac_run = 0, mac_bad = 0, mac_runs = 0;
  always @(posedge clk) begin
    if (mac_active) mac_run++;
    else if (mac_run != 0) begin
      mac_runs++;
      if (mac_run != 75) mac_bad++;
      mac_run = 0;
    end
    if (wr_en) begin
      wcount[int'(wr_addr)]++;
      for (int i = 0; i < 6; i++) got[i][int'(wr_addr)] = int'(wr_data[i]);
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t0, t1;
    img = new[W * H];
    for (int a = 0; a < W * H; a++) begin
      automatic int x = a % W;
      automatic int y = a / W;
      img[a] = (x >= 4 && x < 10 && y >= 3 && y < 8) ? 200 + ($urandom % 50) : ($urandom % 60);
    end
    edge_cs(img, W, H, e);
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    start = 1; @(negedge clk); start = 0;
    t0 = $time;
    while (!done) @(negedge clk);
    t1 = $time;
    for (int i = 0; i < 6; i++)
      for (int a = 0; a < W * H; a++) begin
        checks++;
        if (got[i][a] != e[i][a]) begin
          failures++;
          if (failures < 10) $display("map %0d addr %0d: %0d expected %0d", i, a, got[i][a], e[i][a]);
        end
      end
    for (int a = 0; a < W * H; a++) begin
      checks++; if (wcount[a] != 1) failures++;
    end
    checks++; if (mac_bad != 0 || mac_runs != W * H) begin failures++; $display("mac runs %0d bad %0d", mac_runs, mac_bad); end
    checks++;
    if ((t1 - t0) / 10 != 120 * W * H) begin
      failures++; $display("took %0d cycles, expected %0d", (t1 - t0) / 10, 120 * W * H);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
