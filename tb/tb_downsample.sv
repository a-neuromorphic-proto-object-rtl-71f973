// tb_downsample -- checks the nearest-neighbour pyramid unit at the design's
// sizes: 112x84 -> 80x60 and 112x84 -> 56x44.  Every destination pixel is
// compared with the reference subsampling, each written once, and the
// stage must take exactly 5 cycles per destination pixel (24 000 for 80x60).
module tb_downsample;
  import podvs_pkg::*;
  import podvs_ref_pkg::*;
  logic clk = 0, rst_n = 1, start = 0;
  initial #1 rst_n = 0;  // falling edge applies the asynchronous reset before the first clock
  int checks = 0, failures = 0;
  map_t src;
  always #5 clk = ~clk;

  logic busy [2], done [2], re [2], we [2];
  addr_t ra [2], wa [2];
  pix_t rq [2], wd [2];
  int got [2][80*60];
  int wcnt [2][80*60];
  int cyc [2] = '{0, 0};

  downsample #(.SRC_W(112), .SRC_H(84), .DST_W(80), .DST_H(60)) d0 (
    .clk, .rst_n, .start, .busy(busy[0]), .done(done[0]),
    .src_rd_en(re[0]), .src_rd_addr(ra[0]), .src_rd_data(rq[0]),
    .dst_wr_en(we[0]), .dst_wr_addr(wa[0]), .dst_wr_data(wd[0]));
  downsample #(.SRC_W(112), .SRC_H(84), .DST_W(56), .DST_H(44)) d1 (
    .clk, .rst_n, .start, .busy(busy[1]), .done(done[1]),
    .src_rd_en(re[1]), .src_rd_addr(ra[1]), .src_rd_data(rq[1]),
    .dst_wr_en(we[1]), .dst_wr_addr(wa[1]), .dst_wr_data(wd[1]));

  for (genvar u = 0; u < 2; u++) begin : g_m
    always_ff @(posedge clk) begin
      if (re[u]) rq[u] <= pix_t'(src[ra[u]]);
      if (we[u]) begin got[u][wa[u]] = int'(wd[u]); wcnt[u][wa[u]]++; end
      if (busy[u]) cyc[u]++;
    end
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int dw [2] = '{80, 56}, dh [2] = '{60, 44};
    map_t r;
    src = new[112 * 84];
    foreach (src[a]) src[a] = $urandom % 256;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    start = 1; @(negedge clk); start = 0;
    while (busy[0] || busy[1]) @(negedge clk);
    for (int u = 0; u < 2; u++) begin
      r = down(src, 112, 84, dw[u], dh[u]);
      for (int a = 0; a < dw[u] * dh[u]; a++) begin
        checks++;
        if (got[u][a] != r[a] || wcnt[u][a] != 1) begin
          failures++;
          if (failures < 10) $display("unit %0d addr %0d: %0d expected %0d", u, a, got[u][a], r[a]);
        end
      end
      checks++;
      if (cyc[u] != 5 * dw[u] * dh[u]) begin
        failures++; $display("unit %0d: %0d cycles, expected %0d", u, cyc[u], 5 * dw[u] * dh[u]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
