// tb_vonmises_filter -- checks stage P4 on small random ON / OFF maps: all
// sixteen output maps against the reference, one write per pixel, and the
// 102-cycle-per-pixel schedule.
module tb_vonmises_filter;
  import podvs_pkg::*;
  import podvs_ref_pkg::*;
  localparam int W = 13, H = 10;
  logic clk = 0, rst_n = 1, start = 0;
  initial #1 rst_n = 0;  // falling edge applies the asynchronous reset before the first clock
  logic busy, done, rd_en, wr_en;
  addr_t rd_addr, wr_addr;
  pix_t rd_on, rd_off, wr_data [16];
  int checks = 0, failures = 0;
  longint cyc = 0;

  vonmises_filter #(.W(W), .H(H)) dut (.*);
  always #5 clk = ~clk;

  map_t on, off;
  map_t v [16];
  int got [16][W*H];
  int wcount [W*H];
  always_ff @(posedge clk) if (rd_en) begin rd_on <= pix_t'(on[rd_addr]); rd_off <= pix_t'(off[rd_addr]); end
  always @(posedge clk) begin
    cyc++;
    if (wr_en) begin
      wcount[wr_addr]++;
      for (int i = 0; i < 16; i++) got[i][wr_addr] = int'(wr_data[i]);
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t0;
    on = new[W * H]; off = new[W * H];
    foreach (on[a]) begin
      on[a]  = ($urandom % 4 == 0) ? 255 : $urandom % 120;
      off[a] = $urandom % 256;
    end
    vmf(on, off, W, H, v);
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    start = 1; t0 = cyc; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    for (int i = 0; i < 16; i++)
      for (int a = 0; a < W * H; a++) begin
        checks++;
        if (got[i][a] != v[i][a]) begin
          failures++;
          if (failures < 10) $display("map %0d addr %0d: %0d expected %0d", i, a, got[i][a], v[i][a]);
        end
      end
    for (int a = 0; a < W * H; a++) begin checks++; if (wcount[a] != 1) failures++; end
    checks++;
    if (cyc - t0 != 102 * W * H + 1) begin
      failures++; $display("took %0d cycles, expected %0d", cyc - t0, 102 * W * H + 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
