// tb_border_own -- checks stage P6 on small random edge and von Mises sum
// maps: all eight border-ownership maps against the reference, one write per
// pixel, and the 6-cycle-per-pixel schedule.
module tb_border_own;
  import podvs_pkg::*;
  import podvs_ref_pkg::*;
  localparam int W = 15, H = 11;
  logic clk = 0, rst_n = 1, start = 0;
  initial #1 rst_n = 0;  // falling edge applies the asynchronous reset before the first clock
  logic busy, done, rd_en, wr_en;
  addr_t rd_addr, wr_addr;
  pix_t rd_edge [NORI], rd_vms [16], wr_data [8];
  int checks = 0, failures = 0;
  longint cyc = 0;

  border_own #(.W(W), .H(H)) dut (.*);
  always #5 clk = ~clk;

  map_t e [6], s [16], b [8];
  int got [8][W*H];
  int wcount [W*H];
  always_ff @(posedge clk) if (rd_en) begin
    for (int t = 0; t < NORI; t++) rd_edge[t] <= pix_t'(e[t][rd_addr]);
    for (int m = 0; m < 16; m++)   rd_vms[m]  <= pix_t'(s[m][rd_addr]);
  end
  always @(posedge clk) begin
    cyc++;
    if (wr_en) begin
      wcount[wr_addr]++;
      for (int i = 0; i < 8; i++) got[i][wr_addr] = int'(wr_data[i]);
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t0;
    for (int i = 0; i < 6; i++) begin e[i] = new[W * H]; foreach (e[i][a]) e[i][a] = $urandom % 256; end
    for (int m = 0; m < 16; m++) begin s[m] = new[W * H]; foreach (s[m][a]) s[m][a] = $urandom % 256; end
    bo(e, s, W * H, b);
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    start = 1; t0 = cyc; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    for (int i = 0; i < 8; i++)
      for (int a = 0; a < W * H; a++) begin
        checks++;
        if (got[i][a] != b[i][a]) begin
          failures++;
          if (failures < 10) $display("map %0d addr %0d: %0d expected %0d", i, a, got[i][a], b[i][a]);
        end
      end
    for (int a = 0; a < W * H; a++) begin checks++; if (wcount[a] != 1) failures++; end
    checks++;
    if (cyc - t0 != 6 * W * H + 1) begin
      failures++; $display("took %0d cycles, expected %0d", cyc - t0, 6 * W * H + 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
