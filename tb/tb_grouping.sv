// tb_grouping -- checks stage P7 on small random border-ownership maps and
// masks (built by the host mask model, plus random extra bits): the four
// grouping maps against the reference with w_p = 1, one write per pixel,
// and the 102-cycle-per-pixel schedule.
module tb_grouping;
  import podvs_pkg::*;
  import podvs_ref_pkg::*;
  localparam int W = 13, H = 10;
  logic clk = 0, rst_n = 1, start = 0;
  initial #1 rst_n = 0;  // falling edge applies the asynchronous reset before the first clock
  logic busy, done, rd_en, wr_en;
  addr_t rd_addr, wr_addr;
  pix_t rd_bo [8], wr_data [NORI];
  logic rd_mask [8];
  int checks = 0, failures = 0;
  longint cyc = 0;

  grouping #(.W(W), .H(H)) dut (.*);
  always #5 clk = ~clk;

  map_t b [8], mk [8], g [4];
  int got [4][W*H];
  int wcount [W*H];
  always_ff @(posedge clk) if (rd_en)
    for (int i = 0; i < 8; i++) begin
      rd_bo[i]   <= pix_t'(b[i][rd_addr]);
      rd_mask[i] <= mk[i][rd_addr][0];
    end
  always @(posedge clk) begin
    cyc++;
    if (wr_en) begin
      wcount[wr_addr]++;
      for (int i = 0; i < 4; i++) got[i][wr_addr] = int'(wr_data[i]);
    end
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t0;
    int nz = 0;
    for (int i = 0; i < 8; i++) begin
      b[i] = new[W * H];
      foreach (b[i][a]) b[i][a] = ($urandom % 3 == 0) ? 0 : $urandom % 256;
    end
    masks(b, W * H, mk);
    for (int i = 0; i < 8; i++) foreach (mk[i][a]) if ($urandom % 5 == 0) mk[i][a] = 1;
    grp(b, mk, W, H, 1, g);
    foreach (g[t, a]) if (g[t][a] != 0) nz++;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    start = 1; t0 = cyc; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    for (int i = 0; i < 4; i++)
      for (int a = 0; a < W * H; a++) begin
        checks++;
        if (got[i][a] != g[i][a]) begin
          failures++;
          if (failures < 10) $display("map %0d addr %0d: %0d expected %0d", i, a, got[i][a], g[i][a]);
        end
      end
    for (int a = 0; a < W * H; a++) begin checks++; if (wcount[a] != 1) failures++; end
    checks++; if (nz == 0) begin failures++; $display("reference all zero"); end
    checks++;
    if (cyc - t0 != 102 * W * H + 1) begin
      failures++; $display("took %0d cycles, expected %0d", cyc - t0, 102 * W * H + 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
