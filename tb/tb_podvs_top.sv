// tb_podvs_top -- end-to-end test of one channel at the default size
// (112x84 input, three pyramid levels), with no parameter overrides.
//
// It loads a synthetic feature map (light rectangles, a dark disc, a bright
// saturating bar, noise) through the host port, runs stages P2..P6, reads
// back all 24 border-ownership maps and compares them with the behavioural
// reference, computes the masks as the host would and writes them, runs P7
// and compares all 12 grouping maps.  It also checks each stage's cycle
// count against its formula and counts that every mechanism occurred:
// each stage, the mask round trip, both mask values, zero padding at the
// border, saturation, and the in-place von Mises sum changing the maps.
// Two frames run back to back, the second with the objects moved by six
// pixels, as consecutive video frames would be: the second operation must
// start from the idle state and leave nothing of the first in its results.
// The stage cycle counts are those of the second frame.
module tb_podvs_top;
  import podvs_pkg::*;
  import podvs_ref_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // falling edge applies the asynchronous reset before the first clock
  logic px_we = 0, start = 0, rd_en = 0, mask_we = 0, grp_start = 0, mask_data = 0;
  addr_t px_addr = '0, rd_addr = '0, mask_addr = '0;
  pix_t px_data = '0, rd_data;
  rdsel_t rd_sel = RD_BO;
  logic [1:0] rd_level = '0, mask_level = '0;
  logic [2:0] rd_idx = '0, mask_idx = '0;
  logic bo_ready, grp_done, busy;
  stage_t stage;

  podvs_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // stage timing
  longint t_enter [8];
  longint t_len   [8];
  int     n_enter [8];
  stage_t prev_stage = ST_IDLE;
  always @(posedge clk) begin
    if (stage != prev_stage) begin
      t_len[prev_stage] = cyc - t_enter[prev_stage];
      t_enter[stage] = cyc;
      n_enter[stage]++;
      prev_stage = stage;
    end
  end

  initial begin
    repeat (10_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  map_t img, lvl [3];
  map_t e [3][6], v [3][16], b [3][8], mk [3][8], g [3][4];
  map_t vcol [3];
  map_t bo_hw [3][8];
  int lw [3], lh [3];

  task automatic check_len(stage_t s, longint exp_len);
    checks++;
    if (t_len[s] != exp_len) begin
      failures++;
      $display("stage %s took %0d cycles, expected %0d", s.name(), t_len[s], exp_len);
    end
  endtask

  task automatic mech(string name, int count);
    checks++;
    $display("mechanism %-28s %0d", name, count);
    if (count == 0) begin failures++; $display("  never happened"); end
  endtask

  int sat_cnt = 0, pad_cnt = 0, ip_cnt = 0, m0 = 0, m1 = 0, frames = 0;

  // synthetic frame; dx moves the objects, as between two video frames
  task automatic make_img(int dx);
    img = new[lw[0] * lh[0]];
    for (int y = 0; y < lh[0]; y++)
      for (int x = 0; x < lw[0]; x++) begin
        automatic int p = 100 + ($urandom % 9);
        if (x >= 20 + dx && x < 45 + dx && y >= 15 && y < 40) p = 190;
        if (x >= 60 - dx && x < 100 - dx && y >= 50 && y < 70) p = 170;
        if ((x - 80 - dx) * (x - 80 - dx) + (y - 25) * (y - 25) < 120) p = 25;
        if (x < 18 && y >= 50) p = 0;
        if (x >= 5 && x < 12 && y >= 55 && y < 80) p = 255;
        if (x == 0 || y == 0) p = 230;           // bright frame edge: padding matters
        img[y * lw[0] + x] = p;
      end
  endtask

  // one complete operation: reference, P1..P6, BO read-back, masks, P7, check
  task automatic run_frame();
    // reference
    lvl[0] = img;
    for (int k = 1; k < 3; k++) lvl[k] = down(img, lw[0], lh[0], lw[k], lh[k]);
    for (int k = 0; k < 3; k++) begin
      edge_cs(lvl[k], lw[k], lh[k], e[k]);
      vmf(e[k][4], e[k][5], lw[k], lh[k], v[k]);
    end
    for (int m = 0; m < 16; m++) begin
      for (int k = 0; k < 3; k++) vcol[k] = v[k][m];
      vmsum(vcol, lw, lh);
      for (int k = 0; k < 3; k++) begin
        for (int a = 0; a < lw[k] * lh[k]; a++) if (vcol[k][a] != v[k][m][a]) ip_cnt++;
        v[k][m] = vcol[k];
      end
    end
    for (int k = 0; k < 3; k++) bo(e[k], v[k], lw[k] * lh[k], b[k]);
    for (int k = 0; k < 3; k++)
      for (int i = 0; i < 6; i++)
        for (int a = 0; a < lw[k] * lh[k]; a++) if (e[k][i][a] == 255) sat_cnt++;
    // border pixels whose edge response sees the padded zeros
    for (int x = 0; x < lw[0]; x++) if (e[0][4][x] != e[0][4][lw[0] + x]) pad_cnt++;

    // P1: load the input map
    for (int a = 0; a < lw[0] * lh[0]; a++) begin
      px_we = 1; px_addr = addr_t'(a); px_data = pix_t'(img[a]);
      @(negedge clk);
    end
    px_we = 0;
    start = 1; @(negedge clk); start = 0;
    while (!bo_ready) @(negedge clk);
    $display("BO ready at cycle %0d", cyc);

    // read and check the BO maps, keep them for the host mask model
    for (int k = 0; k < 3; k++)
      for (int i = 0; i < 8; i++) begin
        automatic int bad = 0;
        bo_hw[k][i] = new[lw[k] * lh[k]];
        for (int a = 0; a < lw[k] * lh[k]; a++) begin
          rd_en = 1; rd_sel = RD_BO; rd_level = 2'(k); rd_idx = 3'(i); rd_addr = addr_t'(a);
          @(negedge clk);
          rd_en = 0;
          bo_hw[k][i][a] = int'(rd_data);
          checks++;
          if (int'(rd_data) != b[k][i][a]) begin
            failures++; bad++;
            if (bad < 4) $display("BO L%0d map %0d addr %0d: %0d, expected %0d",
                                  k, i, a, rd_data, b[k][i][a]);
          end
        end
      end

    // host: masks from the read-back maps
    for (int k = 0; k < 3; k++) masks(bo_hw[k], lw[k] * lh[k], mk[k]);
    for (int k = 0; k < 3; k++)
      for (int i = 0; i < 8; i++)
        for (int a = 0; a < lw[k] * lh[k]; a++) begin
          mask_we = 1; mask_level = 2'(k); mask_idx = 3'(i); mask_addr = addr_t'(a);
          mask_data = mk[k][i][a][0];
          if (mk[k][i][a] != 0) m1++; else m0++;
          @(negedge clk);
        end
    mask_we = 0;
    for (int k = 0; k < 3; k++) grp(b[k], mk[k], lw[k], lh[k], 1, g[k]);

    grp_start = 1; @(negedge clk); grp_start = 0;
    while (!grp_done) @(negedge clk);
    @(negedge clk);

    for (int k = 0; k < 3; k++)
      for (int t = 0; t < 4; t++) begin
        automatic int bad = 0;
        for (int a = 0; a < lw[k] * lh[k]; a++) begin
          rd_en = 1; rd_sel = RD_GRP; rd_level = 2'(k); rd_idx = 3'(t); rd_addr = addr_t'(a);
          @(negedge clk);
          rd_en = 0;
          checks++;
          if (int'(rd_data) != g[k][t][a]) begin
            failures++; bad++;
            if (bad < 4) $display("GRP L%0d map %0d addr %0d: %0d, expected %0d",
                                  k, t, a, rd_data, g[k][t][a]);
          end
        end
      end

    frames++;
  endtask

  initial begin
    for (int k = 0; k < 3; k++) begin lw[k] = LVL_W[k]; lh[k] = LVL_H[k]; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    make_img(0);
    run_frame();
    make_img(6);
    run_frame();

    // stage lengths: entry to exit, including the start pulse and done latch
    check_len(ST_DOWN,  longint'(5 * 80 * 60) + 2);
    check_len(ST_EDGE,  longint'(120 * 112 * 84) + 2);
    check_len(ST_VMF,   longint'(102 * 112 * 84) + 2);
    check_len(ST_VMSUM, longint'(19 * 112 * 84 + 13 * 80 * 60 + 7 * 56 * 44) + 2);
    check_len(ST_BO,    longint'(6 * 112 * 84) + 2);
    check_len(ST_GROUP, longint'(102 * 112 * 84) + 2);
    for (int s = 1; s < 8; s++) $display("stage %s: %0d cycles", stage_t'(s), t_len[s]);

    mech("stage P2 pyramid",          n_enter[ST_DOWN]);
    mech("stage P3 edge/CS",          n_enter[ST_EDGE]);
    mech("stage P4 von Mises filter", n_enter[ST_VMF]);
    mech("stage P5 von Mises sum",    n_enter[ST_VMSUM]);
    mech("stage P6 border ownership", n_enter[ST_BO]);
    mech("host mask round trip",      n_enter[ST_MASK]);
    mech("stage P7 grouping",         n_enter[ST_GROUP]);
    mech("mask bit 1",                m1);
    mech("mask bit 0",                m0);
    mech("saturation to 255",         sat_cnt);
    mech("zero padding at border",    pad_cnt);
    mech("in-place sum changed map",  ip_cnt);
    checks++;
    if (frames != 2 || n_enter[ST_DOWN] != 2 || n_enter[ST_GROUP] != 2) begin
      failures++; $display("back-to-back frames: %0d run, %0d P2 entries", frames, n_enter[ST_DOWN]);
    end
    mech("second frame after the first", frames - 1);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
