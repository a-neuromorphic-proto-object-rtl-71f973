// podvs_top -- proto-object grouping accelerator for one feature channel.
//
// The host sends one 112x84 8-bit spatio-temporal feature map (stage P1) and
// pulses start.  The channel then builds the 80x60 and 56x44 pyramid levels
// (P2), and for each of the three levels in parallel computes four complex
// edge maps and the ON / OFF center-surround maps (P3), sixteen von Mises
// maps (P4), sums the von Mises maps across levels (P5) and forms eight
// border-ownership maps, left and right for four orientations (P6).  It then
// raises bo_ready and waits: the host reads the border-ownership maps,
// derives the binary left/right masks and writes them back, then pulses
// grp_start.  Grouping (P7) writes four grouping maps per level, and
// grp_done pulses when they can be read.  All maps live in their own block
// RAM (129 of them), as in the block diagram of the design.
//
// Host ports (all synchronous to clk):
//   px_we/px_addr/px_data      write the input map, raster order, in ST_IDLE
//   rd_en/rd_sel/rd_level/rd_idx/rd_addr -> rd_data one cycle later:
//                              rd_sel RD_BO  reads BO map rd_idx (0..3 left
//                              0..135 deg, 4..7 right) of level rd_level;
//                              RD_GRP reads grouping map rd_idx (0..3).
//                              Valid in ST_MASK and ST_IDLE.
//   mask_we/mask_level/mask_idx/mask_addr/mask_data
//                              write mask bit (idx as for BO maps), in ST_MASK
// These ports stand where the USB link of the board connects; the link itself
// is not part of this RTL.  The stage structure, level sizes and map counts
// follow the design; port names and the handshake are this design's own.
// Stage times at the default size: P2 24 001, P3 1 128 961, P4 959 617,
// P5 258 401, P6 56 449 and P7 959 617 cycles (see each block).
module podvs_top
  import podvs_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  // input map
  input  logic       px_we,
  input  addr_t      px_addr,
  input  pix_t       px_data,
  input  logic       start,
  output logic       bo_ready,
  // read-back
  input  logic       rd_en,
  input  rdsel_t     rd_sel,
  input  logic [1:0] rd_level,
  input  logic [2:0] rd_idx,
  input  addr_t      rd_addr,
  output pix_t       rd_data,
  // masks
  input  logic       mask_we,
  input  logic [1:0] mask_level,
  input  logic [2:0] mask_idx,
  input  addr_t      mask_addr,
  input  logic       mask_data,
  input  logic       grp_start,
  output logic       grp_done,
  output stage_t     stage,
  output logic       busy
);

  // ---------------------------------------------------------------- control
  logic       stage_start;
  logic [2:0] unit_done;

  stage_sequencer u_seq (
    .clk, .rst_n, .start, .grp_start, .unit_done,
    .stage, .stage_start, .bo_ready, .grp_done
  );

  logic [NLVL-1:0] lvl_busy, lvl_mac;  // per level: any unit running, P3 MAC phase
  logic ds_busy_any, vs_busy_any;
  assign busy = ((stage != ST_IDLE) && (stage != ST_MASK)) || ds_busy_any || vs_busy_any
                || (lvl_busy != '0);

  // the edge filters' weighted sums run only in their own stage
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
    end else begin
      assert (lvl_mac == '0 || stage == ST_EDGE)
        else $error("podvs_top: edge weighted sums outside ST_EDGE");
    end
  end

  logic go_down, go_edge, go_vmf, go_vmsum, go_bo, go_grp;
  assign go_down  = stage_start && (stage == ST_DOWN);
  assign go_edge  = stage_start && (stage == ST_EDGE);
  assign go_vmf   = stage_start && (stage == ST_VMF);
  assign go_vmsum = stage_start && (stage == ST_VMSUM);
  assign go_bo    = stage_start && (stage == ST_BO);
  assign go_grp   = stage_start && (stage == ST_GROUP);

  // ------------------------------------------------------------ map outputs
  pix_t pix_q  [NLVL][2];     // pyramid level maps, two read ports
  pix_t e_q    [NLVL][6];     // C_0..C_135, ON, OFF
  pix_t vm_q   [NLVL][16];    // von Mises / von Mises sum maps
  pix_t bo_q   [NLVL][8];     // border ownership
  logic mk_q   [NLVL][8];     // masks
  pix_t g_q    [NLVL][NORI];  // grouping

  // ------------------------------------------------------------ P2 pyramid
  logic  ds_rd_en [2], ds_wr_en [2], ds_done [2], ds_busy [2];
  assign ds_busy_any = ds_busy[0] | ds_busy[1];
  addr_t ds_rd_addr [2], ds_wr_addr [2];
  pix_t  ds_wr_data [2];

  for (genvar u = 0; u < 2; u++) begin : g_ds
    downsample #(
      .SRC_W(LVL_W[0]), .SRC_H(LVL_H[0]), .DST_W(LVL_W[u+1]), .DST_H(LVL_H[u+1])
    ) u_ds (
      .clk, .rst_n, .start(go_down), .busy(ds_busy[u]), .done(ds_done[u]),
      .src_rd_en(ds_rd_en[u]), .src_rd_addr(ds_rd_addr[u]), .src_rd_data(pix_q[0][u]),
      .dst_wr_en(ds_wr_en[u]), .dst_wr_addr(ds_wr_addr[u]), .dst_wr_data(ds_wr_data[u])
    );
  end

  // -------------------------------------------------- P5 von Mises sum units
  logic  vs_rd_en [16][NLVL], vs_wr_en [16][NLVL];
  addr_t vs_rd_addr [16][NLVL], vs_wr_addr [16][NLVL];
  pix_t  vs_wr_data [16][NLVL], vs_rd_data [16][NLVL];
  logic [15:0] vs_done, vs_busy;
  assign vs_busy_any = (vs_busy != '0);

  for (genvar m = 0; m < 16; m++) begin : g_vs
    for (genvar k = 0; k < NLVL; k++) begin : g_in
      assign vs_rd_data[m][k] = vm_q[k][m];
    end
    vm_sum u_vs (
      .clk, .rst_n, .start(go_vmsum), .busy(vs_busy[m]), .done(vs_done[m]),
      .rd_en(vs_rd_en[m]), .rd_addr(vs_rd_addr[m]), .rd_data(vs_rd_data[m]),
      .wr_en(vs_wr_en[m]), .wr_addr(vs_wr_addr[m]), .wr_data(vs_wr_data[m])
    );
  end

  // --------------------------------------------------------- per level
  logic [NLVL-1:0] edge_done, vmf_done, bo_done, grp_done_l;

  for (genvar k = 0; k < NLVL; k++) begin : g_lvl
    localparam int unsigned WL = LVL_W[k];
    localparam int unsigned HL = LVL_H[k];
    localparam int unsigned NP = WL * HL;

    // ---- pyramid level map
    logic  edge_rd_en;
    addr_t edge_rd_addr;
    logic  p_we;
    addr_t p_wa;
    pix_t  p_wd;
    logic  p_re [2];
    addr_t p_ra [2];
    pix_t  p_rq [2];
    if (k == 0) begin : g_src
      assign p_we    = px_we && (stage == ST_IDLE);
      assign p_wa    = px_addr;
      assign p_wd    = px_data;
      assign p_re[0] = (stage == ST_DOWN) ? ds_rd_en[0]   : edge_rd_en;
      assign p_ra[0] = (stage == ST_DOWN) ? ds_rd_addr[0] : edge_rd_addr;
      assign p_re[1] = ds_rd_en[1];
      assign p_ra[1] = ds_rd_addr[1];
    end else begin : g_sub
      assign p_we    = ds_wr_en[k-1];
      assign p_wa    = ds_wr_addr[k-1];
      assign p_wd    = ds_wr_data[k-1];
      assign p_re[0] = edge_rd_en;
      assign p_ra[0] = edge_rd_addr;
      assign p_re[1] = 1'b0;
      assign p_ra[1] = '0;
    end
    bram #(.DEPTH(NP), .WIDTH(PIX_W), .NR(2), .AW(ADDR_W)) u_pix (
      .clk, .wr_en(p_we), .wr_addr(p_wa), .wr_data(p_wd),
      .rd_en(p_re), .rd_addr(p_ra), .rd_data(p_rq)
    );
    assign pix_q[k] = p_rq;

    // ---- P3 edge and center-surround
    logic  edge_wr_en, edge_busy, edge_mac;
    addr_t edge_wr_addr;
    pix_t  edge_wr_data [6];
    edge_cs_filter #(.W(WL), .H(HL)) u_edge (
      .clk, .rst_n, .start(go_edge), .busy(edge_busy), .done(edge_done[k]),
      .mac_active(edge_mac),
      .rd_en(edge_rd_en), .rd_addr(edge_rd_addr), .rd_data(pix_q[k][0]),
      .wr_en(edge_wr_en), .wr_addr(edge_wr_addr), .wr_data(edge_wr_data)
    );

    // ---- P4 von Mises filtering
    logic  vmf_rd_en, vmf_wr_en, vmf_busy;
    addr_t vmf_rd_addr, vmf_wr_addr;
    pix_t  vmf_wr_data [16];
    vonmises_filter #(.W(WL), .H(HL)) u_vmf (
      .clk, .rst_n, .start(go_vmf), .busy(vmf_busy), .done(vmf_done[k]),
      .rd_en(vmf_rd_en), .rd_addr(vmf_rd_addr), .rd_on(e_q[k][4]), .rd_off(e_q[k][5]),
      .wr_en(vmf_wr_en), .wr_addr(vmf_wr_addr), .wr_data(vmf_wr_data)
    );

    // ---- P6 border ownership
    logic  bo_rd_en, bo_wr_en, bo_busy;
    addr_t bo_rd_addr, bo_wr_addr;
    pix_t  bo_wr_data [8];
    pix_t  bo_edge [NORI];
    for (genvar t = 0; t < NORI; t++) begin : g_be
      assign bo_edge[t] = e_q[k][t];
    end
    border_own #(.W(WL), .H(HL)) u_bo (
      .clk, .rst_n, .start(go_bo), .busy(bo_busy), .done(bo_done[k]),
      .rd_en(bo_rd_en), .rd_addr(bo_rd_addr), .rd_edge(bo_edge), .rd_vms(vm_q[k]),
      .wr_en(bo_wr_en), .wr_addr(bo_wr_addr), .wr_data(bo_wr_data)
    );

    // ---- P7 grouping
    logic  grp_rd_en, grp_wr_en, grp_busy;
    addr_t grp_rd_addr, grp_wr_addr;
    pix_t  grp_wr_data [NORI];
    grouping #(.W(WL), .H(HL)) u_grp (
      .clk, .rst_n, .start(go_grp), .busy(grp_busy), .done(grp_done_l[k]),
      .rd_en(grp_rd_en), .rd_addr(grp_rd_addr), .rd_bo(bo_q[k]), .rd_mask(mk_q[k]),
      .wr_en(grp_wr_en), .wr_addr(grp_wr_addr), .wr_data(grp_wr_data)
    );
    assign lvl_busy[k] = edge_busy | vmf_busy | bo_busy | grp_busy;
    assign lvl_mac[k]  = edge_mac;

    // ---- edge / center-surround maps
    for (genvar i = 0; i < 6; i++) begin : g_e
      logic re [1]; addr_t ra [1]; pix_t rq [1];
      assign re[0] = (i < 4) ? bo_rd_en   : vmf_rd_en;
      assign ra[0] = (i < 4) ? bo_rd_addr : vmf_rd_addr;
      bram #(.DEPTH(NP), .WIDTH(PIX_W), .NR(1), .AW(ADDR_W)) u_m (
        .clk, .wr_en(edge_wr_en), .wr_addr(edge_wr_addr), .wr_data(edge_wr_data[i]),
        .rd_en(re), .rd_addr(ra), .rd_data(rq)
      );
      assign e_q[k][i] = rq[0];
    end

    // ---- von Mises maps, rewritten in place by P5
    for (genvar m = 0; m < 16; m++) begin : g_v
      logic re [1]; addr_t ra [1]; pix_t rq [1];
      logic we; addr_t wa; pix_t wd;
      assign we    = (stage == ST_VMSUM) ? vs_wr_en[m][k]   : vmf_wr_en;
      assign wa    = (stage == ST_VMSUM) ? vs_wr_addr[m][k] : vmf_wr_addr;
      assign wd    = (stage == ST_VMSUM) ? vs_wr_data[m][k] : vmf_wr_data[m];
      assign re[0] = (stage == ST_VMSUM) ? vs_rd_en[m][k]   : bo_rd_en;
      assign ra[0] = (stage == ST_VMSUM) ? vs_rd_addr[m][k] : bo_rd_addr;
      bram #(.DEPTH(NP), .WIDTH(PIX_W), .NR(1), .AW(ADDR_W)) u_m (
        .clk, .wr_en(we), .wr_addr(wa), .wr_data(wd),
        .rd_en(re), .rd_addr(ra), .rd_data(rq)
      );
      assign vm_q[k][m] = rq[0];
    end

    // ---- border-ownership maps and masks
    for (genvar i = 0; i < 8; i++) begin : g_b
      logic re [1]; addr_t ra [1]; pix_t rq [1];
      logic host_re;
      assign host_re = rd_en && (rd_sel == RD_BO) && (rd_level == 2'(k)) && (rd_idx == 3'(i));
      assign re[0] = (stage == ST_GROUP) ? grp_rd_en   : host_re;
      assign ra[0] = (stage == ST_GROUP) ? grp_rd_addr : rd_addr;
      bram #(.DEPTH(NP), .WIDTH(PIX_W), .NR(1), .AW(ADDR_W)) u_m (
        .clk, .wr_en(bo_wr_en), .wr_addr(bo_wr_addr), .wr_data(bo_wr_data[i]),
        .rd_en(re), .rd_addr(ra), .rd_data(rq)
      );
      assign bo_q[k][i] = rq[0];

      logic mre [1]; addr_t mra [1]; logic mrq [1];
      logic mwe;
      assign mwe    = mask_we && (stage == ST_MASK) && (mask_level == 2'(k)) && (mask_idx == 3'(i));
      assign mre[0] = grp_rd_en;
      assign mra[0] = grp_rd_addr;
      bram #(.DEPTH(NP), .WIDTH(1), .NR(1), .AW(ADDR_W)) u_mask (
        .clk, .wr_en(mwe), .wr_addr(mask_addr), .wr_data(mask_data),
        .rd_en(mre), .rd_addr(mra), .rd_data(mrq)
      );
      assign mk_q[k][i] = mrq[0];
    end

    // ---- grouping maps
    for (genvar t = 0; t < NORI; t++) begin : g_g
      logic re [1]; addr_t ra [1]; pix_t rq [1];
      assign re[0] = rd_en && (rd_sel == RD_GRP) && (rd_level == 2'(k)) && (rd_idx == 3'(t));
      assign ra[0] = rd_addr;
      bram #(.DEPTH(NP), .WIDTH(PIX_W), .NR(1), .AW(ADDR_W)) u_m (
        .clk, .wr_en(grp_wr_en), .wr_addr(grp_wr_addr), .wr_data(grp_wr_data[t]),
        .rd_en(re), .rd_addr(ra), .rd_data(rq)
      );
      assign g_q[k][t] = rq[0];
    end
  end

  // ------------------------------------------------------------ done bits
  assign unit_done[0] = edge_done[0] | vmf_done[0] | bo_done[0] | grp_done_l[0] | (&vs_done);
  assign unit_done[1] = edge_done[1] | vmf_done[1] | bo_done[1] | grp_done_l[1] | ds_done[0];
  assign unit_done[2] = edge_done[2] | vmf_done[2] | bo_done[2] | grp_done_l[2] | ds_done[1];

  // ------------------------------------------------------------ read-back
  rdsel_t     rsel_q;
  logic [1:0] rlvl_q;
  logic [2:0] ridx_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsel_q <= RD_BO;
      rlvl_q <= '0;
      ridx_q <= '0;
    end else if (rd_en) begin
      rsel_q <= rd_sel;
      rlvl_q <= (rd_level < 2'(NLVL)) ? rd_level : '0;
      ridx_q <= rd_idx;
    end
  end
  assign rd_data = (rsel_q == RD_BO) ? bo_q[rlvl_q][ridx_q] : g_q[rlvl_q][ridx_q[1:0]];

endmodule
