// border_own -- left and right border-ownership responses of one pyramid
// level for the four orientations (stage P6).
//
// Eight lanes, one per (side, orientation), as the design's eight border
// ownership operations per level.  For lane (s, t) and polarity p (light =
// ON, dark = OFF):
//   B_p,s[t] = (C_t * max(0, S_p,s[t] - S_p,s'[t])) >> 8
//   B_s[t]   = sat8(B_light,s[t] + B_dark,s[t])
// where C_t is the complex edge response, S the von Mises sums of stage P5,
// s the lane's side and s' the opposite one.  Figure-coding activity on the
// preferred side excites, activity on the non-preferred side inhibits, and
// the result only appears where there is an edge.  The light + dark sum is
// the design's (polarity invariance); the form of B_p,s and the shift by 8
// are this design's choices, since the source defers that formula to its
// reference.  Output lane l = s*4 + t (0..3 left, 4..7 right).
// Timing: the eight lanes share one sequencer and take 6 cycles per pixel
// (issue read, take data, differences, products, sum, write): 56 448 cycles
// for the 112x84 level, the design's "~56K CC".
module border_own
  import podvs_pkg::*;
#(
  parameter int unsigned W = 112,
  parameter int unsigned H = 84
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  output logic  busy,
  output logic  done,
  output logic  rd_en,
  output addr_t rd_addr,
  input  pix_t  rd_edge [NORI],     // C_t
  input  pix_t  rd_vms  [16],       // S, indexed by vm_idx(pol, side, ori)
  output logic  wr_en,
  output addr_t wr_addr,
  output pix_t  wr_data [8]
);

  localparam int unsigned NPIX = W * H;

  typedef enum logic [2:0] { S_IDLE, S_RD, S_CAP, S_DIFF, S_MUL, S_SUM, S_WR } st_e;
  st_e st;

  addr_t addr;
  pix_t  c_q  [NORI];
  pix_t  s_q  [16];
  logic [8:0]  d_q [2][8];     // rectified differences per polarity, lane
  logic [16:0] p_q [2][8];     // products
  pix_t  b_q  [8];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= S_IDLE;
      addr <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin addr <= '0; st <= S_RD; end
        S_RD:   st <= S_CAP;
        S_CAP:  st <= S_DIFF;
        S_DIFF: st <= S_MUL;
        S_MUL:  st <= S_SUM;
        S_SUM:  st <= S_WR;
        S_WR: begin
          if (32'(addr) == NPIX - 1) begin
            st   <= S_IDLE;
            done <= 1'b1;
          end else begin
            addr <= addr + 1'b1;
            st   <= S_RD;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (st == S_CAP) begin
      c_q <= rd_edge;
      s_q <= rd_vms;
    end
  end

  for (genvar l = 0; l < 8; l++) begin : g_lane
    localparam int unsigned SIDE = l / 4;
    localparam int unsigned ORI  = l % 4;
    for (genvar p = 0; p < 2; p++) begin : g_pol
      localparam int unsigned PREF = p * 8 + SIDE * 4 + ORI;
      localparam int unsigned OPP  = p * 8 + (1 - SIDE) * 4 + ORI;
      always_ff @(posedge clk) begin
        if (st == S_DIFF)
          d_q[p][l] <= (s_q[PREF] > s_q[OPP]) ? 9'(s_q[PREF] - s_q[OPP]) : '0;
        if (st == S_MUL)
          p_q[p][l] <= 17'(c_q[ORI] * d_q[p][l]);
      end
    end
    always_ff @(posedge clk) begin
      if (st == S_SUM)
        b_q[l] <= sat8(ACC_W'(p_q[0][l] >> 8) + ACC_W'(p_q[1][l] >> 8));
    end
    assign wr_data[l] = b_q[l];
  end

  assign busy    = (st != S_IDLE);
  assign rd_en   = (st == S_RD);
  assign rd_addr = addr;
  assign wr_en   = (st == S_WR);
  assign wr_addr = addr;

endmodule
