// vonmises_filter -- von Mises filtering of the ON and OFF center-surround
// maps of one pyramid level (stage P4).
//
// Sixteen weighted sums per pixel run in parallel on one conv5x5_engine:
// 4 orientations x 2 sides (left, right of the oriented border) x 2
// center-surround polarities (ON for light objects, OFF for dark ones).  The
// von Mises kernel of a side points away from the border, so its response
// tells how much figure-coding center-surround activity lies on that side.
// Output lane / map m = vm_idx(pol, side, ori) = pol*8 + side*4 + ori; the
// response is (sum >> 6) saturated to 8 bits and all sixteen maps are
// written at the pixel's address in one cycle.
// The 16 parallel operations and their 16 result maps are the design's; the
// kernel values (see podvs_pkg) are this design's own.
// Timing: 26 load + 75 MAC + 1 write cycles per pixel (102), 0.96 M cycles
// for the 112x84 level.
module vonmises_filter
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
  input  pix_t  rd_on,
  input  pix_t  rd_off,
  output logic  wr_en,
  output addr_t wr_addr,
  output pix_t  wr_data [16]
);

  logic signed [15:0] in_d [2];
  coef_t              coef [16];
  logic [4:0]         tap;
  logic               ovalid;
  acc_t               oacc [16];
  logic               mac_unused;

  assign in_d[0] = 16'(rd_on);
  assign in_d[1] = 16'(rd_off);

  // lanes 0..7 read the ON map, 8..15 the OFF map; lane o uses kernel o%8,
  // which is left 0..135 then right 0..135 in VM_K
  for (genvar o = 0; o < 16; o++) begin : g_coef
    assign coef[o] = VM_K[o % 8][tap];
    assign wr_data[o] = sat8(oacc[o] >>> KSHIFT);
  end

  conv5x5_engine #(.W(W), .H(H), .N_IN(2), .N_OUT(16), .IN_W(16)) u_eng (
    .clk, .rst_n, .start, .busy, .done,
    .rd_en, .rd_addr, .rd_data(in_d),
    .tap, .coef,
    .mac_active(mac_unused),
    .out_valid(ovalid), .out_ready(1'b1), .out_addr(wr_addr), .out_acc(oacc)
  );

  assign wr_en = ovalid;

endmodule
