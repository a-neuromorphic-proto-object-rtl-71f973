// grouping -- grouping activity of one pyramid level for the four
// orientations (stage P7).
//
// With the binary border-ownership masks ML_t, MR_t that the host computes
// from the stage-P6 output, the design's grouping equations are
//   GrpLeft_t  = conv(ML_t .* (B_L[t] - wp*B_R[t]), v_t)
//   GrpRight_t = conv(MR_t .* (B_R[t] - wp*B_L[t]), v_{t+pi})
//   GrpSum_t   = GrpLeft_t + GrpRight_t
// with wp = 1 and v the left / right von Mises kernels.  A conv5x5_engine
// with eight inputs (the masked differences, formed on the fly from the BO
// and mask maps as the patch is read) and eight lanes computes both terms
// for all four orientations at once; GrpSum_t is (sum >> 6), clipped to
// 0..255, and the four maps are written at the pixel's address in one
// cycle.  The equations and wp = 1 are the design's; reading "*" as a 5x5
// convolution with the von Mises kernel and clipping negative activity to 0
// are this design's choices.
// Timing: 26 load + 75 MAC + 1 write cycles per pixel.
module grouping
  import podvs_pkg::*;
#(
  parameter int unsigned W  = 112,
  parameter int unsigned H  = 84,
  parameter int          WP = 1        // inhibition weight w_p
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  output logic  busy,
  output logic  done,
  output logic  rd_en,
  output addr_t rd_addr,
  input  pix_t  rd_bo   [8],      // B_L[0..3], B_R[0..3]
  input  logic  rd_mask [8],      // ML[0..3],  MR[0..3]
  output logic  wr_en,
  output addr_t wr_addr,
  output pix_t  wr_data [NORI]
);

  logic signed [15:0] in_d [8];
  coef_t              coef [8];
  logic [4:0]         tap;
  logic               ovalid;
  acc_t               oacc [8];
  logic               mac_unused;

  for (genvar i = 0; i < 8; i++) begin : g_in
    localparam int unsigned ORI  = i % 4;
    localparam int unsigned SELF = i;                     // own side
    localparam int unsigned OTH  = (i < 4) ? i + 4 : i - 4;
    logic signed [15:0] diff;
    assign diff    = $signed(16'(rd_bo[SELF])) - 16'(WP) * $signed(16'(rd_bo[OTH]));
    assign in_d[i] = rd_mask[i] ? diff : '0;
    assign coef[i] = VM_K[i][tap];                        // left t, right t
    if (i < 4) begin : g_out
      assign wr_data[ORI] = sat8((oacc[i] + oacc[i + 4]) >>> KSHIFT);
    end
  end

  conv5x5_engine #(.W(W), .H(H), .N_IN(8), .N_OUT(8), .IN_W(16)) u_eng (
    .clk, .rst_n, .start, .busy, .done,
    .rd_en, .rd_addr, .rd_data(in_d),
    .tap, .coef,
    .mac_active(mac_unused),
    .out_valid(ovalid), .out_ready(1'b1), .out_addr(wr_addr), .out_acc(oacc)
  );

  assign wr_en = ovalid;

endmodule
