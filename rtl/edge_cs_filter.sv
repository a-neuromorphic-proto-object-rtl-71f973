// edge_cs_filter -- complex-edge and center-surround filtering of one
// pyramid level (stage P3).
//
// A conv5x5_engine runs nine weighted sums per pixel in parallel: four even
// and four odd edge kernels (orientations 0, 45, 90, 135 degrees) and one ON
// center-surround kernel.  Then
//   complex edge  C_t = sqrt(even_t^2 + odd_t^2) >> 6   (four isqrt units)
//   ON  response       = max(cs, 0) >> 6
//   OFF response       = max(-cs, 0) >> 6   (the inverted ON response)
// each saturated to 8 bits, and the six responses are written to six maps
// at the pixel's address in one cycle (wr_data[0..3] = C_0..C_135,
// wr_data[4] = ON, wr_data[5] = OFF).  These steps and their order are the
// design's; the kernel values, the shift by 6 and the half-wave
// rectification of ON and OFF are this design's choices.
// Timing per pixel: 26 load + 75 MAC + 1 + 16 square-root + 1 + 1 write cycles,
// 120 cycles (the engine holds its sums one cycle
// longer while the roots are started), so 9408 * 120 = 1.13 M cycles for the 112x84 level.
module edge_cs_filter
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
  output logic  mac_active,
  output logic  rd_en,
  output addr_t rd_addr,
  input  pix_t  rd_data,
  output logic  wr_en,
  output addr_t wr_addr,
  output pix_t  wr_data [6]
);

  localparam int unsigned NK = 9;
  localparam int unsigned RW = 16;      // root width

  logic signed [15:0] in_d [1];
  coef_t              coef [NK];
  logic [4:0]         tap;
  logic               ovalid, oready;
  addr_t              oaddr;
  acc_t               oacc [NK];

  assign in_d[0] = 16'(rd_data);        // unsigned pixel, zero extended

  for (genvar k = 0; k < NK; k++) begin : g_coef
    assign coef[k] = FILT_K[k][tap];
  end

  conv5x5_engine #(.W(W), .H(H), .N_IN(1), .N_OUT(NK), .IN_W(16)) u_eng (
    .clk, .rst_n, .start, .busy, .done,
    .rd_en, .rd_addr, .rd_data(in_d),
    .tap, .coef,
    .mac_active,
    .out_valid(ovalid), .out_ready(oready), .out_addr(oaddr), .out_acc(oacc)
  );

  typedef enum logic [1:0] { P_WAIT, P_SQRT, P_WRITE } ph_e;
  ph_e ph;

  logic [2*RW-1:0] rad  [NORI];
  logic [RW-1:0]   root [NORI];
  logic            sq_start;
  logic [NORI-1:0] sq_done, sq_busy;
  pix_t            on_q, off_q;

  // even_t^2 + odd_t^2 for the offered sums (the engine holds them)
  for (genvar t = 0; t < NORI; t++) begin : g_sq
    logic signed [31:0] e, o;
    assign e = oacc[t];
    assign o = oacc[t + 4];
    assign rad[t] = 32'(e * e) + 32'(o * o);
    isqrt #(.N(RW)) u_sqrt (
      .clk, .rst_n, .start(sq_start), .radicand(rad[t]),
      .busy(sq_busy[t]), .done(sq_done[t]), .root(root[t])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph    <= P_WAIT;
      on_q  <= '0;
      off_q <= '0;
    end else begin
      unique case (ph)
        P_WAIT: if (ovalid) begin
          on_q  <= sat8(oacc[8] >>> KSHIFT);
          off_q <= sat8((-oacc[8]) >>> KSHIFT);
          ph    <= P_SQRT;
        end
        P_SQRT:  if (&sq_done) ph <= P_WRITE;
        P_WRITE: ph <= P_WAIT;
        default: ph <= P_WAIT;
      endcase
      // the square-root units only run while the engine is held
      assert (ph == P_SQRT || sq_busy == '0)
        else $error("edge_cs_filter: square root busy outside P_SQRT");
    end
  end

  assign sq_start = (ph == P_WAIT) && ovalid;
  assign oready   = (ph == P_WRITE);
  assign wr_en    = (ph == P_WRITE);
  assign wr_addr  = oaddr;

  for (genvar t = 0; t < NORI; t++) begin : g_wr
    assign wr_data[t] = sat8(ACC_W'(root[t] >> KSHIFT));
  end
  assign wr_data[4] = on_q;
  assign wr_data[5] = off_q;

endmodule
