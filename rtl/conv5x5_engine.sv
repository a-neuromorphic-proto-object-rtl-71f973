// conv5x5_engine -- raster-scan 5x5 weighted-sum engine with one
// multiply-accumulate unit per kernel.
//
// For every pixel of a W x H map, in raster order, the engine
//   1. loads the 5x5 patch centred on the pixel (25 reads, one per cycle, all
//      N_IN input maps read at the same address; taps outside the map are
//      taken as zero), then
//   2. computes N_OUT weighted sums  sum_t K_o[t] * P_i(o)[t]  in parallel.
//      Each lane is a single MAC that takes 3 clock cycles per tap (operand
//      select, multiply, accumulate), so the 25 taps take 75 cycles, the
//      figure the design gives for its weighted sums.
// Lane o reads input i(o) = (o * N_IN) / N_OUT, which covers the three users:
// one input for nine lanes (edge/center-surround), two inputs for sixteen
// lanes (von Mises on ON and OFF maps) and one input per lane (grouping).
// The kernel tap index of the current MAC step is output on `tap`; the user
// returns the N_OUT coefficients of that tap on `coef` in the same cycle.
// When the sums are ready the engine raises out_valid with the pixel's
// address and holds them until out_ready; then it moves to the next pixel.
// A pixel costs 26 load cycles, 75 MAC cycles and at least one output cycle.
// The MAC sequence and its timing follow the design; the patch loader, the
// zero padding and the handshake are this design's choices.
module conv5x5_engine
  import podvs_pkg::*;
#(
  parameter int unsigned W     = 112,
  parameter int unsigned H     = 84,
  parameter int unsigned N_IN  = 1,
  parameter int unsigned N_OUT = 9,
  parameter int unsigned IN_W  = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  output logic                   busy,
  output logic                   done,
  // input maps, read latency one cycle
  output logic                   rd_en,
  output addr_t                  rd_addr,
  input  logic signed [IN_W-1:0] rd_data [N_IN],
  // kernel coefficients of tap `tap`
  output logic [4:0]             tap,
  input  coef_t                  coef    [N_OUT],
  // results
  output logic                   mac_active,
  output logic                   out_valid,
  input  logic                   out_ready,
  output addr_t                  out_addr,
  output acc_t                   out_acc [N_OUT]
);

  typedef enum logic [2:0] { S_IDLE, S_LOAD, S_LWAIT, S_MAC, S_OUT } st_e;
  st_e st;

  logic [7:0]  x, y;              // centre pixel
  addr_t       pix_addr;
  logic [4:0]  ld_tap;            // tap being requested
  logic [2:0]  ld_r, ld_c;        // its row / column in the patch
  logic [4:0]  cap_tap;           // tap whose data arrives this cycle
  logic        cap_pad;           // it was outside the map
  logic        cap_vld;
  logic [4:0]  m_tap;             // MAC tap
  logic [1:0]  m_ph;              // MAC phase 0..2

  logic signed [IN_W-1:0] patch [N_IN][NTAP];
  logic signed [IN_W-1:0] op_a  [N_OUT];
  coef_t                  op_b  [N_OUT];
  acc_t                   prod  [N_OUT];
  acc_t                   acc   [N_OUT];

  // requested tap position in the map
  logic signed [9:0] py, px;
  logic              in_map;
  assign py     = $signed({2'b0, y}) + $signed({7'b0, ld_r}) - 10'sd2;
  assign px     = $signed({2'b0, x}) + $signed({7'b0, ld_c}) - 10'sd2;
  assign in_map = (py >= 0) && (px >= 0) && (py < $signed(10'(H))) && (px < $signed(10'(W)));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= S_IDLE;
      x        <= '0;
      y        <= '0;
      pix_addr <= '0;
      ld_tap   <= '0;
      ld_r     <= '0;
      ld_c     <= '0;
      cap_tap  <= '0;
      cap_pad  <= 1'b0;
      cap_vld  <= 1'b0;
      m_tap    <= '0;
      m_ph     <= '0;
      done     <= 1'b0;
    end else begin
      done    <= 1'b0;
      cap_vld <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          x <= '0; y <= '0; pix_addr <= '0;
          ld_tap <= '0; ld_r <= '0; ld_c <= '0;
          st <= S_LOAD;
        end
        S_LOAD: begin
          cap_tap <= ld_tap;
          cap_pad <= !in_map;
          cap_vld <= 1'b1;
          ld_tap  <= ld_tap + 1'b1;
          if (ld_c == 3'd4) begin
            ld_c <= '0;
            ld_r <= ld_r + 1'b1;
          end else begin
            ld_c <= ld_c + 1'b1;
          end
          if (ld_tap == 5'(NTAP - 1)) st <= S_LWAIT;
        end
        S_LWAIT: begin
          m_tap <= '0;
          m_ph  <= '0;
          st    <= S_MAC;
        end
        S_MAC: begin
          if (m_ph == 2'd2) begin
            m_ph <= '0;
            if (m_tap == 5'(NTAP - 1)) st <= S_OUT;
            else m_tap <= m_tap + 1'b1;
          end else begin
            m_ph <= m_ph + 1'b1;
          end
        end
        S_OUT: if (out_ready) begin
          ld_tap <= '0; ld_r <= '0; ld_c <= '0;
          pix_addr <= pix_addr + 1'b1;
          if (32'(x) == W - 1) begin
            x <= '0;
            if (32'(y) == H - 1) begin
              st   <= S_IDLE;
              done <= 1'b1;
            end else begin
              y  <= y + 1'b1;
              st <= S_LOAD;
            end
          end else begin
            x  <= x + 1'b1;
            st <= S_LOAD;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // patch capture: data of the read issued last cycle
  always_ff @(posedge clk) begin
    if (cap_vld) begin
      for (int i = 0; i < N_IN; i++)
        patch[i][cap_tap] <= cap_pad ? '0 : rd_data[i];
    end
  end

  // MAC lanes: phase 0 operand select, phase 1 multiply, phase 2 accumulate
  for (genvar o = 0; o < N_OUT; o++) begin : g_lane
    localparam int unsigned IN_SEL = (o * N_IN) / N_OUT;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        op_a[o] <= '0;
        op_b[o] <= '0;
        prod[o] <= '0;
        acc[o]  <= '0;
      end else if (st == S_LWAIT) begin
        acc[o] <= '0;
      end else if (st == S_MAC) begin
        unique case (m_ph)
          2'd0: begin
            op_a[o] <= patch[IN_SEL][m_tap];
            op_b[o] <= coef[o];
          end
          2'd1: prod[o] <= ACC_W'(op_a[o]) * ACC_W'(op_b[o]);
          2'd2: acc[o]  <= acc[o] + prod[o];
          default: ;
        endcase
      end
    end
    assign out_acc[o] = acc[o];
  end

  assign busy       = (st != S_IDLE);
  assign rd_en      = (st == S_LOAD);
  assign rd_addr    = in_map ? addr_t'(32'(py) * W + 32'(px)) : '0;
  assign tap        = m_tap;
  assign mac_active = (st == S_MAC);
  assign out_valid  = (st == S_OUT);
  assign out_addr   = pix_addr;

  // the sums must not change while they are offered
  logic  hold_q;
  addr_t hold_addr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold_q    <= 1'b0;
      hold_addr <= '0;
    end else begin
      if (hold_q)
        assert (out_valid && out_addr == hold_addr)
          else $error("conv5x5_engine: offered sums dropped or changed");
      hold_q    <= out_valid && !out_ready;
      hold_addr <= out_addr;
    end
  end

endmodule
