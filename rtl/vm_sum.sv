// vm_sum -- sums one von Mises map across the pyramid levels, in place
// (stage P5).  Sixteen of these run in parallel, one per von Mises map.
//
// For every level j (top first) and every pixel (x, y) of that level
//   S_j(x, y) = sum over k = j .. NLVL-1 of  V_k(xk, yk) >> k
// where (xk, yk) is the nearest-neighbour position of (x, y) in level k
// (x * floor(256*W_k/W_j) >> 8, likewise for y) and >> k is the factor
// 2^-k.  The sum, saturated to 8 bits, is written back over V_j: once level
// j is done its original values are no longer needed, since only levels
// above it read it, and they are processed first.
// Cycle budget per term, as the design gives it: 3 cycles to scale the
// position, 1 to read the lower level, 1 to apply the factor, 1 to
// accumulate; then 1 cycle to store.  A pixel of level j costs
// 6*(NLVL-j)+1 cycles, which for 112x84 / 80x60 / 56x44 is
// 241 728 term cycles (the design's "~241K CC") plus 16 672 store cycles.
// The interpretation of the level range and of the 2^-k factor is this
// design's reading of the source's step list (see the block notes).
module vm_sum
  import podvs_pkg::*;
#(
  parameter int unsigned W0 = LVL_W[0],
  parameter int unsigned H0 = LVL_H[0],
  parameter int unsigned W1 = LVL_W[1],
  parameter int unsigned H1 = LVL_H[1],
  parameter int unsigned W2 = LVL_W[2],
  parameter int unsigned H2 = LVL_H[2]
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  output logic  busy,
  output logic  done,
  output logic  rd_en   [NLVL],
  output addr_t rd_addr [NLVL],
  input  pix_t  rd_data [NLVL],
  output logic  wr_en   [NLVL],
  output addr_t wr_addr [NLVL],
  output pix_t  wr_data [NLVL]
);

  localparam int unsigned WV [NLVL] = '{W0, W1, W2};
  localparam int unsigned HV [NLVL] = '{H0, H1, H2};

  typedef enum logic [3:0] {
    S_IDLE, S_SC0, S_SC1, S_SC2, S_READ, S_SCALE, S_ACC, S_STORE
  } st_e;
  st_e st;

  logic [1:0]  j, k;             // target level, level being read
  logic [7:0]  x, y;
  addr_t       pix_addr;
  logic [15:0] rx, ry;           // ratios for j -> k
  logic [7:0]  xm, ym;           // scaled coordinate on level k
  addr_t       k_addr;
  logic [9:0]  term;
  logic [11:0] acc;

  // level-to-level ratio table, selected by (j, k)
  function automatic logic [15:0] ratio_w(logic [1:0] jj, logic [1:0] kk);
    return 16'(scale_ratio(WV[kk], WV[jj]));
  endfunction
  function automatic logic [15:0] ratio_h(logic [1:0] jj, logic [1:0] kk);
    return 16'(scale_ratio(HV[kk], HV[jj]));
  endfunction
  function automatic logic [7:0] w_of(logic [1:0] kk);
    return 8'(WV[kk]);
  endfunction
  function automatic logic [7:0] h_of(logic [1:0] kk);
    return 8'(HV[kk]);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE;
      j <= '0; k <= '0; x <= '0; y <= '0; pix_addr <= '0;
      rx <= '0; ry <= '0; xm <= '0; ym <= '0;
      k_addr <= '0; term <= '0; acc <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          j <= '0; k <= '0; x <= '0; y <= '0; pix_addr <= '0; acc <= '0;
          st <= S_SC0;
        end
        // 3 cycles: pick the ratio, multiply, form the address in level k
        S_SC0: begin
          rx <= ratio_w(j, k);
          ry <= ratio_h(j, k);
          st <= S_SC1;
        end
        S_SC1: begin
          xm <= 8'((16'(x) * rx) >> 8);
          ym <= 8'((16'(y) * ry) >> 8);
          st <= S_SC2;
        end
        S_SC2: begin


          k_addr <= addr_t'(16'(ym) * 16'(w_of(k)) + 16'(xm));
          st <= S_READ;
        end
        S_READ:  st <= S_SCALE;                        // read issued
        S_SCALE: begin
          term <= 10'(rd_data[k] >> k);               // factor 2^-k
          st   <= S_ACC;
        end
        S_ACC: begin
          acc <= acc + 12'(term);
          if (k == 2'(NLVL - 1)) st <= S_STORE;
          else begin
            k  <= k + 1'b1;
            st <= S_SC0;
          end
        end
        S_STORE: begin                                // write issued
          acc      <= '0;
          k        <= j;
          pix_addr <= pix_addr + 1'b1;
          st       <= S_SC0;
          if (x == w_of(j) - 8'd1) begin
            x <= '0;
            if (y == h_of(j) - 8'd1) begin
              y <= '0;
              pix_addr <= '0;
              if (j == 2'(NLVL - 1)) begin
                st   <= S_IDLE;
                done <= 1'b1;
              end else begin
                j <= j + 1'b1;
                k <= j + 1'b1;
              end
            end else y <= y + 1'b1;
          end else x <= x + 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  for (genvar l = 0; l < NLVL; l++) begin : g_port
    assign rd_en[l]   = (st == S_READ) && (k == 2'(l));
    assign rd_addr[l] = k_addr;
    assign wr_en[l]   = (st == S_STORE) && (j == 2'(l));
    assign wr_addr[l] = pix_addr;
    assign wr_data[l] = (acc > 12'd255) ? 8'd255 : acc[7:0];
  end

  assign busy = (st != S_IDLE);

endmodule
