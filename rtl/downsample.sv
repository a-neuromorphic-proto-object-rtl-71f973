// downsample -- builds one smaller pyramid level from the input map by
// nearest-neighbour subsampling.
//
// For each destination pixel (x, y) the source pixel is
//   xs = (x * RX) >> 8,  ys = (y * RY) >> 8,  RX = floor(256*SRC_W/DST_W)
// so the scale is a multiplication by a constant followed by a shift, as the
// design prescribes ("approximated using bit-shifting for multiplications and
// divisions").  Each pixel takes exactly 5 clock cycles, the count the design
// gives: (1) scale x and y, (2) form the linear source address, (3) issue the
// read, (4) take the data, (5) write it to the destination map.  A level of
// DST_W*DST_H pixels therefore takes 5*DST_W*DST_H cycles after start
// (24 000 for 80x60).  Two instances run side by side for the two extra
// levels, so the larger one sets the stage time.
// Interface: pulse start; the source map is read through src_rd_*, the result
// written through dst_wr_*; done pulses for one cycle after the last write.
module downsample
  import podvs_pkg::*;
#(
  parameter int unsigned SRC_W = 112,
  parameter int unsigned SRC_H = 84,
  parameter int unsigned DST_W = 80,
  parameter int unsigned DST_H = 60
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  output logic  busy,
  output logic  done,
  output logic  src_rd_en,
  output addr_t src_rd_addr,
  input  pix_t  src_rd_data,
  output logic  dst_wr_en,
  output addr_t dst_wr_addr,
  output pix_t  dst_wr_data
);

  localparam int unsigned RX = scale_ratio(SRC_W, DST_W);
  localparam int unsigned RY = scale_ratio(SRC_H, DST_H);

  typedef enum logic [2:0] { S_IDLE, S_SCALE, S_ADDR, S_READ, S_WAIT, S_WRITE } st_e;
  st_e st;

  logic [7:0]  x, y;          // destination coordinate
  logic [7:0]  xs, ys;        // source coordinate
  addr_t       dst_addr;
  pix_t        data_q;

  logic [7:0]  xm, ym;        // integer part of x*RX/256, y*RY/256
  assign xm = 8'((16'(x) * 16'(RX)) >> 8);
  assign ym = 8'((16'(y) * 16'(RY)) >> 8);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= S_IDLE;
      x           <= '0;
      y           <= '0;
      xs          <= '0;
      ys          <= '0;
      dst_addr    <= '0;
      data_q      <= '0;
      src_rd_addr <= '0;
      done        <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          x <= '0; y <= '0; dst_addr <= '0;
          st <= S_SCALE;
        end
        S_SCALE: begin
          xs <= xm;
          ys <= ym;
          st <= S_ADDR;
        end
        S_ADDR: begin
          src_rd_addr <= addr_t'(32'(ys) * SRC_W + 32'(xs));
          st <= S_READ;
        end
        S_READ: st <= S_WAIT;            // read issued this cycle
        S_WAIT: begin
          data_q <= src_rd_data;
          st <= S_WRITE;
        end
        S_WRITE: begin                   // write issued this cycle
          dst_addr <= dst_addr + 1'b1;
          if (32'(x) == DST_W - 1) begin
            x <= '0;
            if (32'(y) == DST_H - 1) begin
              st   <= S_IDLE;
              done <= 1'b1;
            end else begin
              y  <= y + 1'b1;
              st <= S_SCALE;
            end
          end else begin
            x  <= x + 1'b1;
            st <= S_SCALE;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assign busy        = (st != S_IDLE);
  assign src_rd_en   = (st == S_READ);
  assign dst_wr_en   = (st == S_WRITE);
  assign dst_wr_addr = dst_addr;
  assign dst_wr_data = data_q;

endmodule
