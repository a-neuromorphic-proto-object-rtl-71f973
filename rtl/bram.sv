// bram -- one on-chip block RAM holding a map of DEPTH words.
//
// One synchronous write port and NR synchronous read ports.  A read issued
// with rd_en in cycle n returns its word on rd_data in cycle n+1; the output
// holds its value while rd_en is low.  A write and a read of the same address
// in one cycle return the old word.  Several read ports are what an FPGA tool
// builds by replicating the block; the pipeline needs two only on the input
// map, which the two pyramid downsamplers read at the same time.
// The memory has no reset: every stage writes a whole map before the next
// stage reads it.  The per-map BRAMs follow the block diagram of the design;
// the port arrangement is this design's choice.
module bram #(
  parameter int unsigned DEPTH = 9408,
  parameter int unsigned WIDTH = 8,
  parameter int unsigned NR    = 1,
  parameter int unsigned AW    = 14
) (
  input  logic             clk,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en   [NR],
  input  logic [AW-1:0]    rd_addr [NR],
  output logic [WIDTH-1:0] rd_data [NR]
);

  localparam int unsigned IW = (DEPTH > 1) ? $clog2(DEPTH) : 1;  // index width

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en && 32'(wr_addr) < DEPTH) mem[IW'(wr_addr)] <= wr_data;
  end

  for (genvar p = 0; p < NR; p++) begin : g_rd
    always_ff @(posedge clk) begin
      if (rd_en[p]) rd_data[p] <= (32'(rd_addr[p]) < DEPTH) ? mem[IW'(rd_addr[p])] : '0;
    end
  end

  always @(posedge clk) begin
    assert (!wr_en || 32'(wr_addr) < DEPTH)
      else $error("bram: write address %0d out of range %0d", wr_addr, DEPTH);
  end

endmodule
