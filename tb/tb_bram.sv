// tb_bram -- checks the block RAM: writes random words, reads them back on
// both read ports with one cycle of latency, read-during-write returns the
// old word, and the output holds while rd_en is low.
module tb_bram;
  localparam int unsigned DEPTH = 300, WIDTH = 8;
  logic clk = 0;
  logic wr_en = 0;
  logic [13:0] wr_addr = '0;
  logic [WIDTH-1:0] wr_data = '0;
  logic rd_en [2];
  logic [13:0] rd_addr [2];
  logic [WIDTH-1:0] rd_data [2];
  int checks = 0, failures = 0;
  int model [DEPTH];

  bram #(.DEPTH(DEPTH), .WIDTH(WIDTH), .NR(2), .AW(14)) dut (.*);
  always #5 clk = ~clk;

  task automatic expect_eq(int got, int exp, string what);
    checks++;
    if (got != exp) begin failures++; $display("%s: %0d expected %0d", what, got, exp); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rd_en = '{0, 0}; rd_addr = '{0, 0};
    @(negedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      wr_en = 1; wr_addr = 14'(a); wr_data = WIDTH'($urandom); model[a] = int'(wr_data);
      @(negedge clk);
    end
    wr_en = 0;
    for (int i = 0; i < 600; i++) begin
      int a0 = $urandom % DEPTH, a1 = $urandom % DEPTH;
      rd_en = '{1, 1}; rd_addr[0] = 14'(a0); rd_addr[1] = 14'(a1);
      @(negedge clk);
      expect_eq(int'(rd_data[0]), model[a0], "port 0");
      expect_eq(int'(rd_data[1]), model[a1], "port 1");
    end
    // read during write returns the old word
    rd_en = '{1, 0}; rd_addr[0] = 14'(5);
    wr_en = 1; wr_addr = 14'(5); wr_data = WIDTH'(model[5] + 1);
    @(negedge clk);
    expect_eq(int'(rd_data[0]), model[5], "read during write");
    model[5] = (model[5] + 1) & 255;
    wr_en = 0; rd_en = '{1, 0};
    @(negedge clk);
    expect_eq(int'(rd_data[0]), model[5], "after write");
    // hold while rd_en low
    rd_en = '{0, 0}; rd_addr[0] = 14'(6);
    repeat (3) @(negedge clk);
    expect_eq(int'(rd_data[0]), model[5], "hold");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
