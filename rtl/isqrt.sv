// isqrt -- sequential integer square root, root = floor(sqrt(radicand)).
//
// Digit-by-digit (restoring) method, one result bit per clock: a 2N-bit
// radicand gives an N-bit root N cycles after start.  done pulses in the
// cycle the root appears on `root`, which then holds until the next start.
// The design uses a vendor square-root core for the complex edge response;
// this module stands in for it with the simplest sequential circuit that
// computes the same function.  Its latency is this design's own.
// Lint note: the top two bits of `part` are never read.  The remainder is at
// most 2q, which fits in N+1 bits, but `part` keeps the N+4-bit width of the
// trial subtraction so that the two operands and the result match without
// casts; the unused flops are removed by synthesis.
module isqrt #(
  parameter int unsigned N = 16
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [2*N-1:0] radicand,
  output logic           busy,
  output logic           done,
  output logic [N-1:0]   root
);

  logic [2*N-1:0] rem_q;       // radicand bits not yet consumed
  logic [N+3:0]   part;        // partial remainder
  logic [N-1:0]   q;           // partial root
  logic [$clog2(N+1)-1:0] cnt;

  logic [N+3:0] trial;
  logic [N+3:0] shifted;
  assign shifted = {part[N+1:0], rem_q[2*N-1 -: 2]};
  assign trial   = shifted - (N+4)'({q, 2'b01});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem_q <= '0;
      part  <= '0;
      q     <= '0;
      cnt   <= '0;
      busy  <= 1'b0;
      done  <= 1'b0;
      root  <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        rem_q <= radicand;
        part  <= '0;
        q     <= '0;
        cnt   <= '0;
        busy  <= 1'b1;
      end else if (busy) begin
        rem_q <= {rem_q[2*N-3:0], 2'b00};
        if (!trial[N+3]) begin
          part <= trial;
          q    <= {q[N-2:0], 1'b1};
        end else begin
          part <= shifted;
          q    <= {q[N-2:0], 1'b0};
        end
        cnt <= cnt + 1'b1;
        if (32'(cnt) == N - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
          root <= !trial[N+3] ? {q[N-2:0], 1'b1} : {q[N-2:0], 1'b0};
        end
      end
    end
  end

endmodule
