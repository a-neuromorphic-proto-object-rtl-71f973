// stage_sequencer -- runs the processing stages of one channel in order.
//
// start (from the host, after it has loaded the input map) launches
// P2 pyramid -> P3 edge/center-surround -> P4 von Mises filtering ->
// P5 von Mises sum -> P6 border ownership, after which the sequencer waits in
// ST_MASK: the host reads the border-ownership maps, computes the masks and
// writes them back, then pulses grp_start to run P7 grouping.  When grouping
// ends the sequencer returns to ST_IDLE and pulses grp_done.
// Each stage is started with a one-cycle pulse on stage_start (one cycle
// after the stage is entered) and is finished when every unit listed for it
// has pulsed its bit of unit_done: bits 1..2 (the two downsamplers) for P2,
// bit 0 (the sixteen lock-step von Mises sum units) for P5, bits 0..2 (one
// unit per pyramid level) for the other stages.  The stage order is the
// design's; the handshake and encodings are this design's choices.
module stage_sequencer
  import podvs_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic         grp_start,
  input  logic [2:0]   unit_done,
  output stage_t       stage,
  output logic         stage_start,
  output logic         bo_ready,
  output logic         grp_done
);

  logic [2:0] seen;
  logic       launch;

  function automatic logic [2:0] need(stage_t s);
    unique case (s)
      ST_DOWN:  return 3'b110;
      ST_VMSUM: return 3'b001;
      default:  return 3'b111;
    endcase
  endfunction

  function automatic stage_t next_of(stage_t s);
    unique case (s)
      ST_DOWN:  return ST_EDGE;
      ST_EDGE:  return ST_VMF;
      ST_VMF:   return ST_VMSUM;
      ST_VMSUM: return ST_BO;
      ST_BO:    return ST_MASK;
      default:  return ST_IDLE;
    endcase
  endfunction

  logic [2:0] seen_n;
  assign seen_n = seen | unit_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stage    <= ST_IDLE;
      seen     <= '0;
      launch   <= 1'b0;
      grp_done <= 1'b0;
    end else begin
      launch   <= 1'b0;
      grp_done <= 1'b0;
      unique case (stage)
        ST_IDLE: if (start) begin
          stage <= ST_DOWN; seen <= '0; launch <= 1'b1;
        end
        ST_MASK: if (grp_start) begin
          stage <= ST_GROUP; seen <= '0; launch <= 1'b1;
        end
        default: begin
          if ((seen_n & need(stage)) == need(stage)) begin
            seen <= '0;
            if (stage == ST_GROUP) begin
              stage    <= ST_IDLE;
              grp_done <= 1'b1;
            end else begin
              stage  <= next_of(stage);
              launch <= (next_of(stage) != ST_MASK);
            end
          end else begin
            seen <= seen_n;
          end
        end
      endcase
    end
  end

  assign stage_start = launch;
  assign bo_ready    = (stage == ST_MASK);

endmodule
