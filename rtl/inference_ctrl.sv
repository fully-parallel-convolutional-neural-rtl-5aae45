// inference_ctrl: sequencer for one inference of the fully parallel network.
//
// The network itself has no control: every layer computes on every cycle.
// What has to be sequenced is the read-out. On start the controller reloads
// both LFSRs and clears the output counters (one cycle), waits FILL cycles
// while the first bits travel through the FILL register stages of the layers,
// then enables the counters for PERIOD cycles, one full LFSR period, so each
// output stream is counted over every reference value exactly once, and
// raises done. The paper names the fixed counting period but not this
// sequencer; states, widths and the handshake are this design's.
//
// Interface: start is sampled in IDLE or DONE. lfsr_load and cnt_clr are
// high in the start cycle; cnt_en is high for PERIOD cycles; done stays high
// from the end of counting until the next start.
// Timing: done rises 1 + FILL + PERIOD cycles after the start cycle.
module inference_ctrl #(
  parameter int unsigned FILL   = 5,
  parameter int unsigned PERIOD = 255
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  output logic lfsr_load,
  output logic cnt_clr,
  output logic cnt_en,
  output logic busy,
  output logic done
);

  typedef enum logic [1:0] {S_IDLE, S_FILL, S_COUNT, S_DONE} state_t;

  localparam int unsigned TW = $clog2(((FILL > PERIOD) ? FILL : PERIOD) + 1);

  state_t        state;
  logic [TW-1:0] timer;
  logic          accept;

  assign accept    = start && (state == S_IDLE || state == S_DONE);
  assign lfsr_load = accept;
  assign cnt_clr   = accept;
  assign cnt_en    = (state == S_COUNT);
  assign busy      = (state == S_FILL) || (state == S_COUNT);
  assign done      = (state == S_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      timer <= '0;
    end else begin
      unique case (state)
        S_IDLE, S_DONE: begin
          if (accept) begin
            timer <= '0;
            state <= (FILL == 0) ? S_COUNT : S_FILL;
          end
        end
        S_FILL: begin
          if (timer == TW'(FILL - 1)) begin
            timer <= '0;
            state <= S_COUNT;
          end else begin
            timer <= timer + 1'b1;
          end
        end
        S_COUNT: begin
          if (timer == TW'(PERIOD - 1)) begin
            timer <= '0;
            state <= S_DONE;
          end else begin
            timer <= timer + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A start while busy is ignored; flag it in simulation.
  always_ff @(posedge clk) begin
    if (busy) assert (!start) else $warning("inference_ctrl: start ignored while busy");
  end

endmodule
