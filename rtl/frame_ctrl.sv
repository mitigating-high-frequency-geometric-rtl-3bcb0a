// frame_ctrl: sequences one frame through the pipeline and streams the result.
//
// A frame runs the stages of the published pipeline in order:
//   PH_PROJECT  projection of x onto all basis functions and hard threshold
//               (the threshold engine absorbs each projection as it appears)
//   PH_RECON    conditional addition of the active basis functions, scaling
//   PH_FILTER   low-pass filter passes
//   PH_OUTPUT   the DIM filtered samples leave on a valid/ready stream
// The phase also tells the top which engine owns the dictionary port. The
// stages run one after another, never overlapped; that, and the output
// stream, are this design's choices.
//
// Interface: start is accepted only in PH_IDLE (idle=1). Each stage engine
// gets a one-clock start pulse and answers with a one-clock done pulse.
// Output sample out_idx is sent when out_valid && out_ready. frame_done
// pulses with the handshake of the last sample.
//
// Timing: one clock from a stage's done to the next stage's start pulse;
// with out_ready held high the DIM samples leave on DIM consecutive clocks.
//
// The assertions are switched off while rst_n is low, so the linter sees
// rst_n used both as an asynchronous reset and in a clocked expression.
module frame_ctrl
  import sparse_pkg::*;
#(
  parameter int unsigned P_DIM = DIM,
  localparam int unsigned IW   = $clog2(P_DIM)
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  output logic       idle,
  output phase_e     phase,
  output logic       proj_start,
  input  logic       proj_done,
  output logic       recon_start,
  input  logic       recon_done,
  output logic       filt_load,
  input  logic       filt_done,
  output logic       clear_code,
  output logic       out_valid,
  input  logic       out_ready,
  output logic [IW-1:0] out_idx,
  output logic       frame_done
);

  assign idle      = (phase == PH_IDLE);
  assign out_valid = (phase == PH_OUTPUT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase       <= PH_IDLE;
      proj_start  <= 1'b0;
      recon_start <= 1'b0;
      filt_load   <= 1'b0;
      clear_code  <= 1'b0;
      out_idx     <= '0;
      frame_done  <= 1'b0;
    end else begin
      proj_start  <= 1'b0;
      recon_start <= 1'b0;
      filt_load   <= 1'b0;
      clear_code  <= 1'b0;
      frame_done  <= 1'b0;
      unique case (phase)
        PH_IDLE: if (start) begin
          phase      <= PH_PROJECT;
          proj_start <= 1'b1;
          clear_code <= 1'b1;
        end
        PH_PROJECT: if (proj_done) begin
          phase       <= PH_RECON;
          recon_start <= 1'b1;
        end
        PH_RECON: if (recon_done) begin
          phase     <= PH_FILTER;
          filt_load <= 1'b1;
        end
        PH_FILTER: if (filt_done) begin
          phase   <= PH_OUTPUT;
          out_idx <= '0;
        end
        PH_OUTPUT: if (out_ready) begin
          if (out_idx == IW'(P_DIM - 1)) begin
            phase      <= PH_IDLE;
            frame_done <= 1'b1;
          end
          out_idx <= out_idx + 1'b1;
        end
        default: phase <= PH_IDLE;
      endcase
    end
  end

  // A stage's done may only arrive in its own phase (all are 0 in reset).
  a_proj_done: assert property (@(posedge clk) disable iff (!rst_n) proj_done |-> phase == PH_PROJECT);
  a_recon_done: assert property (@(posedge clk) disable iff (!rst_n)  recon_done |-> phase == PH_RECON);
  a_filt_done: assert property (@(posedge clk) disable iff (!rst_n) filt_done |-> phase == PH_FILTER);

endmodule
