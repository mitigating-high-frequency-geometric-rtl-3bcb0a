// tau_adapt: holds the activation threshold tau and, when enabled, adjusts it
// once per frame to steer the number of active neurons toward a target.
//
// The published design states only that tau is adjusted dynamically to
// control the density of active neurons. This block does the simplest thing
// that achieves it: after each frame, if more than target neurons fired tau
// is raised by step, if fewer fired it is lowered by step, and it stays put on
// an exact match. tau saturates at the ends of its signed range. With
// adapt_en=0 tau only changes when the host loads it.
//
// Interface: tau_load (one clock) sets tau to tau_in and wins over an update
// in the same clock. frame_done (one clock) carries the frame's active_count.
//
// Timing: the new tau is visible the clock after tau_load or frame_done.
// Reset value of tau is 0.
module tau_adapt
  import sparse_pkg::*;
#(
  parameter int unsigned P_NEURONS = NEURONS,
  localparam int unsigned CNTW     = $clog2(P_NEURONS + 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     tau_load,
  input  logic signed [PROJ_W-1:0] tau_in,
  input  logic                     adapt_en,
  input  logic [CNTW-1:0]          target_count,
  input  logic [PROJ_W-2:0]        step,
  input  logic                     frame_done,
  input  logic [CNTW-1:0]          active_count,
  output logic signed [PROJ_W-1:0] tau,
  output logic                     raised,
  output logic                     lowered
);

  localparam logic signed [PROJ_W:0] TMAX = (PROJ_W+1)'(2**(PROJ_W-1) - 1);
  localparam logic signed [PROJ_W:0] TMIN = -(PROJ_W+1)'(2**(PROJ_W-1));

  logic signed [PROJ_W:0] up, dn;

  always_comb begin
    up = $signed({tau[PROJ_W-1], tau}) + $signed({2'b00, step});
    dn = $signed({tau[PROJ_W-1], tau}) - $signed({2'b00, step});
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tau     <= '0;
      raised  <= 1'b0;
      lowered <= 1'b0;
    end else begin
      raised  <= 1'b0;
      lowered <= 1'b0;
      if (tau_load) begin
        tau <= tau_in;
      end else if (frame_done && adapt_en) begin
        if (active_count > target_count) begin
          tau    <= (up > TMAX) ? PROJ_W'(TMAX) : PROJ_W'(up);
          raised <= 1'b1;
        end else if (active_count < target_count) begin
          tau     <= (dn < TMIN) ? PROJ_W'(TMIN) : PROJ_W'(dn);
          lowered <= 1'b1;
        end
      end
    end
  end

endmodule
