// threshold_engine: the hard activation threshold and the store of the 1-bit
// population code.
//
// For every projection p_i presented on in_valid it sets y_i = (p_i >= tau),
// signed comparison, exactly as the published activation rule. Besides the
// code vector y it appends the index of every active neuron to an active
// list and counts them. The list is what lets the reconstruction visit only
// the active neurons and skip the inactive ones altogether; the list itself is
// this design's way of doing that skipping.
//
// Interface: clear (one clock, before a frame) empties the list and clears y.
// list_rd_idx reads the list combinationally. active_count is the number of
// active neurons of the current frame, 0 .. NEURONS.
//
// Timing: each in_valid is absorbed at the clock edge; y, the list and
// active_count show it the next clock. One projection per clock at most.
module threshold_engine
  import sparse_pkg::*;
#(
  parameter int unsigned P_NEURONS = NEURONS,
  localparam int unsigned NW       = $clog2(P_NEURONS),
  localparam int unsigned CNTW     = $clog2(P_NEURONS + 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic signed [PROJ_W-1:0] tau,
  input  logic                     in_valid,
  input  logic [NW-1:0]            in_idx,
  input  logic signed [PROJ_W-1:0] in_proj,
  output logic [P_NEURONS-1:0]     code,
  output logic [CNTW-1:0]          active_count,
  input  logic [NW-1:0]            list_rd_idx,
  output logic [NW-1:0]            list_rd_data
);

  logic [NW-1:0] list [P_NEURONS];
  logic          fire;

  assign fire         = in_proj >= tau;
  assign list_rd_data = list[list_rd_idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      code         <= '0;
      active_count <= '0;
    end else if (clear) begin
      code         <= '0;
      active_count <= '0;
    end else if (in_valid) begin
      code[in_idx] <= fire;
      if (fire) active_count <= active_count + 1'b1;
    end
  end

  // List storage needs no reset: entries at or above active_count are unused.
  always_ff @(posedge clk) begin
    if (!clear && in_valid && fire) list[active_count[NW-1:0]] <= in_idx;
  end

endmodule
