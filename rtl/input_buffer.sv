// input_buffer: the dense input vector x, DIM signed DATA_W-bit samples.
//
// The host writes one sample per clock (wr_en, wr_idx, wr_data). The
// published design bounds every sample to [-127, 127]; a written -128 is
// stored as -127 so that the bound holds whatever the host sends. The
// projection engine reads LANES consecutive samples at once, combinationally,
// by chunk number (samples rd_chunk*LANES .. rd_chunk*LANES+LANES-1, lane 0 in
// the least significant bits), which matches the word layout of dict_mem.
//
// Timing: a write takes effect at the clock edge; reads are combinational.
module input_buffer
  import sparse_pkg::*;
#(
  parameter int unsigned P_DIM   = DIM,
  parameter int unsigned P_LANES = LANES,
  localparam int unsigned CHUNKS = P_DIM / P_LANES,
  localparam int unsigned IW     = $clog2(P_DIM),
  localparam int unsigned CW     = (CHUNKS > 1) ? $clog2(CHUNKS) : 1
) (
  input  logic                      clk,
  input  logic                      wr_en,
  input  logic [IW-1:0]             wr_idx,
  input  logic signed [DATA_W-1:0]  wr_data,
  input  logic [CW-1:0]             rd_chunk,
  output logic [P_LANES*DATA_W-1:0] rd_data
);

  logic signed [DATA_W-1:0] x [P_DIM];

  localparam logic signed [DATA_W-1:0] SMIN = DATA_W'(-SAMPLE_MAX);

  always_ff @(posedge clk) begin
    if (wr_en) x[wr_idx] <= (wr_data < SMIN) ? SMIN : wr_data;
  end

  always_comb begin
    for (int l = 0; l < P_LANES; l++)
      rd_data[l*DATA_W +: DATA_W] = x[int'(rd_chunk) * P_LANES + l];
  end

endmodule
