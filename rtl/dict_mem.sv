// dict_mem: storage for the overcomplete dictionary D (NEURONS basis functions
// of DIM signed DATA_W-bit entries each).
//
// One word holds LANES consecutive entries of one basis function, entry
// (neuron n, element e) sits in word n*(DIM/LANES) + e/LANES at lane e%LANES,
// lane 0 in the least significant bits. Both the projection and the
// reconstruction walk a basis function word by word, so a single port serves
// both; the host loads the dictionary through the same port while the
// pipeline is idle. The published design says only that D is an 8-bit
// 128 x 1024 dictionary whose contents are proprietary; the word layout and
// the single synchronous port are choices of this design.
//
// Timing: synchronous single port. With en=1 and we=1 the word is written at
// the clock edge; with en=1 and we=0 rdata holds the word one clock later.
// rdata keeps its value while en=0.
module dict_mem
  import sparse_pkg::*;
#(
  parameter int unsigned P_NEURONS = NEURONS,
  parameter int unsigned P_DIM     = DIM,
  parameter int unsigned P_LANES   = LANES,
  localparam int unsigned DEPTH    = P_NEURONS * P_DIM / P_LANES,
  localparam int unsigned WIDTH    = P_LANES * DATA_W,
  localparam int unsigned AW       = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             en,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end

endmodule
