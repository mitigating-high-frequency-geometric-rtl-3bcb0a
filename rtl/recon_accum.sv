// recon_accum: multiplier-free linear reconstruction
//   x_raw = C * sum over active neurons i of D_i
// from the 1-bit population code.
//
// Because every y_i is 0 or 1 the reconstruction needs no multiplier: the
// basis function of each active neuron is simply added into DIM accumulators.
// The engine walks the active list produced by threshold_engine, so an
// inactive neuron costs no clock at all (the published design skips the
// accumulation cycles of inactive neurons). For each listed neuron it reads
// the DIM/LANES words of its basis function and adds LANES entries per clock.
// The global normalisation constant C is a power of two, C = 2^-c_shift, and
// is applied as an arithmetic right shift (rounding toward minus infinity),
// which keeps the scaling multiplier-free as well; restricting C to powers of
// two is this design's choice.
//
// Interface: start (one clock, while idle) clears the accumulators and begins
// a pass over list entries 0 .. list_count-1. recon holds the scaled
// accumulators; they are final when done pulses and stay until the next start.
//
// Timing: done pulses list_count*DIM/LANES + 1 clocks after start (1 clock
// for an empty list). One dictionary word per clock, no stalls.
module recon_accum
  import sparse_pkg::*;
#(
  parameter int unsigned P_NEURONS = NEURONS,
  parameter int unsigned P_DIM     = DIM,
  parameter int unsigned P_LANES   = LANES,
  localparam int unsigned CHUNKS   = P_DIM / P_LANES,
  localparam int unsigned CW       = (CHUNKS > 1) ? $clog2(CHUNKS) : 1,
  localparam int unsigned NW       = $clog2(P_NEURONS),
  localparam int unsigned CNTW     = $clog2(P_NEURONS + 1),
  localparam int unsigned AW       = $clog2(P_NEURONS * CHUNKS)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [CNTW-1:0]           list_count,
  input  logic [SHIFT_W-1:0]        c_shift,
  output logic                      busy,
  output logic                      done,
  // active list read port
  output logic [NW-1:0]             list_rd_idx,
  input  logic [NW-1:0]             list_rd_data,
  // dictionary read port
  output logic                      mem_en,
  output logic [AW-1:0]             mem_addr,
  input  logic [P_LANES*DATA_W-1:0] mem_rdata,
  // scaled reconstruction
  output logic signed [ACC_W-1:0]   recon [P_DIM]
);

  logic                   issuing;
  logic [CNTW-1:0]        k_q;       // list position being issued
  logic [CW-1:0]          c_q;       // word within the basis function
  logic                   v_d;
  logic [CW-1:0]          c_d;
  logic                   fin_d;     // pass finished, done next clock
  logic signed [ACC_W-1:0] acc [P_DIM];

  assign list_rd_idx = k_q[NW-1:0];
  assign mem_en      = issuing;
  assign mem_addr    = (CHUNKS > 1) ? AW'({list_rd_data, c_q}) : AW'(list_rd_data);
  assign busy        = issuing | v_d | fin_d;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issuing <= 1'b0;
      k_q     <= '0;
      c_q     <= '0;
      v_d     <= 1'b0;
      c_d     <= '0;
      fin_d   <= 1'b0;
      done    <= 1'b0;
    end else begin
      done  <= fin_d;
      fin_d <= 1'b0;
      if (start && !busy) begin
        k_q <= '0;
        c_q <= '0;
        if (list_count == '0) fin_d   <= 1'b1;
        else                  issuing <= 1'b1;
      end else if (issuing) begin
        if (CHUNKS == 1 || c_q == CW'(CHUNKS - 1)) begin
          c_q <= '0;
          if (k_q == list_count - 1'b1) begin
            issuing <= 1'b0;
            fin_d   <= 1'b1;
          end
          k_q <= k_q + 1'b1;
        end else begin
          c_q <= c_q + 1'b1;
        end
      end
      v_d <= issuing;
      c_d <= (CHUNKS > 1) ? c_q : '0;
    end
  end

  // Conditional addition of the selected basis function, LANES entries per
  // clock. Accumulators need no reset: start clears them.
  always_ff @(posedge clk) begin
    if (start && !busy) begin
      for (int i = 0; i < P_DIM; i++) acc[i] <= '0;
    end else if (v_d) begin
      for (int l = 0; l < P_LANES; l++)
        acc[int'(c_d) * P_LANES + l] <= acc[int'(c_d) * P_LANES + l] +
          ACC_W'($signed(mem_rdata[l*DATA_W +: DATA_W]));
    end
  end

  // Scaling by C = 2^-c_shift.
  always_comb begin
    for (int i = 0; i < P_DIM; i++) recon[i] = acc[i] >>> c_shift;
  end

endmodule
