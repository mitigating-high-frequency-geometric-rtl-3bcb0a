// projection_engine: computes the projection p_i = (D^T x)_i of the input
// vector onto every basis function, i = 0 .. NEURONS-1, in index order.
//
// The published design gives the projection as the product D^T x of the
// 8-bit dictionary with the 8-bit input. This engine takes LANES dictionary
// entries and LANES input samples per clock, multiplies them lane by lane,
// sums the LANES products and accumulates DIM/LANES such partial sums into one
// projection. How the product is organised (lane count, one neuron at a time,
// in index order) is this design's choice.
//
// Pipeline: clock 0 sends the address of word (n, c) to dict_mem; clock 1 the
// word arrives together with input chunk c (x_chunk is read combinationally
// through x_chunk_idx) and is added into the running sum; the projection of
// neuron n is registered and shown on out_valid/out_idx/out_proj the clock
// after its last word arrives. No stalls.
//
// Timing: start is a one-clock pulse while idle. out_valid fires once per
// neuron, the first DIM/LANES + 1 clocks after start, then every DIM/LANES
// clocks. done pulses together with the last out_valid, exactly
// NEURONS*DIM/LANES + 1 clocks after the start pulse.
module projection_engine
  import sparse_pkg::*;
#(
  parameter int unsigned P_NEURONS = NEURONS,
  parameter int unsigned P_DIM     = DIM,
  parameter int unsigned P_LANES   = LANES,
  localparam int unsigned CHUNKS   = P_DIM / P_LANES,
  localparam int unsigned CW       = (CHUNKS > 1) ? $clog2(CHUNKS) : 1,
  localparam int unsigned NW       = $clog2(P_NEURONS),
  localparam int unsigned AW       = $clog2(P_NEURONS * CHUNKS)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  output logic                      busy,
  output logic                      done,
  // dictionary read port
  output logic                      mem_en,
  output logic [AW-1:0]             mem_addr,
  input  logic [P_LANES*DATA_W-1:0] mem_rdata,
  // input vector read port
  output logic [CW-1:0]             x_chunk_idx,
  input  logic [P_LANES*DATA_W-1:0] x_chunk,
  // one projection per neuron
  output logic                      out_valid,
  output logic [NW-1:0]             out_idx,
  output logic signed [PROJ_W-1:0]  out_proj
);

  // Issue stage.
  logic          issuing;
  logic [NW-1:0] n_q;
  logic [CW-1:0] c_q;
  // Accumulate stage.
  logic          v_d;
  logic          last_d;
  logic [NW-1:0] n_d;
  logic [CW-1:0] c_d;
  logic signed [PROJ_W-1:0] acc_q;
  logic signed [PROJ_W-1:0] dot;
  logic signed [PROJ_W-1:0] acc_next;

  assign mem_en      = issuing;
  assign mem_addr    = (CHUNKS > 1) ? AW'({n_q, c_q}) : AW'(n_q);
  assign x_chunk_idx = c_d;
  assign busy        = issuing | v_d;

  // LANES signed 8 x 8 products, summed.
  always_comb begin
    dot = '0;
    for (int l = 0; l < P_LANES; l++) begin
      dot += PROJ_W'($signed(mem_rdata[l*DATA_W +: DATA_W]) *
                     $signed(x_chunk[l*DATA_W +: DATA_W]));
    end
    acc_next = ((c_d == '0) ? PROJ_W'(0) : acc_q) + dot;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issuing   <= 1'b0;
      n_q       <= '0;
      c_q       <= '0;
      v_d       <= 1'b0;
      last_d    <= 1'b0;
      n_d       <= '0;
      c_d       <= '0;
      acc_q     <= '0;
      out_valid <= 1'b0;
      out_idx   <= '0;
      out_proj  <= '0;
      done      <= 1'b0;
    end else begin
      // issue
      if (start && !busy) begin
        issuing <= 1'b1;
        n_q     <= '0;
        c_q     <= '0;
      end else if (issuing) begin
        if (CHUNKS == 1 || c_q == CW'(CHUNKS - 1)) begin
          c_q <= '0;
          if (n_q == NW'(P_NEURONS - 1)) issuing <= 1'b0;
          else                           n_q     <= n_q + 1'b1;
        end else begin
          c_q <= c_q + 1'b1;
        end
      end
      v_d    <= issuing;
      n_d    <= n_q;
      c_d    <= (CHUNKS > 1) ? c_q : '0;
      last_d <= issuing && (n_q == NW'(P_NEURONS - 1)) &&
                (CHUNKS == 1 || c_q == CW'(CHUNKS - 1));
      // accumulate
      out_valid <= 1'b0;
      done      <= 1'b0;
      if (v_d) begin
        acc_q <= acc_next;
        if (CHUNKS == 1 || c_d == CW'(CHUNKS - 1)) begin
          out_valid <= 1'b1;
          out_idx   <= n_d;
          out_proj  <= acc_next;
          done      <= last_d;
        end
      end
    end
  end

  initial assert (P_DIM % P_LANES == 0 && (CHUNKS & (CHUNKS - 1)) == 0)
    else $fatal(1, "DIM/LANES must be a power of two");

endmodule
