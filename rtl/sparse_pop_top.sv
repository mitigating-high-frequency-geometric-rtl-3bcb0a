// sparse_pop_top: the complete 1-bit sparse population transform.
//
// A dense vector x of DIM = 128 signed samples in [-127, 127] is projected
// onto an overcomplete dictionary D of NEURONS = 1024 signed 8-bit basis
// functions. Each projection (D^T x)_i is compared with a threshold tau, which
// gives a 1-bit population code y in {0,1}^1024. The signal is rebuilt without
// multipliers by adding the basis functions of the active neurons, scaled by
// C = 2^-c_shift, and the reconstruction is passed through a low-pass filter
// that removes the high-frequency noise the 1-bit quantisation leaves on it.
// The result is DIM samples in the input's own format.
//
//   x --> projection_engine --> threshold_engine --> recon_accum --> lpf_smoother --> out
//             ^   (D^T x)       (y, active list)     (sum of D_i)     (passes)
//             |                                          |
//             +------------------- dict_mem -------------+
//
// The pipeline, the sizes, the threshold rule, the conditional-addition
// reconstruction with a global scale, the skipping of inactive neurons and
// the existence of a low-pass filter come from the published design. The
// lane parallelism, the port layout, the power-of-two scale, the filter
// kernel, the threshold adaptation rule and all handshakes are choices of
// this design.
//
// Host interface (all synchronous to clk, active-low asynchronous reset):
//   dict_wr_*   write one dictionary word (LANES entries of one basis function,
//               word n*DIM/LANES + e/LANES holds entries e.. of neuron n, lane 0
//               in the low bits); accepted only while idle (dict_wr_ready).
//   x_wr_*      write one input sample; accepted only while idle.
//   tau_load/tau_in, adapt_en, target_count, tau_step: threshold control.
//   c_shift     scale C = 2^-c_shift; filt_passes: 0 = filter off.
//   start       begin a frame (while idle); the configuration must stay
//               stable until frame_done.
//   out_*       DIM output samples, in index order, valid/ready.
//   pop_code, active_count, tau: the code and threshold of the last frame;
//   tau_raised / tau_lowered pulse when the adaptation moves tau;
//   out_saturated: a sample of the current output was clipped to +-127.
//
// Timing of one frame with out_ready held high, W = DIM/LANES words per basis
// function, A active neurons, F filter passes: projection NEURONS*W + 1
// clocks, reconstruction A*W + 1, filter F + 1, output DIM, plus the
// hand-over clocks between stages; from the clock that takes start to the
// clock that shows frame_done it is exactly NEURONS*W + A*W + F + DIM + 9
// clocks. At the default sizes (W = 8) that is 8192 + 8A + F + 137, e.g.
// 12,281 clocks for 494 active neurons and the filter off.
//
// The assertions are switched off while rst_n is low, so the linter sees
// rst_n used both as an asynchronous reset and in a clocked expression.
module sparse_pop_top
  import sparse_pkg::*;
#(
  parameter int unsigned P_NEURONS = NEURONS,
  parameter int unsigned P_DIM     = DIM,
  parameter int unsigned P_LANES   = LANES,
  localparam int unsigned CHUNKS   = P_DIM / P_LANES,
  localparam int unsigned CW       = (CHUNKS > 1) ? $clog2(CHUNKS) : 1,
  localparam int unsigned NW       = $clog2(P_NEURONS),
  localparam int unsigned CNTW     = $clog2(P_NEURONS + 1),
  localparam int unsigned AW       = $clog2(P_NEURONS * CHUNKS),
  localparam int unsigned IW       = $clog2(P_DIM),
  localparam int unsigned WW       = P_LANES * DATA_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // dictionary load
  input  logic                     dict_wr_en,
  input  logic [AW-1:0]            dict_wr_addr,
  input  logic [WW-1:0]            dict_wr_data,
  output logic                     dict_wr_ready,
  // input vector load
  input  logic                     x_wr_en,
  input  logic [IW-1:0]            x_wr_idx,
  input  logic signed [DATA_W-1:0] x_wr_data,
  output logic                     x_wr_ready,
  // configuration
  input  logic                     tau_load,
  input  logic signed [PROJ_W-1:0] tau_in,
  input  logic                     adapt_en,
  input  logic [CNTW-1:0]          target_count,
  input  logic [PROJ_W-2:0]        tau_step,
  input  logic [SHIFT_W-1:0]       c_shift,
  input  logic [FILT_W-1:0]        filt_passes,
  // control
  input  logic                     start,
  output logic                     busy,
  output logic                     frame_done,
  // output stream
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [IW-1:0]            out_idx,
  output logic signed [DATA_W-1:0] out_data,
  // status
  output logic [P_NEURONS-1:0]     pop_code,
  output logic [CNTW-1:0]          active_count,
  output logic signed [PROJ_W-1:0] tau,
  output logic                     out_saturated,
  output logic                     tau_raised,
  output logic                     tau_lowered
);

  phase_e phase;
  logic   idle;

  // control pulses
  logic proj_start, proj_done, proj_busy;
  logic recon_start, recon_done, recon_busy;
  logic filt_load, filt_done, filt_busy;
  logic clear_code;

  // dictionary port
  logic            mem_en, mem_we;
  logic [AW-1:0]   mem_addr;
  logic [WW-1:0]   mem_rdata;
  logic            pe_mem_en, ra_mem_en;
  logic [AW-1:0]   pe_mem_addr, ra_mem_addr;

  // input vector
  logic [CW-1:0]   x_chunk_idx;
  logic [WW-1:0]   x_chunk;

  // projections
  logic                     p_valid;
  logic [NW-1:0]            p_idx;
  logic signed [PROJ_W-1:0] p_val;

  // active list
  logic [NW-1:0] list_rd_idx, list_rd_data;

  // vectors
  logic signed [ACC_W-1:0]  recon [P_DIM];
  logic signed [DATA_W-1:0] filt  [P_DIM];

  assign dict_wr_ready = idle;
  assign x_wr_ready    = idle;
  assign busy          = !idle;
  assign out_data      = filt[out_idx];

  // Dictionary port owner follows the frame phase.
  always_comb begin
    mem_en   = 1'b0;
    mem_we   = 1'b0;
    mem_addr = '0;
    unique case (phase)
      PH_IDLE: begin
        mem_en   = dict_wr_en;
        mem_we   = 1'b1;
        mem_addr = dict_wr_addr;
      end
      PH_PROJECT: begin
        mem_en   = pe_mem_en;
        mem_addr = pe_mem_addr;
      end
      PH_RECON: begin
        mem_en   = ra_mem_en;
        mem_addr = ra_mem_addr;
      end
      default: ;
    endcase
  end

  frame_ctrl #(.P_DIM(P_DIM)) u_ctrl (
    .clk, .rst_n, .start, .idle, .phase,
    .proj_start, .proj_done, .recon_start, .recon_done,
    .filt_load, .filt_done, .clear_code,
    .out_valid, .out_ready, .out_idx, .frame_done
  );

  dict_mem #(.P_NEURONS(P_NEURONS), .P_DIM(P_DIM), .P_LANES(P_LANES)) u_dict (
    .clk, .en(mem_en), .we(mem_we), .addr(mem_addr), .wdata(dict_wr_data),
    .rdata(mem_rdata)
  );

  input_buffer #(.P_DIM(P_DIM), .P_LANES(P_LANES)) u_xbuf (
    .clk, .wr_en(x_wr_en && idle), .wr_idx(x_wr_idx), .wr_data(x_wr_data),
    .rd_chunk(x_chunk_idx), .rd_data(x_chunk)
  );

  projection_engine #(.P_NEURONS(P_NEURONS), .P_DIM(P_DIM), .P_LANES(P_LANES)) u_proj (
    .clk, .rst_n, .start(proj_start), .busy(proj_busy), .done(proj_done),
    .mem_en(pe_mem_en), .mem_addr(pe_mem_addr), .mem_rdata,
    .x_chunk_idx, .x_chunk,
    .out_valid(p_valid), .out_idx(p_idx), .out_proj(p_val)
  );

  tau_adapt #(.P_NEURONS(P_NEURONS)) u_tau (
    .clk, .rst_n, .tau_load(tau_load && idle), .tau_in, .adapt_en, .target_count,
    .step(tau_step), .frame_done, .active_count, .tau,
    .raised(tau_raised), .lowered(tau_lowered)
  );

  threshold_engine #(.P_NEURONS(P_NEURONS)) u_thr (
    .clk, .rst_n, .clear(clear_code), .tau,
    .in_valid(p_valid), .in_idx(p_idx), .in_proj(p_val),
    .code(pop_code), .active_count,
    .list_rd_idx, .list_rd_data
  );

  recon_accum #(.P_NEURONS(P_NEURONS), .P_DIM(P_DIM), .P_LANES(P_LANES)) u_recon (
    .clk, .rst_n, .start(recon_start), .list_count(active_count), .c_shift,
    .busy(recon_busy), .done(recon_done),
    .list_rd_idx, .list_rd_data,
    .mem_en(ra_mem_en), .mem_addr(ra_mem_addr), .mem_rdata,
    .recon
  );

  lpf_smoother #(.P_DIM(P_DIM)) u_lpf (
    .clk, .rst_n, .load(filt_load), .passes(filt_passes), .din(recon),
    .busy(filt_busy), .done(filt_done), .dout(filt), .saturated(out_saturated)
  );

  // The dictionary port has one owner: at most one engine is busy, and only
  // in its own phase.
  a_one_engine: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({proj_busy, recon_busy, filt_busy}));
  a_proj_phase: assert property (@(posedge clk) disable iff (!rst_n) proj_busy |-> phase == PH_PROJECT);
  a_recon_phase: assert property (@(posedge clk) disable iff (!rst_n) recon_busy |-> phase == PH_RECON);

endmodule
