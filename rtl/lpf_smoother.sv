// lpf_smoother: the digital low-pass filter that removes the high-frequency
// "geometric noise" of the 1-bit reconstruction, and the output saturation.
//
// The published design calls for a cheap digital low-pass filter over the
// 128-element reconstruction and shows results for filter settings 0 (no
// filter), 1 and 5, without saying which filter. This block applies the
// 3-tap binomial kernel [1 2 1]/4 along the vector, `passes` times:
//   v'[k] = (v[k-1] + 2 v[k] + v[k+1] + 2) >> 2   (arithmetic shift)
// with the end samples repeated beyond the edges. Each pass needs only adds
// and shifts, so the filter has no multiplier; more passes give a narrower
// pass band (n passes equal one binomial kernel of 2n+1 taps). Reading the
// published setting as the number of passes, and the kernel itself, are this
// design's choices. passes = 0 bypasses the filter.
//
// The filtered vector is saturated to the sample range [-127, 127] on dout,
// so the output has the same format as the input.
//
// Interface: load (one clock, while idle) takes din and passes. dout is valid
// when done pulses and holds until the next load.
//
// Timing: one pass per clock over all DIM samples in parallel; done pulses
// passes + 1 clocks after load.
module lpf_smoother
  import sparse_pkg::*;
#(
  parameter int unsigned P_DIM = DIM
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      load,
  input  logic [FILT_W-1:0]         passes,
  input  logic signed [ACC_W-1:0]   din [P_DIM],
  output logic                      busy,
  output logic                      done,
  output logic signed [DATA_W-1:0]  dout [P_DIM],
  output logic                      saturated
);

  localparam int unsigned SW = ACC_W + 2;
  localparam logic signed [ACC_W-1:0] SMAX = ACC_W'(SAMPLE_MAX);
  localparam logic signed [ACC_W-1:0] SMIN = ACC_W'(-SAMPLE_MAX);

  logic signed [ACC_W-1:0] v [P_DIM];
  logic signed [ACC_W-1:0] nxt [P_DIM];
  logic [FILT_W-1:0]       left;
  logic                    running;

  assign busy = running;

  always_comb begin
    for (int k = 0; k < P_DIM; k++) begin
      logic signed [SW-1:0] a, b, c, s;
      a = SW'(v[(k == 0) ? 0 : k - 1]);
      b = SW'(v[k]);
      c = SW'(v[(k == P_DIM - 1) ? P_DIM - 1 : k + 1]);
      s = a + (b <<< 1) + c + SW'(2);
      nxt[k] = ACC_W'(s >>> 2);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      left    <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      if (load && !running) begin
        running <= 1'b1;
        left    <= passes;
      end else if (running) begin
        if (left == '0) begin
          running <= 1'b0;
          done    <= 1'b1;
        end else begin
          left <= left - 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (load && !running) v <= din;
    else if (running && left != '0) v <= nxt;
  end

  always_comb begin
    saturated = 1'b0;
    for (int k = 0; k < P_DIM; k++) begin
      if (v[k] > SMAX) begin
        dout[k]   = DATA_W'(SMAX);
        saturated = 1'b1;
      end else if (v[k] < SMIN) begin
        dout[k]   = DATA_W'(SMIN);
        saturated = 1'b1;
      end else begin
        dout[k]   = DATA_W'(v[k]);
      end
    end
  end

endmodule
