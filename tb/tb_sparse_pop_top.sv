// tb_sparse_pop_top: end-to-end test of the whole transform at its default
// sizes (128-sample input, 1024 neurons, 8-bit dictionary).
//
// It loads a random dictionary and random inputs through the host ports and
// runs a series of frames, each compared in full with the integer reference
// model of sparse_ref_pkg: the population code y, the active count, every one
// of the 128 output samples, and the frame time with out_ready high,
//   NEURONS*W + A*W + F + DIM + 9 clocks   (W = DIM/LANES, A active, F passes).
// The frames are chosen so that every mechanism of the design happens; each
// is counted and a mechanism that never happened is a failure:
//   inactive neurons skipped, filter bypass (0 passes), filter on, tau raised
//   and lowered by the adaptation, an empty code, output clipping, output
//   back-pressure, and host writes refused while a frame runs.
module tb_sparse_pop_top;
  import sparse_pkg::*;
  import sparse_ref_pkg::*;

  localparam int unsigned CHUNKS = DIM / LANES;
  localparam int unsigned CNTW = $clog2(NEURONS + 1);
  localparam int unsigned AW = $clog2(NEURONS * CHUNKS);
  localparam int unsigned IW = $clog2(DIM);
  localparam int unsigned WW = LANES * DATA_W;

  logic clk = 1'b0, rst_n = 1'b0;
  logic dict_wr_en, dict_wr_ready;
  logic [AW-1:0] dict_wr_addr;
  logic [WW-1:0] dict_wr_data;
  logic x_wr_en, x_wr_ready;
  logic [IW-1:0] x_wr_idx;
  logic signed [DATA_W-1:0] x_wr_data;
  logic tau_load, adapt_en;
  logic signed [PROJ_W-1:0] tau_in, tau;
  logic [CNTW-1:0] target_count, active_count;
  logic [PROJ_W-2:0] tau_step;
  logic [SHIFT_W-1:0] c_shift;
  logic [FILT_W-1:0] filt_passes;
  logic start, busy, frame_done;
  logic out_valid, out_ready;
  logic [IW-1:0] out_idx;
  logic signed [DATA_W-1:0] out_data;
  logic [NEURONS-1:0] pop_code;
  logic out_saturated, tau_raised, tau_lowered;

  int checks = 0, failures = 0;
  byte d [NEURONS][DIM];
  byte x [DIM];

  // mechanism counters
  int n_skip = 0, n_bypass = 0, n_filter = 0, n_raise = 0, n_lower = 0;
  int n_empty = 0, n_clip = 0, n_stall = 0, n_refused = 0;

  sparse_pop_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (tau_raised) n_raise++;
    if (tau_lowered) n_lower++;
  end

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s", msg);
    end
  endtask

  task automatic load_dict();
    dict_wr_en = 1;
    for (int a = 0; a < NEURONS * CHUNKS; a++) begin
      for (int l = 0; l < LANES; l++) begin
        d[a / CHUNKS][(a % CHUNKS) * LANES + l] = byte'($urandom);
        dict_wr_data[l*DATA_W +: DATA_W] = d[a / CHUNKS][(a % CHUNKS) * LANES + l];
      end
      dict_wr_addr = AW'(a);
      @(negedge clk);
    end
    dict_wr_en = 0;
  endtask

  task automatic load_x(int amp);
    x_wr_en = 1;
    for (int k = 0; k < DIM; k++) begin
      x[k] = byte'(int'($urandom_range(2 * amp)) - amp);
      x_wr_idx = IW'(k); x_wr_data = x[k];
      @(negedge clk);
    end
    x_wr_en = 0;
  endtask

  task automatic set_tau(int t);
    tau_load = 1; tau_in = PROJ_W'(t);
    @(negedge clk);
    tau_load = 0;
  endtask

  // One frame: model, run, compare.
  task automatic frame(int shift, int passes, bit stall);
    int t_now, a, t, n;
    int exp_y [NEURONS];
    vec_t sum, e;
    @(negedge clk);            // tau adapts the clock after frame_done
    t_now = int'(tau);
    a = 0;
    for (int i = 0; i < NEURONS; i++) begin
      int p = 0;
      for (int k = 0; k < DIM; k++) p += int'(d[i][k]) * int'(x[k]);
      exp_y[i] = (p >= t_now) ? 1 : 0;
      a += exp_y[i];
    end
    for (int k = 0; k < DIM; k++) begin
      sum[k] = 0;
      for (int i = 0; i < NEURONS; i++) if (exp_y[i] == 1) sum[k] += int'(d[i][k]);
      sum[k] = floor_div(sum[k], 2**shift);
    end
    e = lpf_ref(sum, passes);
    c_shift = SHIFT_W'(shift); filt_passes = FILT_W'(passes);
    out_ready = 0;
    @(negedge clk);
    start = 1;
    @(posedge clk); #1;
    start = 0;
    t = 0; n = 0;
    while (n < DIM && t < 40000) begin
      @(negedge clk);
      t++;
      // host writes during the frame must be refused and change nothing
      if (t == 5 || t == NEURONS * CHUNKS + 20) begin
        check(!dict_wr_ready && !x_wr_ready, "host ports refuse while busy");
        dict_wr_en = 1; dict_wr_addr = '0; dict_wr_data = ~dict_wr_data;
        x_wr_en = 1; x_wr_idx = '0; x_wr_data = ~x[0];
        if (!dict_wr_ready) n_refused++;
      end else begin
        dict_wr_en = 0; x_wr_en = 0;
      end
      out_ready = stall ? ($urandom_range(2) != 0) : 1'b1;
      if (out_valid && !out_ready) n_stall++;
      if (out_valid && out_ready) begin
        check(int'(out_idx) == n, "output order");
        check(int'(out_data) == clip(e[n]),
              $sformatf("sample %0d: %0d exp %0d (shift %0d passes %0d)", n, out_data, clip(e[n]), shift, passes));
        if (clip(e[n]) != e[n]) n_clip++;
        n++;
      end
    end
    @(posedge clk); #1;
    check(frame_done, "frame_done with the last sample");
    if (!stall)
      check(t == NEURONS * CHUNKS + a * CHUNKS + passes + DIM + 9,
            $sformatf("frame time %0d exp %0d (A=%0d F=%0d)", t, NEURONS * CHUNKS + a * CHUNKS + passes + DIM + 9, a, passes));
    out_ready = 0;
    check(int'(active_count) == a, $sformatf("active %0d exp %0d", active_count, a));
    for (int i = 0; i < NEURONS; i++) check(pop_code[i] == exp_y[i][0], $sformatf("code bit %0d", i));
    if (a < NEURONS) n_skip++;
    if (a == 0) n_empty++;
    if (passes == 0) n_bypass++; else n_filter++;
    $display("frame: tau=%0d active=%0d shift=%0d passes=%0d clocks=%0d", t_now, a, shift, passes, t);
    @(negedge clk);
  endtask

  initial begin
    dict_wr_en = 0; dict_wr_addr = '0; dict_wr_data = '0;
    x_wr_en = 0; x_wr_idx = '0; x_wr_data = '0;
    tau_load = 0; tau_in = '0; adapt_en = 0; target_count = '0; tau_step = '0;
    c_shift = '0; filt_passes = '0; start = 0; out_ready = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    load_dict();
    load_x(127);
    set_tau(10);
    frame(5, 0, 0);          // raw reconstruction, filter bypassed
    frame(5, 5, 0);          // 5 filter passes
    frame(5, 1, 1);          // 1 pass, back-pressure on the output
    set_tau(100);
    frame(5, 5, 0);
    set_tau(2**(PROJ_W-1) - 1);
    frame(5, 2, 0);          // nothing fires: empty code
    set_tau(0);
    frame(0, 0, 0);          // no scaling: samples clip at +-127
    // threshold adaptation toward 200 active neurons
    adapt_en = 1; target_count = CNTW'(200); tau_step = (PROJ_W-1)'(20000);
    set_tau(-50000);
    frame(5, 3, 0);          // too many fire: tau raised
    frame(5, 3, 0);
    set_tau(200000);
    frame(5, 3, 0);          // too few fire: tau lowered
    adapt_en = 0;
    load_x(40);
    set_tau(10);
    frame(4, 5, 1);
    check(n_skip > 0, "skipping of inactive neurons never happened");
    check(n_bypass > 0, "filter bypass never happened");
    check(n_filter > 0, "filtering never happened");
    check(n_raise > 0, "tau never raised");
    check(n_lower > 0, "tau never lowered");
    check(n_empty > 0, "empty code never happened");
    check(n_clip > 0, "output clipping never happened");
    check(n_stall > 0, "output back-pressure never happened");
    check(n_refused > 0, "host write refusal never happened");
    $display("mechanisms: skip=%0d bypass=%0d filter=%0d raise=%0d lower=%0d empty=%0d clip=%0d stall=%0d refused=%0d",
             n_skip, n_bypass, n_filter, n_raise, n_lower, n_empty, n_clip, n_stall, n_refused);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
