// tb_workloads: runs the six evaluated configurations through the complete
// design at its default sizes:
//   12 trigonometric terms, tau = 10,  filter passes 0 and 5
//   24 trigonometric terms, tau = 10,  filter passes 0 and 1
//   12 trigonometric terms, tau = 100, filter passes 0 and 5
//
// The dictionary here is a sampled cosine frame, an illustration only (the
// real dictionary is not public): neuron i = 16 f + p has frequency
// f = i / 16 (0 .. 63 cycles per 128 samples) and phase p * 2 pi / 16,
//   D[i][k] = round(127 cos(2 pi f k / 128 + 2 pi p / 16)).
// The input is a sum of N cosines with random integer frequencies 1 .. N/2,
// random amplitudes and phases, scaled to a peak of 127.
// The host picks c_shift as the smallest shift that brings the raw
// reconstruction inside [-127, 127].
//
// Then, on a fresh 12-term input, the threshold adaptation steers the active
// count toward 195, the count reported for the 12-term input at tau = 100,
// and tau must settle. Two last runs use that input with tau = 2000, above
// the rounding noise of this dictionary.
//
// Checks: every output sample and the population code against the integer
// reference model, and that the filter lowers the high-frequency energy
// (sum of squared second differences) of the output. It prints the active
// neuron count and the RMS error against the input for each configuration.
module tb_workloads;
  import sparse_pkg::*;
  import sparse_ref_pkg::*;

  localparam int unsigned CHUNKS = DIM / LANES;
  localparam int unsigned CNTW = $clog2(NEURONS + 1);
  localparam int unsigned AW = $clog2(NEURONS * CHUNKS);
  localparam int unsigned IW = $clog2(DIM);
  localparam int unsigned WW = LANES * DATA_W;
  localparam real PI = 3.14159265358979;

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

  sparse_pop_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
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
    for (int i = 0; i < NEURONS; i++)
      for (int k = 0; k < DIM; k++)
        d[i][k] = byte'($rtoi($floor(127.0 * $cos(2.0 * PI * (i / 16) * k / DIM + 2.0 * PI * (i % 16) / 16.0) + 0.5)));
    for (int a = 0; a < NEURONS * CHUNKS; a++) begin
      for (int l = 0; l < LANES; l++)
        dict_wr_data[l*DATA_W +: DATA_W] = d[a / CHUNKS][(a % CHUNKS) * LANES + l];
      dict_wr_addr = AW'(a);
      @(negedge clk);
    end
    dict_wr_en = 0;
  endtask

  task automatic load_signal(int terms);
    real s [DIM];
    real peak;
    peak = 0.0;
    for (int k = 0; k < DIM; k++) s[k] = 0.0;
    for (int j = 0; j < terms; j++) begin
      int f;
      real a, ph;
      f = $urandom_range(terms / 2, 1);
      a = 0.2 + $urandom_range(1000) / 1000.0;
      ph = 2.0 * PI * $urandom_range(1000) / 1000.0;
      for (int k = 0; k < DIM; k++) s[k] += a * $cos(2.0 * PI * f * k / DIM + ph);
    end
    for (int k = 0; k < DIM; k++) begin
      if (s[k] > peak) peak = s[k];
      if (-s[k] > peak) peak = -s[k];
    end
    x_wr_en = 1;
    for (int k = 0; k < DIM; k++) begin
      x[k] = byte'($rtoi($floor(127.0 * s[k] / peak + 0.5)));
      if (x[k] < -127) x[k] = -127;
      x_wr_idx = IW'(k); x_wr_data = x[k];
      @(negedge clk);
    end
    x_wr_en = 0;
  endtask

  task automatic config_run(int terms, int t, int passes);
    int a, shift, n, w, mx;
    int exp_y [NEURONS];
    vec_t sum, raw, e, o, xi;
    real err, err_raw, sxo, soo, g, err_fit;
    a = 0;
    for (int i = 0; i < NEURONS; i++) begin
      int p = 0;
      for (int k = 0; k < DIM; k++) p += int'(d[i][k]) * int'(x[k]);
      exp_y[i] = (p >= t) ? 1 : 0;
      a += exp_y[i];
    end
    mx = 0;
    for (int k = 0; k < DIM; k++) begin
      sum[k] = 0;
      for (int i = 0; i < NEURONS; i++) if (exp_y[i] == 1) sum[k] += int'(d[i][k]);
      if (sum[k] > mx) mx = sum[k];
      if (-sum[k] > mx) mx = -sum[k];
      xi[k] = int'(x[k]);
    end
    shift = 0;
    while ((mx >> shift) > SAMPLE_MAX) shift++;
    for (int k = 0; k < DIM; k++) raw[k] = floor_div(sum[k], 2**shift);
    e = lpf_ref(raw, passes);
    tau_load = 1; tau_in = PROJ_W'(t); c_shift = SHIFT_W'(shift); filt_passes = FILT_W'(passes);
    @(negedge clk);
    tau_load = 0;
    start = 1;
    @(negedge clk);
    start = 0;
    out_ready = 1;
    n = 0; w = 0;
    while (n < DIM && w < 30000) begin
      @(posedge clk);
      if (out_valid) begin
        o[n] = int'(out_data);
        check(o[n] == clip(e[n]), $sformatf("terms %0d tau %0d passes %0d sample %0d: %0d exp %0d",
                                           terms, t, passes, n, o[n], clip(e[n])));
        n++;
      end
      w++;
    end
    @(negedge clk);
    out_ready = 0;
    check(n == DIM, "all samples");
    check(int'(active_count) == a, $sformatf("active %0d exp %0d", active_count, a));
    for (int i = 0; i < NEURONS; i++) check(pop_code[i] == exp_y[i][0], "code bit");
    if (passes > 0) begin
      vec_t rc;
      for (int k = 0; k < DIM; k++) rc[k] = clip(raw[k]);
      check(roughness(o) < roughness(rc), $sformatf("filter did not smooth: %0d vs %0d", roughness(o), roughness(rc)));
    end
    err = 0.0; err_raw = 0.0;
    for (int k = 0; k < DIM; k++) begin
      err += (o[k] - xi[k]) * (o[k] - xi[k]);
      err_raw += (clip(raw[k]) - xi[k]) * (clip(raw[k]) - xi[k]);
    end
    // error left after the best single gain g (least squares), to separate
    // shape error from scale error
    sxo = 0.0; soo = 0.0;
    for (int k = 0; k < DIM; k++) begin
      sxo += real'(o[k]) * real'(xi[k]);
      soo += real'(o[k]) * real'(o[k]);
    end
    g = (soo > 0.0) ? sxo / soo : 0.0;
    err_fit = 0.0;
    for (int k = 0; k < DIM; k++) err_fit += (xi[k] - g * o[k]) * (xi[k] - g * o[k]);
    $display("terms=%0d tau=%0d passes=%0d: active neurons=%0d c_shift=%0d rms error raw=%0.1f out=%0.1f out with best gain %0.2f: %0.1f high-freq energy out=%0d",
             terms, t, passes, a, shift, $sqrt(err_raw / DIM), $sqrt(err / DIM), g, $sqrt(err_fit / DIM), roughness(o));
  endtask

  // Threshold adaptation: starting from tau = 10, let the design steer the
  // active count toward `target` with a fixed step. Once tau is settled it
  // must alternate between two values one step apart whose counts bracket
  // the target (or hit it exactly).
  task automatic adapt_run(int target, int step, int frames);
    int hist_tau [$], hist_cnt [$];
    tau_load = 1; tau_in = PROJ_W'(10);
    @(negedge clk);
    tau_load = 0;
    adapt_en = 1; target_count = CNTW'(target); tau_step = (PROJ_W-1)'(step);
    c_shift = SHIFT_W'(7); filt_passes = FILT_W'(5);
    for (int f = 0; f < frames; f++) begin
      int w;
      @(negedge clk);
      hist_tau.push_back(int'(tau));
      start = 1;
      @(negedge clk);
      start = 0;
      out_ready = 1;
      w = 0;
      while (!frame_done && w < 30000) begin @(negedge clk); w++; end
      out_ready = 0;
      hist_cnt.push_back(int'(active_count));
      @(negedge clk);
    end
    adapt_en = 0;
    begin
      int n = hist_tau.size();
      int t1 = hist_tau[n-1], t2 = hist_tau[n-2], c1 = hist_cnt[n-1], c2 = hist_cnt[n-2];
      bit exact = (c1 == target);
      bit bracket = ((t1 - t2 == step) || (t2 - t1 == step)) &&
                    ((c1 - target) * (c2 - target) <= 0);
      check(exact || bracket, $sformatf("adaptation not settled: tau %0d/%0d counts %0d/%0d target %0d", t2, t1, c2, c1, target));
      check(hist_cnt[0] > target, "first frame above target");
      $display("adaptation to %0d active neurons, step %0d: tau 10 -> %0d after %0d frames, last counts %0d and %0d",
               target, step, t1, n, c2, c1);
    end
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
    load_signal(12);
    config_run(12, 10, 0);
    config_run(12, 10, 5);
    config_run(12, 100, 0);
    config_run(12, 100, 5);
    load_signal(24);
    config_run(24, 10, 0);
    config_run(24, 10, 1);
    load_signal(12);
    adapt_run(195, 20, 60);
    // same 12-term input as the adaptation, at a threshold above the
    // dictionary's rounding noise
    config_run(12, 2000, 0);
    config_run(12, 2000, 5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
