// tb_lpf_smoother: filters random, noisy and large vectors with 0, 1, 5 and 15
// passes and checks every output sample against the reference binomial
// filter followed by clipping to [-127, 127], the saturation flag, and the
// time load -> done of passes + 1 clocks. It also checks that the filter
// lowers the high-frequency energy of an alternating (+-A) signal.
module tb_lpf_smoother;
  import sparse_pkg::*;
  import sparse_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic load, busy, done, saturated;
  logic [FILT_W-1:0] passes;
  logic signed [ACC_W-1:0] din [DIM];
  logic signed [DATA_W-1:0] dout [DIM];

  int checks = 0, failures = 0;

  lpf_smoother dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  task automatic run(int p, int mode);
    vec_t v, e, o;
    int t;
    bit sat;
    for (int k = 0; k < DIM; k++) begin
      case (mode)
        0: v[k] = int'($urandom_range(400)) - 200;                   // some beyond +-127
        1: v[k] = ((k % 2) ? 90 : -90) + int'($urandom_range(20));    // alternating noise
        2: v[k] = int'($urandom_range(2**18)) - 2**17;                // full accumulator range
        default: v[k] = int'($urandom_range(100)) - 50;
      endcase
      din[k] = ACC_W'(v[k]);
    end
    passes = FILT_W'(p);
    @(negedge clk);
    load = 1;
    @(posedge clk);
    #1 load = 0;
    for (int k = 0; k < DIM; k++) din[k] = '0;   // input is taken at load only
    t = 0;
    while (!done && t < 40) begin
      @(posedge clk); t++; #1;
    end
    check(t == p + 1, $sformatf("passes %0d: done after %0d", p, t));
    e = lpf_ref(v, p);
    sat = 0;
    for (int k = 0; k < DIM; k++) begin
      o[k] = int'(dout[k]);
      if (clip(e[k]) != e[k]) sat = 1;
      check(o[k] == clip(e[k]), $sformatf("passes %0d mode %0d k %0d: %0d exp %0d", p, mode, k, o[k], clip(e[k])));
    end
    check(saturated == sat, "saturation flag");
    if (mode == 1 && p > 0)
      check(roughness(o) < roughness(v) / 4, $sformatf("passes %0d: roughness %0d not well below %0d", p, roughness(o), roughness(v)));
  endtask

  initial begin
    load = 0; passes = '0;
    for (int k = 0; k < DIM; k++) din[k] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int m = 0; m < 4; m++) begin
      run(0, m);
      run(1, m);
      run(5, m);
      run(15, m);
      run(int'($urandom_range(15)), m);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
