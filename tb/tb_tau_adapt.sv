// tb_tau_adapt: loads tau, then feeds frame results above, below and at the
// target with adaptation on and off, and checks every new tau against the
// rule tau +/- step (hold on a match), saturation at both ends of the range,
// and that a load wins over an update in the same clock.
module tb_tau_adapt;
  import sparse_pkg::*;

  localparam int unsigned CNTW = $clog2(NEURONS + 1);
  localparam int TMAX = 2**(PROJ_W-1) - 1;
  localparam int TMIN = -(2**(PROJ_W-1));

  logic clk = 1'b0, rst_n = 1'b0;
  logic tau_load, adapt_en, frame_done, raised, lowered;
  logic signed [PROJ_W-1:0] tau_in, tau;
  logic [CNTW-1:0] target_count, active_count;
  logic [PROJ_W-2:0] step;

  int checks = 0, failures = 0;
  int model;

  tau_adapt dut (.*);

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

  task automatic load(int v);
    tau_load = 1; tau_in = PROJ_W'(v);
    @(negedge clk);
    tau_load = 0;
    model = v;
    check(int'(tau) == v, $sformatf("load %0d got %0d", v, tau));
  endtask

  task automatic frame(int cnt, bit en);
    bit up, dn;
    adapt_en = en; active_count = CNTW'(cnt); frame_done = 1;
    @(negedge clk);
    frame_done = 0;
    up = en && cnt > int'(target_count);
    dn = en && cnt < int'(target_count);
    if (up) model = (longint'(model) + longint'(step) > TMAX) ? TMAX : model + int'(step);
    if (dn) model = (longint'(model) - longint'(step) < TMIN) ? TMIN : model - int'(step);
    check(int'(tau) == model, $sformatf("cnt %0d en %0d: tau %0d exp %0d", cnt, en, tau, model));
    check(raised == up && lowered == dn, "raised/lowered flags");
  endtask

  initial begin
    tau_load = 0; adapt_en = 0; frame_done = 0; tau_in = '0;
    target_count = CNTW'(200); active_count = '0; step = '0;
    repeat (2) @(negedge clk);
    check(tau == 0, "reset value");
    rst_n = 1;
    load(10);
    step = 7;
    frame(484, 0);      // adaptation off: no change
    frame(484, 1);      // too many active: raise
    frame(195, 1);      // too few: lower
    frame(200, 1);      // on target: hold
    for (int i = 0; i < 200; i++) frame($urandom_range(NEURONS), 1);
    // saturation at the top and bottom
    step = (PROJ_W-1)'(2**(PROJ_W-2));
    load(TMAX - 5);
    frame(1000, 1);
    frame(1000, 1);
    load(TMIN + 5);
    frame(0, 1);
    frame(0, 1);
    // load and update in the same clock: load wins
    adapt_en = 1; active_count = CNTW'(1000); frame_done = 1;
    load(-3);
    frame_done = 0;
    @(negedge clk);
    check(int'(tau) == -3, "load wins");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
