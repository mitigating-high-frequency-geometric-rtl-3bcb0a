// tb_threshold_engine: presents projections for all neurons (random order of
// gaps, random values around tau, and values exactly at tau) and checks the
// code bits y_i = (p_i >= tau), the active count and the active list; then
// checks that clear empties everything. Runs with tau = 10, 100 and a
// negative tau.
module tb_threshold_engine;
  import sparse_pkg::*;

  localparam int unsigned NW = $clog2(NEURONS);
  localparam int unsigned CNTW = $clog2(NEURONS + 1);

  logic clk = 1'b0, rst_n = 1'b0;
  logic clear;
  logic signed [PROJ_W-1:0] tau, in_proj;
  logic in_valid;
  logic [NW-1:0] in_idx, list_rd_idx, list_rd_data;
  logic [NEURONS-1:0] code;
  logic [CNTW-1:0] active_count;

  int checks = 0, failures = 0;

  threshold_engine dut (.*);

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

  task automatic run(int t);
    bit exp_y [NEURONS];
    int exp_list [$];
    tau = PROJ_W'(t);
    clear = 1;
    @(negedge clk);
    clear = 0;
    check(active_count == 0 && code == '0, "cleared");
    for (int i = 0; i < NEURONS; i++) begin
      int p;
      case ($urandom_range(3))
        0: p = t;                          // exactly at tau: fires
        1: p = t - 1;                      // just below: silent
        default: p = t + int'($urandom_range(400)) - 200;
      endcase
      // gaps between projections
      in_valid = 0;
      repeat ($urandom_range(2)) @(negedge clk);
      in_valid = 1; in_idx = NW'(i); in_proj = PROJ_W'(p);
      exp_y[i] = (p >= t);
      if (exp_y[i]) exp_list.push_back(i);
      @(negedge clk);
    end
    in_valid = 0;
    @(negedge clk);
    check(int'(active_count) == exp_list.size(), $sformatf("count %0d exp %0d", active_count, exp_list.size()));
    for (int i = 0; i < NEURONS; i++)
      check(code[i] == exp_y[i], $sformatf("tau %0d bit %0d", t, i));
    foreach (exp_list[j]) begin
      list_rd_idx = NW'(j);
      #1;
      check(int'(list_rd_data) == exp_list[j], $sformatf("list %0d: %0d exp %0d", j, list_rd_data, exp_list[j]));
    end
    @(negedge clk);
  endtask

  initial begin
    clear = 0; in_valid = 0; in_idx = '0; in_proj = '0; tau = '0; list_rd_idx = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run(10);
    run(100);
    run(-5000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
