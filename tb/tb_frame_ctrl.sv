// tb_frame_ctrl: stands in for the three stage engines (each answers its
// start pulse with a done pulse after a random delay) and checks the phase
// sequence IDLE -> PROJECT -> RECON -> FILTER -> OUTPUT -> IDLE, that every
// start pulse lasts one clock and comes one clock after the previous done,
// that start is ignored while busy, and that the DIM output samples leave in
// order under random back-pressure with frame_done on the last one.
module tb_frame_ctrl;
  import sparse_pkg::*;

  localparam int unsigned IW = $clog2(DIM);

  logic clk = 1'b0, rst_n = 1'b0;
  logic start, idle;
  phase_e phase;
  logic proj_start, proj_done, recon_start, recon_done, filt_load, filt_done;
  logic clear_code, out_valid, out_ready, frame_done;
  logic [IW-1:0] out_idx;

  int checks = 0, failures = 0;

  frame_ctrl dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
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

  // Wait for a one-clock pulse, then answer with done after `lat` clocks.
  task automatic stage(ref logic go, ref logic fin, input phase_e ph, input string name);
    int lat, w;
    w = 0;
    while (!go && w < 100) begin @(negedge clk); w++; end
    check(go && phase == ph, $sformatf("%s start pulse in phase %0d", name, phase));
    check(w == 0, $sformatf("%s start pulse %0d clocks late", name, w));
    @(negedge clk);
    check(!go, $sformatf("%s start lasts one clock", name));
    lat = $urandom_range(6);
    repeat (lat) begin
      start = 1;  // must be ignored while busy
      @(negedge clk);
      start = 0;
      check(phase == ph, $sformatf("%s phase held", name));
    end
    fin = 1;
    @(negedge clk);
    fin = 0;
  endtask

  task automatic frame();
    int n, w;
    check(idle, "idle before frame");
    start = 1;
    @(posedge clk); #1;
    start = 0;
    check(clear_code, "code cleared with the projection start");
    @(negedge clk);
    stage(proj_start, proj_done, PH_PROJECT, "projection");
    stage(recon_start, recon_done, PH_RECON, "reconstruction");
    stage(filt_load, filt_done, PH_FILTER, "filter");
    n = 0; w = 0;
    while (n < DIM && w < 2000) begin
      out_ready = ($urandom_range(3) != 0);
      #1;
      check(out_valid && phase == PH_OUTPUT, "output valid");
      check(int'(out_idx) == n, $sformatf("out_idx %0d exp %0d", out_idx, n));
      @(posedge clk); #1;
      if (out_ready) begin
        check(frame_done == (n == DIM - 1), "frame_done on last sample only");
        n++;
      end
      @(negedge clk);
      w++;
    end
    out_ready = 0;
    check(n == DIM, "all samples sent");
    check(idle && !out_valid, "idle after frame");
  endtask

  // ensure the engine dones really are single pulses in the right phase
  initial begin
    start = 0; proj_done = 0; recon_done = 0; filt_done = 0; out_ready = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(idle && phase == PH_IDLE, "reset state");
    for (int f = 0; f < 5; f++) frame();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
