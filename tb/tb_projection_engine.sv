// tb_projection_engine: runs the projection engine at full size against a
// dictionary and input held in the testbench, and checks every projection
// (D^T x)_i, the neuron order, the first-result latency (DIM/LANES + 1
// clocks) and the total time (NEURONS*DIM/LANES + 1 clocks from start to
// done). Three frames: random data, the extreme values (D = -128,
// x = -127: largest positive sum) and mixed extremes.
module tb_projection_engine;
  import sparse_pkg::*;

  localparam int unsigned CHUNKS = DIM / LANES;
  localparam int unsigned CW = $clog2(CHUNKS);
  localparam int unsigned NW = $clog2(NEURONS);
  localparam int unsigned AW = $clog2(NEURONS * CHUNKS);

  logic clk = 1'b0, rst_n = 1'b0;
  logic start, busy, done;
  logic mem_en;
  logic [AW-1:0] mem_addr;
  logic [LANES*DATA_W-1:0] mem_rdata, x_chunk;
  logic [CW-1:0] x_chunk_idx;
  logic out_valid;
  logic [NW-1:0] out_idx;
  logic signed [PROJ_W-1:0] out_proj;

  int checks = 0, failures = 0;
  byte d [NEURONS][DIM];
  byte x [DIM];

  projection_engine dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // dictionary: registered read, one clock
  always_ff @(posedge clk) begin
    if (mem_en) begin
      for (int l = 0; l < LANES; l++)
        mem_rdata[l*DATA_W +: DATA_W] <= d[int'(mem_addr) / CHUNKS][(int'(mem_addr) % CHUNKS) * LANES + l];
    end
  end
  // input: combinational read
  always_comb begin
    for (int l = 0; l < LANES; l++) x_chunk[l*DATA_W +: DATA_W] = x[int'(x_chunk_idx) * LANES + l];
  end

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  task automatic run_frame(int mode);
    int n_out, t, t_first, t_done;
    for (int k = 0; k < DIM; k++)
      x[k] = (mode == 0) ? byte'($urandom_range(254) - 127) : (mode == 1) ? -127 : ((k % 2) ? 127 : -127);
    for (int i = 0; i < NEURONS; i++)
      for (int k = 0; k < DIM; k++)
        d[i][k] = (mode == 0) ? byte'($urandom) : (mode == 1) ? -128 : (((k + i) % 2) ? -128 : 127);
    @(negedge clk);
    start = 1;
    @(posedge clk);
    #1 start = 0;
    n_out = 0; t = 0; t_first = -1; t_done = -1;
    while (t_done < 0 && t < NEURONS * CHUNKS + 100) begin
      @(posedge clk);
      t++;
      #1;
      if (out_valid) begin
        int e;
        e = 0;
        for (int k = 0; k < DIM; k++) e += int'(d[n_out][k]) * int'(x[k]);
        if (t_first < 0) t_first = t;
        check(int'(out_idx) == n_out, $sformatf("order: idx %0d exp %0d", out_idx, n_out));
        check(int'(out_proj) == e, $sformatf("neuron %0d: got %0d exp %0d", n_out, out_proj, e));
        n_out++;
      end
      if (done) t_done = t;
    end
    check(n_out == NEURONS, $sformatf("results %0d", n_out));
    check(t_first == CHUNKS + 1, $sformatf("first result after %0d clocks", t_first));
    check(t_done == NEURONS * CHUNKS + 1, $sformatf("done after %0d clocks", t_done));
    @(posedge clk); #1;
    check(!busy, "idle after done");
  endtask

  initial begin
    start = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_frame(0);
    run_frame(1);
    run_frame(2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
