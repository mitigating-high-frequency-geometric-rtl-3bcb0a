// tb_recon_accum: reconstructs from active lists of several lengths (empty,
// one neuron, random, all 1024 neurons with extreme entries) against a
// dictionary held in the testbench, and checks every scaled output sample
// floor(sum / 2^shift) and the time start -> done, A*DIM/LANES + 1 clocks
// for A listed neurons, which shows that unlisted neurons cost no clock.
module tb_recon_accum;
  import sparse_pkg::*;
  import sparse_ref_pkg::*;

  localparam int unsigned CHUNKS = DIM / LANES;
  localparam int unsigned NW = $clog2(NEURONS);
  localparam int unsigned CNTW = $clog2(NEURONS + 1);
  localparam int unsigned AW = $clog2(NEURONS * CHUNKS);

  logic clk = 1'b0, rst_n = 1'b0;
  logic start, busy, done;
  logic [CNTW-1:0] list_count;
  logic [SHIFT_W-1:0] c_shift;
  logic [NW-1:0] list_rd_idx, list_rd_data;
  logic mem_en;
  logic [AW-1:0] mem_addr;
  logic [LANES*DATA_W-1:0] mem_rdata;
  logic signed [ACC_W-1:0] recon [DIM];

  int checks = 0, failures = 0;
  byte d [NEURONS][DIM];
  int  list [NEURONS];

  recon_accum dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always_ff @(posedge clk) begin
    if (mem_en) begin
      for (int l = 0; l < LANES; l++)
        mem_rdata[l*DATA_W +: DATA_W] <= d[int'(mem_addr) / CHUNKS][(int'(mem_addr) % CHUNKS) * LANES + l];
    end
  end
  assign list_rd_data = NW'(list[int'(list_rd_idx)]);

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  task automatic run(int count, int shift, int mode);
    int t;
    vec_t sum;
    // dictionary
    for (int i = 0; i < NEURONS; i++)
      for (int k = 0; k < DIM; k++)
        d[i][k] = (mode == 1) ? -128 : (mode == 2) ? 127 : byte'($urandom);
    // a list of distinct neurons in increasing order
    begin
      int n = 0;
      for (int i = 0; i < NEURONS && n < count; i++)
        if ($urandom_range(NEURONS - 1) < count * 2 || NEURONS - i <= count - n) list[n++] = i;
    end
    for (int k = 0; k < DIM; k++) begin
      sum[k] = 0;
      for (int j = 0; j < count; j++) sum[k] += d[list[j]][k];
    end
    list_count = CNTW'(count); c_shift = SHIFT_W'(shift);
    @(negedge clk);
    start = 1;
    @(posedge clk);
    #1 start = 0;
    t = 0;
    while (!done && t < NEURONS * CHUNKS + 50) begin
      @(posedge clk); t++; #1;
    end
    check(t == count * CHUNKS + 1, $sformatf("count %0d: done after %0d clocks", count, t));
    for (int k = 0; k < DIM; k++)
      check(int'(recon[k]) == floor_div(sum[k], 2**shift),
            $sformatf("count %0d shift %0d k %0d: %0d exp %0d", count, shift, k, recon[k], floor_div(sum[k], 2**shift)));
    // a new shift changes the scale of the same sums
    c_shift = SHIFT_W'(shift + 1);
    #1;
    for (int k = 0; k < DIM; k++)
      check(int'(recon[k]) == floor_div(sum[k], 2**(shift + 1)), "rescaled");
  endtask

  initial begin
    start = 0; list_count = '0; c_shift = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(0, 0, 0);
    run(1, 0, 0);
    run(37, 3, 0);
    run(484, 4, 0);
    run(195, 2, 0);
    run(NEURONS, 0, 1);   // largest negative sum
    run(NEURONS, 0, 2);   // largest positive sum
    run(500, 9, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
