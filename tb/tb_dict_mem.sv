// tb_dict_mem: writes random words at random addresses of the dictionary
// store, reads them back and checks the one-clock read latency, that rdata
// holds while en is low, and that a read does not disturb the contents.
module tb_dict_mem;
  import sparse_pkg::*;

  localparam int unsigned DEPTH = NEURONS * DIM / LANES;
  localparam int unsigned WIDTH = LANES * DATA_W;
  localparam int unsigned AW    = $clog2(DEPTH);

  logic clk = 1'b0;
  logic en, we;
  logic [AW-1:0] addr;
  logic [WIDTH-1:0] wdata, rdata;
  int checks = 0, failures = 0;

  logic [WIDTH-1:0] model [int];
  logic [AW-1:0]    used [$];

  dict_mem dut (.clk, .en, .we, .addr, .wdata, .rdata);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [WIDTH-1:0] rand_word();
    logic [WIDTH-1:0] w;
    for (int i = 0; i < WIDTH / 32; i++) w[i*32 +: 32] = $urandom;
    return w;
  endfunction

  task automatic check(logic [WIDTH-1:0] exp, string what);
    checks++;
    if (rdata !== exp) begin
      failures++;
      $display("FAIL %s: got %h exp %h", what, rdata, exp);
    end
  endtask

  initial begin
    en = 0; we = 0; addr = '0; wdata = '0;
    @(negedge clk);
    // first and last word, then random ones
    for (int i = 0; i < 600; i++) begin
      logic [AW-1:0] a;
      a = (i == 0) ? '0 : (i == 1) ? AW'(DEPTH - 1) : AW'($urandom_range(DEPTH - 1));
      en = 1; we = 1; addr = a; wdata = rand_word();
      model[int'(a)] = wdata;
      used.push_back(a);
      @(negedge clk);
    end
    en = 0; we = 0;
    foreach (used[i]) begin
      en = 1; we = 0; addr = used[i];
      @(negedge clk);
      check(model[int'(used[i])], $sformatf("read %0d", used[i]));
      en = 0; addr = AW'($urandom);
      @(negedge clk);
      check(model[int'(used[i])], "hold with en=0");
    end
    // a write does not change rdata
    en = 1; we = 0; addr = used[0];
    @(negedge clk);
    en = 1; we = 1; addr = used[1]; wdata = ~model[int'(used[1])];
    model[int'(used[1])] = wdata;
    @(negedge clk);
    check(model[int'(used[0])], "rdata during write");
    en = 1; we = 0; addr = used[1];
    @(negedge clk);
    check(model[int'(used[1])], "overwritten word");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
