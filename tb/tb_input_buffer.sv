// tb_input_buffer: fills the input vector with random samples (including the
// value -128, which must be stored as -127) and reads every chunk back.
module tb_input_buffer;
  import sparse_pkg::*;

  localparam int unsigned CHUNKS = DIM / LANES;
  localparam int unsigned IW = $clog2(DIM);
  localparam int unsigned CW = $clog2(CHUNKS);

  logic clk = 1'b0;
  logic wr_en;
  logic [IW-1:0] wr_idx;
  logic signed [DATA_W-1:0] wr_data;
  logic [CW-1:0] rd_chunk;
  logic [LANES*DATA_W-1:0] rd_data;
  int checks = 0, failures = 0;
  int model [DIM];

  input_buffer dut (.clk, .wr_en, .wr_idx, .wr_data, .rd_chunk, .rd_data);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fill_and_check(int mode);
    wr_en = 1;
    for (int i = 0; i < DIM; i++) begin
      int v;
      case (mode)
        0: v = $urandom_range(255) - 128;
        1: v = (i % 2) ? -128 : 127;
        default: v = i - 64;
      endcase
      wr_idx = IW'(i); wr_data = DATA_W'(v);
      model[i] = (v < -127) ? -127 : v;
      @(negedge clk);
    end
    wr_en = 0;
    for (int c = 0; c < CHUNKS; c++) begin
      rd_chunk = CW'(c);
      #1;
      for (int l = 0; l < LANES; l++) begin
        int got;
        got = int'($signed(rd_data[l*DATA_W +: DATA_W]));
        checks++;
        if (got != model[c*LANES + l]) begin
          failures++;
          $display("FAIL mode %0d sample %0d: got %0d exp %0d", mode, c*LANES + l, got, model[c*LANES + l]);
        end
      end
    end
    @(negedge clk);
  endtask

  initial begin
    wr_en = 0; wr_idx = '0; wr_data = '0; rd_chunk = '0;
    @(negedge clk);
    fill_and_check(0);
    fill_and_check(1);
    fill_and_check(2);
    fill_and_check(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
