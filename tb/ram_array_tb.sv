// ram_array_tb -- self-checking testbench of the RAM array.
// Fills the array with random words, then reads with one-hot word lines (the
// selected word, one edge later), with no word line (0, the no-match case) and
// back to back, and checks rd_valid timing.
module ram_array_tb;
  localparam int unsigned H  = 512;
  localparam int unsigned DW = 32;

  logic                 clk = 0, rst_n = 0;
  logic                 wr_en = 0, rd_en = 0;
  logic [$clog2(H)-1:0] wr_row = '0;
  logic [DW-1:0]        wr_data = '0;
  logic [H-1:0]         word_lines = '0;
  logic [DW-1:0]        rd_data;
  logic                 rd_valid;
  logic [DW-1:0]        model [H];
  int checks = 0, failures = 0;

  ram_array #(.H(H), .DW(DW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_rd(input logic [DW-1:0] exp_d, input string what);
    checks++;
    if (!rd_valid || rd_data !== exp_d) begin
      failures++;
      $display("FAIL %s: valid=%0b data=%h expected %h", what, rd_valid, rd_data, exp_d);
    end
  endtask

  initial begin
    int r, r2;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < H; i++) begin
      @(negedge clk); wr_en = 1; wr_row = i[$clog2(H)-1:0]; wr_data = $urandom; model[i] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    repeat (200) begin
      r = $urandom_range(H - 1, 0);
      @(negedge clk); rd_en = 1; word_lines = H'(1) << r;
      @(negedge clk); rd_en = 0; word_lines = '0;
      expect_rd(model[r], "selected word");
    end
    // No word line raised: the word read is 0.
    @(negedge clk); rd_en = 1; word_lines = '0;
    @(negedge clk); rd_en = 0;
    expect_rd('0, "no match reads 0");
    // Back to back, one read per cycle.
    r = 11; r2 = 500;
    @(negedge clk); rd_en = 1; word_lines = H'(1) << r;
    @(negedge clk); word_lines = H'(1) << r2; expect_rd(model[r], "b2b 1");
    @(negedge clk); rd_en = 0; word_lines = '0; expect_rd(model[r2], "b2b 2");
    @(negedge clk);
    checks++;
    if (rd_valid) begin failures++; $display("FAIL rd_valid stays high"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
