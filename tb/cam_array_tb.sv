// cam_array_tb -- self-checking testbench of the CAM array.
// Writes distinct random keys into part of the array, then searches for
// stored keys (one-hot match line at the right row, exactly two clock edges
// after the request), for absent keys (no match line), back-to-back searches
// (one per cycle), masked searches, and searches after clear (no match).
// A second, 2-row by 4-bit instance replays the compare example of the
// publication: rows '0110' and '0101' searched with '0110' match row 0 only.
module cam_array_tb;
  localparam int unsigned H  = 512;
  localparam int unsigned IW = 32;
  localparam int unsigned N  = 390;   // largest B of the evaluation

  logic                 clk = 0, rst_n = 0;
  logic                 clear = 0, wr_en = 0, search_en = 0;
  logic [$clog2(H)-1:0] wr_row = '0;
  logic [IW-1:0]        wr_key = '0, search_key = '0, search_mask = '1;
  logic [H-1:0]         ml;
  logic                 ml_valid;
  int checks = 0, failures = 0;
  logic [IW-1:0] keys [N];

  cam_array #(.H(H), .IW(IW)) dut (.*);

  // Small instance for the 4-bit example.
  logic       s_wr_en = 0, s_search_en = 0;
  logic [0:0] s_wr_row = '0;
  logic [3:0] s_wr_key = '0, s_key = '0;
  logic [1:0] s_ml;
  logic       s_ml_valid;
  cam_array #(.H(2), .IW(4)) dut_small (
    .clk, .rst_n, .clear(1'b0), .wr_en(s_wr_en), .wr_row(s_wr_row), .wr_key(s_wr_key),
    .search_en(s_search_en), .search_key(s_key), .search_mask(4'hF),
    .ml(s_ml), .ml_valid(s_ml_valid));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_ml(input logic [H-1:0] exp_ml, input string what);
    checks++;
    if (!ml_valid || ml !== exp_ml) begin
      failures++;
      $display("FAIL %s: ml_valid=%0b ml=%h expected %h", what, ml_valid, ml, exp_ml);
    end
  endtask

  // Search a key and check the match lines two edges later.
  task automatic search(input logic [IW-1:0] key, input logic [H-1:0] exp_ml, input string what);
    @(negedge clk); search_en = 1; search_key = key;
    @(negedge clk); search_en = 0;
    checks++;
    if (ml_valid) begin failures++; $display("FAIL %s: match lines one cycle early", what); end
    @(negedge clk);
    expect_ml(exp_ml, what);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) keys[i] = {$urandom} * 2 + 1;   // odd keys
    for (int i = 0; i < N; i++) begin
      @(negedge clk); wr_en = 1; wr_row = i[$clog2(H)-1:0]; wr_key = keys[i];
    end
    @(negedge clk); wr_en = 0;
    // Stored keys.
    for (int i = 0; i < N; i += 7) search(keys[i], H'(1) << i, "stored key");
    search(keys[N-1], H'(1) << (N - 1), "last key");
    // Absent keys: even numbers were never written.
    repeat (20) search({$urandom} * 2, '0, "absent key");
    // Back-to-back: one search per cycle, results one per cycle.
    @(negedge clk); search_en = 1; search_key = keys[3];
    @(negedge clk); search_key = keys[200];
    @(negedge clk); search_key = 32'd0; expect_ml(H'(1) << 3, "pipelined 1");
    @(negedge clk); search_en = 0;      expect_ml(H'(1) << 200, "pipelined 2");
    @(negedge clk);                     expect_ml('0, "pipelined 3");
    // Masked compare: only the low 16 bits take part.
    @(negedge clk); search_en = 1; search_key = keys[8] ^ 32'hFFFF_0000; search_mask = 32'h0000_FFFF;
    @(negedge clk); search_en = 0; search_mask = '1;
    @(negedge clk);
    checks++;
    if (!ml_valid || !ml[8]) begin failures++; $display("FAIL masked compare missed row 8"); end
    search(keys[8] ^ 32'hFFFF_0000, '0, "same key unmasked");
    // Clear invalidates everything.
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    search(keys[5], '0, "after clear");
    // Re-write one row after clear: only it matches.
    @(negedge clk); wr_en = 1; wr_row = 9'd17; wr_key = keys[5];
    @(negedge clk); wr_en = 0;
    search(keys[5], H'(1) << 17, "rewritten row");
    search(keys[6], '0, "other row stays cleared");
    // 4-bit example: '0110' in row 0, '0101' in row 1, key '0110'.
    @(negedge clk); s_wr_en = 1; s_wr_row = 1'b0; s_wr_key = 4'b0110;
    @(negedge clk); s_wr_row = 1'b1; s_wr_key = 4'b0101;
    @(negedge clk); s_wr_en = 0; s_search_en = 1; s_key = 4'b0110;
    @(negedge clk); s_search_en = 0;
    @(negedge clk);
    checks++;
    if (!s_ml_valid || s_ml !== 2'b01) begin failures++; $display("FAIL 4-bit example: ml=%b", s_ml); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
