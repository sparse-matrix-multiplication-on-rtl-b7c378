// fp_accumulator_tb -- self-checking testbench of the accumulator ACC/REG.
// Feeds rows of 1 to 5 groups of K products back to back (and with gaps) and
// checks each row's C value, row number and the one-edge latency against a
// reference that forms the same sums with the reference binary32 addition in
// the same tree order (REG at leaf 0, product i at leaf i+1).  Rows summing to
// zero must not be stored (zero_drop instead); small-integer rows check the
// sum exactly regardless of order.
module fp_accumulator_tb;
  import fp_ref_pkg::*;
  localparam int unsigned K  = 15;
  localparam int unsigned RW = 32;
  localparam int unsigned LEAVES = 16;

  logic          clk = 0, rst_n = 0;
  logic          in_valid = 0, first = 0, last = 0;
  logic [RW-1:0] row = '0;
  logic [31:0]   prod [K];
  logic          c_valid, zero_drop;
  logic [RW-1:0] c_row;
  logic [31:0]   c_val, reg_q;
  int checks = 0, failures = 0, stored = 0, dropped = 0;

  fp_accumulator #(.K(K), .RW(RW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] fadd(input logic [31:0] a, input logic [31:0] b);
    if (a[30:23] == 8'd0 && b[30:23] == 8'd0) return {a[31] & b[31], 31'd0};
    return r2f(f2r(a) + f2r(b));
  endfunction

  function automatic logic [31:0] tree(input logic [31:0] regv, input logic [31:0] p [K]);
    logic [31:0] v [LEAVES];
    v[0] = regv;
    for (int i = 1; i < LEAVES; i++) v[i] = (i <= K) ? p[i-1] : 32'd0;
    for (int n = LEAVES / 2; n >= 1; n /= 2)
      for (int i = 0; i < n; i++) v[i] = fadd(v[2*i], v[2*i+1]);
    return v[0];
  endfunction

  logic [31:0] exp_val;
  logic [RW-1:0] exp_row;
  logic        exp_due = 0;

  // Checker: one edge after a last group, C must (or must not) appear.
  always @(posedge clk) begin
    #1;
    if (exp_due) begin
      checks++;
      if (exp_val[30:0] == 31'd0) begin
        if (c_valid || !zero_drop) begin failures++; $display("FAIL zero row %0d stored", exp_row); end
        dropped++;
      end else begin
        if (!c_valid || c_val !== exp_val || c_row !== exp_row) begin
          failures++;
          $display("FAIL row %0d: valid=%0b C=%h row=%0d expected %h", exp_row, c_valid, c_val, c_row, exp_val);
        end
        stored++;
      end
    end else if (c_valid) begin
      checks++; failures++; $display("FAIL unexpected C");
    end
  end

  // Drive one row of `groups` groups; mode 0 random, 1 small integers, 2 cancelling.
  task automatic drive_row(input int j, input int groups, input int mode, input bit gap);
    logic [31:0] acc;
    logic [31:0] p [K];
    acc = 32'd0;
    for (int g = 0; g < groups; g++) begin
      @(negedge clk);
      exp_due = 0;
      for (int i = 0; i < K; i++) begin
        case (mode)
          0: p[i] = rand_fp(10);
          1: p[i] = r2f(real'($urandom_range(200, 0)) - 100.0);
          default: p[i] = (i < 2) ? ((i == 0) ? 32'h40400000 : 32'hC0400000) : 32'd0;
        endcase
        prod[i] = p[i];
      end
      acc = tree((g == 0) ? 32'd0 : acc, p);
      in_valid = 1; first = (g == 0); last = (g == groups - 1); row = RW'(j);
      if (last) begin
        @(posedge clk);
        exp_val = acc; exp_row = RW'(j); exp_due = 1;
      end
      if (gap && !last) begin @(negedge clk); in_valid = 0; end
    end
  endtask

  initial begin
    for (int i = 0; i < K; i++) prod[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int j = 0; j < 300; j++) drive_row(j, $urandom_range(5, 1), (j % 7 == 3) ? 2 : (j % 2), (j % 5 == 0));
    @(negedge clk); in_valid = 0; exp_due = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (stored == 0 || dropped == 0) begin failures++; $display("FAIL stored=%0d dropped=%0d", stored, dropped); end
    $display("rows stored=%0d dropped=%0d", stored, dropped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
