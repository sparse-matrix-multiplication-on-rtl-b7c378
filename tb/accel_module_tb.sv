// accel_module_tb -- self-checking testbench of one acceleration module.
// Stores a sparse vector B (the worked example's 98, 40, 32 at indices 4, 10,
// 12, then random ones), streams A elements one per cycle and checks each
// singleton product against the reference product of the A value and the B
// value of the same index (0 when B has no such index), the hit flag, and the
// four-cycle latency.
module accel_module_tb;
  import fp_ref_pkg::*;
  localparam int unsigned H  = 512;
  localparam int unsigned IW = 32;
  localparam int unsigned LAT = 4;

  logic                 clk = 0, rst_n = 0;
  logic                 b_clear = 0, b_wr_en = 0, a_valid = 0;
  logic [$clog2(H)-1:0] b_wr_row = '0;
  logic [IW-1:0]        b_wr_idx = '0, a_idx = '0;
  logic [31:0]          b_wr_val = '0, a_val = '0;
  logic                 p_valid, p_hit;
  logic [31:0]          p;
  int checks = 0, failures = 0;
  int cycle = 0;

  accel_module #(.H(H), .IW(IW)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference copy of B.
  logic [31:0] bref [logic [IW-1:0]];

  // Expected outputs queued by issue cycle.
  typedef struct { int due; logic [31:0] p; logic hit; } exp_t;
  exp_t q [$];

  task automatic write_b(input int row, input logic [IW-1:0] idx, input logic [31:0] val);
    @(negedge clk); b_wr_en = 1; b_wr_row = row[$clog2(H)-1:0]; b_wr_idx = idx; b_wr_val = val;
    bref[idx] = val;
    @(negedge clk); b_wr_en = 0;
  endtask

  task automatic send_a(input logic [IW-1:0] idx, input logic [31:0] val);
    exp_t e;
    logic [31:0] bv;
    bv    = bref.exists(idx) ? bref[idx] : 32'd0;
    e.due = cycle + LAT;
    e.p   = r2f(f2r(val) * f2r(bv));
    e.hit = bref.exists(idx);
    q.push_back(e);
    a_valid = 1; a_idx = idx; a_val = val;
  endtask

  // Checker: at every posedge, a due product must be present.
  always @(posedge clk) begin
    #1;
    if (q.size() > 0 && q[0].due == cycle) begin
      checks++;
      if (!p_valid || p !== q[0].p || p_hit !== q[0].hit) begin
        failures++;
        $display("FAIL cycle %0d: valid=%0b p=%h hit=%0b expected p=%h hit=%0b",
                 cycle, p_valid, p, p_hit, q[0].p, q[0].hit);
      end
      void'(q.pop_front());
    end else if (p_valid) begin
      checks++;
      failures++;
      $display("FAIL cycle %0d: unexpected product %h", cycle, p);
    end
  end

  initial begin
    logic [IW-1:0] ids [300];
    repeat (2) @(posedge clk);
    rst_n = 1;
    // Worked example: B has 98, 40, 32 at indices 4, 10, 12.
    write_b(0, 4, 32'h42C40000);
    write_b(1, 10, 32'h42200000);
    write_b(2, 12, 32'h42000000);
    @(negedge clk); send_a(4, 32'h42600000);     // 56 * 98
    @(negedge clk); send_a(10, 32'h41800000);    // 16 * 40
    @(negedge clk); send_a(12, 32'h429C0000);    // 78 * 32
    @(negedge clk); send_a(20, 32'h41400000);    // 12 * (no B at 20) = 0
    @(negedge clk); a_valid = 0;
    repeat (6) @(negedge clk);
    // New random B after clear.
    @(negedge clk); b_clear = 1;
    @(negedge clk); b_clear = 0;
    bref.delete();
    for (int i = 0; i < 300; i++) begin
      ids[i] = {$urandom} & 32'h0000_0FFF | 32'(i) << 12;   // unique
      write_b(i, ids[i], rand_fp(20));
    end
    // Stream: hits and misses back to back, with bubbles.
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      if ($urandom_range(9, 0) == 0) a_valid = 0;
      else if ($urandom_range(1, 0) == 1) send_a(ids[$urandom_range(299, 0)], rand_fp(20));
      else send_a($urandom | 32'h8000_0000, rand_fp(20));
    end
    @(negedge clk); a_valid = 0;
    repeat (8) @(negedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL %0d products missing", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
