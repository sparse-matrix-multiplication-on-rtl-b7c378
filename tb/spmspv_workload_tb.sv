// spmspv_workload_tb -- evaluation-sized workload on the accelerator at its
// default size (K = 15, H = 512).
//
// The evaluation multiplies sparse matrices of 10^5 to 8*10^6 nonzeros by a
// sparse vector of at most 390 nonzeros.  This testbench generates the
// smallest such case: a random A of 100,000 nonzeros spread over rows of 1 to
// 40 nonzeros (some rows empty), and a B of 390 nonzeros; half of A's column
// indices are drawn from B's index set so that many lanes find a partner.
// Values are small integers, so every C_j is exact.  It checks every C_j, that
// the main stage takes no more cycles than sum ceil(nzr_j / K) plus a small
// overhead, and prints the achieved index-matching and floating-point rates
// per cycle (peak: K*H compares and 2K FLOPs per cycle).
module spmspv_workload_tb;
  import spmspv_pkg::*;
  localparam int unsigned K  = K_DEF;
  localparam int unsigned H  = H_DEF;
  localparam int unsigned IW = IW_DEF;
  localparam int unsigned AW = AW_DEF;
  localparam int unsigned LW = 32;
  localparam int NNZ_A  = 100000;
  localparam int NNZ_B  = 390;
  localparam int NCOL   = 200000;
  localparam int A_BASE = 1024;
  localparam int MEMSZ  = A_BASE + NNZ_A + 64;

  logic                   clk = 0, rst_n = 0;
  logic                   cmd_valid = 0, cmd_ready, done, busy;
  logic [1:0]             cmd = 2'd0;
  logic [AW-1:0]          b_base = '0;
  logic [$clog2(H+1)-1:0] b_nnz = '0;
  logic                   rd_valid = 0, rd_ready, rd_last = 0;
  logic [IW-1:0]          rd_row = '0;
  logic [AW-1:0]          rd_ptr = '0;
  logic [LW-1:0]          rd_nzr = '0;
  logic                   mem_rd_en;
  logic [AW-1:0]          mem_rd_addr;
  logic [$clog2(K+1)-1:0] mem_rd_cnt;
  logic [IW-1:0]          mem_rd_idx [K];
  logic [31:0]            mem_rd_val [K];
  logic                   c_valid, zero_drop;
  logic [IW-1:0]          c_row;
  logic [31:0]            c_val;
  logic [K-1:0]           lane_hit;

  int checks = 0, failures = 0;

  spmspv_accel dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Memory: 1-cycle read latency, K elements per read.
  logic [IW-1:0] mem_idx [MEMSZ];
  logic [31:0]   mem_val [MEMSZ];
  always @(posedge clk) begin
    for (int l = 0; l < int'(K); l++) begin
      if (mem_rd_en && l < int'(mem_rd_cnt)) begin
        mem_rd_idx[l] <= mem_idx[int'(mem_rd_addr) + l];
        mem_rd_val[l] <= mem_val[int'(mem_rd_addr) + l];
      end else begin
        mem_rd_idx[l] <= '1;
        mem_rd_val[l] <= 32'h7FC00000;
      end
    end
  end

  // Small integer <-> binary32, exact below 2^24.
  function automatic logic [31:0] i2f(input int v);
    int a, e;
    if (v == 0) return 32'd0;
    a = (v < 0) ? -v : v;
    e = 0;
    while ((a >> e) > 1) e++;
    return {(v < 0), 8'(127 + e), 23'((a << (23 - e)) & 32'h7FFFFF)};
  endfunction
  function automatic int f2i(input logic [31:0] f);
    int e, m;
    if (f[30:23] == 0) return 0;
    e = int'(f[30:23]) - 127;
    m = {1'b1, f[22:0]};
    if (e < 0) return 32'h7FFFFFFF;
    m = (e >= 23) ? (m << (e - 23)) : (m >> (23 - e));
    return f[31] ? -m : m;
  endfunction

  int c_seen [int];
  int hits = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (c_valid) c_seen[int'(c_row)] = f2i(c_val);
      hits += $countones(lane_hit);
    end
  end

  initial begin
    int bcol [NNZ_B];
    int bval [int];
    int cexp [int];
    int a_ptr [$], a_nzr [$];
    int p, nzr, s, col, v, slots, t0, cyc, nrows, bad;
    bit used [int];

    for (int l = 0; l < int'(K); l++) begin mem_rd_idx[l] = '0; mem_rd_val[l] = '0; end
    // B: 390 distinct indices.
    for (int i = 0; i < NNZ_B; i++) begin
      do col = $urandom_range(NCOL - 1, 0); while (bval.exists(col));
      bcol[i] = col;
      bval[col] = $urandom_range(30, 1);
      mem_idx[i] = IW'(col);
      mem_val[i] = i2f(bval[col]);
    end
    // A: rows of 0..40 nonzeros until 100,000 nonzeros are placed.
    p = A_BASE;
    while (p < A_BASE + NNZ_A) begin
      nzr = ($urandom_range(19, 0) == 0) ? 0 : $urandom_range(40, 1);
      if (p + nzr > A_BASE + NNZ_A) nzr = A_BASE + NNZ_A - p;
      used.delete();
      s = 0;
      for (int e = 0; e < nzr; e++) begin
        do col = ($urandom_range(1, 0) == 1) ? bcol[$urandom_range(NNZ_B - 1, 0)]
                                             : $urandom_range(NCOL - 1, 0);
        while (used.exists(col));
        used[col] = 1;
        v = $urandom_range(40, 1) * (($urandom_range(1, 0) == 1) ? 1 : -1);
        mem_idx[p + e] = IW'(col);
        mem_val[p + e] = i2f(v);
        if (bval.exists(col)) s += v * bval[col];
      end
      if (nzr > 0) cexp[a_ptr.size()] = s;
      a_ptr.push_back(p);
      a_nzr.push_back(nzr);
      p += nzr;
    end
    nrows = a_ptr.size();
    slots = 0;
    foreach (a_nzr[j]) slots += (a_nzr[j] == 0) ? 1 : (a_nzr[j] + K - 1) / K;

    repeat (3) @(posedge clk);
    rst_n = 1;
    // Initialization.
    @(negedge clk); cmd_valid = 1; cmd = 2'(CMD_INIT); b_base = '0; b_nnz = $bits(b_nnz)'(NNZ_B);
    @(negedge clk); cmd_valid = 0;
    while (!done) @(posedge clk);
    // Main stage.
    @(negedge clk); cmd_valid = 1; cmd = 2'(CMD_MAIN);
    @(negedge clk); cmd_valid = 0;
    t0 = $time;
    for (int j = 0; j < nrows; j++) begin
      rd_valid = 1; rd_row = IW'(j); rd_ptr = AW'(a_ptr[j]); rd_nzr = LW'(a_nzr[j]);
      rd_last = (j == nrows - 1);
      do @(posedge clk); while (!rd_ready);
      @(negedge clk);
    end
    rd_valid = 0;
    while (!done) @(posedge clk);
    cyc = ($time - t0) / 10;

    bad = 0;
    foreach (cexp[r]) begin
      checks++;
      if (cexp[r] == 0 ? c_seen.exists(r) : (!c_seen.exists(r) || c_seen[r] != cexp[r])) begin
        failures++;
        if (bad++ < 10) $display("FAIL row %0d: C=%0d expected %0d", r, c_seen.exists(r) ? c_seen[r] : 0, cexp[r]);
      end
    end
    checks++;
    foreach (c_seen[r]) if (!cexp.exists(r) || cexp[r] == 0) begin
      failures++; $display("FAIL unexpected row %0d", r);
    end
    checks++;
    if (cyc > slots + 10) begin
      failures++; $display("FAIL main stage %0d cycles, %0d group slots", cyc, slots);
    end
    checks++;
    if (hits == 0) begin failures++; $display("FAIL no CAM hit"); end
    $display("workload: %0d rows, %0d nonzeros of A, %0d of B; %0d rows stored",
             nrows, NNZ_A, NNZ_B, c_seen.size());
    $display("main stage %0d cycles (%0d group slots); %0d products had a partner",
             cyc, slots, hits);
    $display("per cycle: %0.1f FLOPs (peak %0d), %0.0f index compares (peak %0d)",
             2.0 * NNZ_A / cyc, 2 * K, real'(NNZ_A) * H / cyc, K * H);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
