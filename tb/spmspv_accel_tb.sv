// spmspv_accel_tb -- end-to-end testbench of the SpMSpV accelerator at its
// default size (K = 15 modules, H = 512 rows, 32-bit indices).
//
// The testbench plays the memory: it holds B and the CSR arrays of A
// (col_idx and val, element-addressed), answers every read one cycle later
// with K consecutive elements, feeds the CSR row descriptors, and collects
// the (row, C) pairs written out.  Values are small integers so every sum is
// exact and the reference does not depend on the order of additions.
//
// Phases:
//   1. the worked example (row with (4,56) (10,16) (12,78) (20,12); B holds
//      98, 40, 32 at 4, 10, 12): C = 8624, one group, one lane without match;
//   2. B of 390 nonzeros (the largest vector of the evaluation) and a random
//      A of 200 rows, 0..50 nonzeros each: multi-group rows, partial groups,
//      empty rows, rows with no match (zero C, not stored), a cancelling row;
//      the cycle count of the main stage is checked against sum ceil(nzr/K);
//   3. a vector B of 700 nonzeros, longer than H, split into two intervals
//      loaded in turn, the host adding the two partial products;
//   4. re-initialization with a short B: no stale match survives.
// Each mechanism is counted and a failure is recorded for any that never ran.
module spmspv_accel_tb;
  import spmspv_pkg::*;
  localparam int unsigned K  = K_DEF;
  localparam int unsigned H  = H_DEF;
  localparam int unsigned IW = IW_DEF;
  localparam int unsigned AW = AW_DEF;
  localparam int unsigned LW = 32;
  localparam int unsigned NCOL = 4096;     // columns of A / length of B
  localparam int unsigned MEMSZ = 16384;

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
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(input string msg);
    failures++;
    $display("FAIL %s", msg);
  endtask

  // ---------------- memory model ----------------
  logic [IW-1:0] mem_idx [MEMSZ];
  logic [31:0]   mem_val [MEMSZ];

  always @(posedge clk) begin
    for (int l = 0; l < int'(K); l++) begin
      if (mem_rd_en && l < int'(mem_rd_cnt)) begin
        mem_rd_idx[l] <= mem_idx[(int'(mem_rd_addr) + l) % MEMSZ];
        mem_rd_val[l] <= mem_val[(int'(mem_rd_addr) + l) % MEMSZ];
      end else begin
        mem_rd_idx[l] <= '1;       // idle lanes carry junk
        mem_rd_val[l] <= 32'h7FC00000;
      end
    end
  end

  function automatic logic [31:0] i2f(input int v);
    logic [31:0] f;
    int a, e;
    if (v == 0) return 32'd0;
    a = (v < 0) ? -v : v;
    e = 0;
    while ((a >> e) > 1) e++;
    // exact for |v| < 2^24
    f = {(v < 0), 8'(127 + e), 23'((a << (23 - e)) & 32'h7FFFFF)};
    return f;
  endfunction

  // ---------------- C collection ----------------
  int c_seen [int];          // row -> integer value received
  int c_count = 0, drop_count = 0, hit_count = 0, last_c_row = -1;
  bit order_ok = 1;
  always @(posedge clk) begin
    if (rst_n) begin
      if (c_valid) begin
        if (int'(c_row) <= last_c_row) order_ok = 0;
        last_c_row = int'(c_row);
        c_seen[int'(c_row)] = f2i(c_val);
        c_count++;
      end
      if (zero_drop) drop_count++;
      hit_count += $countones(lane_hit);
    end
  end

  function automatic int f2i(input logic [31:0] f);
    int e, m;
    if (f[30:23] == 0) return 0;
    e = int'(f[30:23]) - 127;
    m = {1'b1, f[22:0]};
    if (e < 0) return 32'h7FFFFFFF;           // not an integer
    m = (e >= 23) ? (m << (e - 23)) : (m >> (23 - e));
    return f[31] ? -m : m;
  endfunction

  // ---------------- reference matrices ----------------
  int bvec [int];            // column -> B value
  int a_ptr [$], a_nzr [$], a_row [$];
  int n_multi = 0, n_partial = 0, n_empty = 0, n_miss = 0, n_zero = 0, n_full = 0;

  task automatic load_b(input int base, input int cols [$], input int vals [$]);
    for (int i = 0; i < cols.size(); i++) begin
      mem_idx[base + i] = IW'(cols[i]);
      mem_val[base + i] = i2f(vals[i]);
    end
  endtask

  task automatic run_init(input int base, input int n);
    @(negedge clk); cmd_valid = 1; cmd = 2'(CMD_INIT); b_base = AW'(base); b_nnz = $bits(b_nnz)'(n);
    @(negedge clk); cmd_valid = 0;
    while (!done) @(posedge clk);
    @(negedge clk);
  endtask

  // Runs the main stage over rows a_row/a_ptr/a_nzr, returns the cycle count.
  task automatic run_main(output int cycles);
    int t0;
    @(negedge clk); cmd_valid = 1; cmd = 2'(CMD_MAIN);
    @(negedge clk); cmd_valid = 0;
    t0 = $time;
    for (int j = 0; j < a_row.size(); j++) begin
      rd_valid = 1; rd_row = IW'(a_row[j]); rd_ptr = AW'(a_ptr[j]); rd_nzr = LW'(a_nzr[j]);
      rd_last = (j == a_row.size() - 1);
      do @(posedge clk); while (!rd_ready);
      @(negedge clk);
    end
    rd_valid = 0;
    while (!done) @(posedge clk);
    cycles = ($time - t0) / 10;
    @(negedge clk);
  endtask

  // Builds a random A over the first free memory at `base`; returns expected C.
  task automatic build_a(input int base, input int nrows, input int maxnzr, ref int cexp [int]);
    int p, nzr, s, col, v, miss;
    bit used [int];
    p = base;
    a_ptr.delete(); a_nzr.delete(); a_row.delete(); cexp.delete();
    for (int j = 0; j < nrows; j++) begin
      nzr = ($urandom_range(9, 0) == 0) ? 0 : $urandom_range(maxnzr, 1);
      if (j == 5) nzr = K;                 // exactly one full group
      used.delete();
      s = 0;
      miss = 0;
      for (int e = 0; e < nzr; e++) begin
        do col = $urandom_range(NCOL - 1, 0); while (used.exists(col));
        used[col] = 1;
        v = $urandom_range(40, 1) * (($urandom_range(1, 0) == 1) ? 1 : -1);
        if (j == 7) begin v = (e % 2 == 0) ? 5 : -5; col = e; end  // cancelling row
        mem_idx[p + e] = IW'(col);
        mem_val[p + e] = i2f(v);
        if (bvec.exists(col)) s += v * bvec[col];
        else miss++;
      end
      if (j == 7 && nzr % 2 == 1) nzr--;     // keep pairs
      a_ptr.push_back(p); a_nzr.push_back(nzr); a_row.push_back(2 * j + 3);
      p += nzr;
      if (nzr == 0) n_empty++;
      if (nzr > int'(K)) n_multi++;
      if (nzr % K != 0) n_partial++;
      if (nzr == int'(K)) n_full++;
      if (miss > 0) n_miss++;
      if (nzr > 0 && s == 0) n_zero++;
      if (nzr > 0) cexp[2 * j + 3] = s;
    end
  endtask

  task automatic compare_c(input int cexp [int], input string what);
    foreach (cexp[r]) begin
      checks++;
      if (cexp[r] == 0) begin
        if (c_seen.exists(r)) fail($sformatf("%s: zero row %0d stored", what, r));
      end else if (!c_seen.exists(r) || c_seen[r] != cexp[r]) begin
        fail($sformatf("%s: row %0d C=%0d expected %0d", what, r, c_seen.exists(r) ? c_seen[r] : -999999, cexp[r]));
      end
    end
    checks++;
    foreach (c_seen[r]) if (!cexp.exists(r)) fail($sformatf("%s: unexpected row %0d", what, r));
    checks++;
    if (!order_ok) fail($sformatf("%s: C rows out of order", what));
  endtask

  initial begin
    int cexp [int];
    int cyc, slots, bcols [$], bvals [$], col;
    int part [int];
    int n_interval = 0, n_reinit = 0;

    for (int i = 0; i < MEMSZ; i++) begin mem_idx[i] = '0; mem_val[i] = '0; end
    for (int l = 0; l < int'(K); l++) begin mem_rd_idx[l] = '0; mem_rd_val[l] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- 1. worked example ----
    bvec.delete(); bvec[4] = 98; bvec[10] = 40; bvec[12] = 32;
    bcols = '{4, 10, 12}; bvals = '{98, 40, 32};
    load_b(0, bcols, bvals);
    run_init(0, 3);
    mem_idx[100] = 4;  mem_val[100] = i2f(56);
    mem_idx[101] = 10; mem_val[101] = i2f(16);
    mem_idx[102] = 12; mem_val[102] = i2f(78);
    mem_idx[103] = 20; mem_val[103] = i2f(12);
    a_ptr = '{100}; a_nzr = '{4}; a_row = '{0};
    c_seen.delete(); last_c_row = -1;
    run_main(cyc);
    checks++;
    if (!c_seen.exists(0) || c_seen[0] != 8624) fail("worked example C_j != 8624");
    else $display("worked example: C_j = %0d", c_seen[0]);
    n_miss++;

    // ---- 2. B of 390 nonzeros, random A ----
    bvec.delete(); bcols.delete(); bvals.delete();
    while (bcols.size() < 390) begin
      col = $urandom_range(NCOL - 1, 0);
      if (!bvec.exists(col)) begin
        bvec[col] = $urandom_range(30, 1);
        bcols.push_back(col); bvals.push_back(bvec[col]);
      end
    end
    for (int i = 0; i < 8; i++) if (!bvec.exists(i)) begin   // for the cancelling row
      bvec[i] = 3; bcols.push_back(i); bvals.push_back(3);
    end
    load_b(0, bcols, bvals);
    run_init(0, bcols.size());
    build_a(1000, 200, 50, cexp);
    slots = 0;
    foreach (a_nzr[j]) slots += (a_nzr[j] == 0) ? 1 : (a_nzr[j] + K - 1) / K;
    c_seen.delete(); last_c_row = -1; order_ok = 1;
    run_main(cyc);
    compare_c(cexp, "random A");
    checks++;
    $display("main stage: %0d cycles for %0d groups/empty rows (%0d rows)", cyc, slots, a_row.size());
    if (cyc > slots + 10) fail($sformatf("main stage took %0d cycles, expected about %0d", cyc, slots));

    // ---- 3. B longer than H: two intervals ----
    bvec.delete(); bcols.delete(); bvals.delete();
    while (bcols.size() < 700) begin
      col = $urandom_range(NCOL - 1, 0);
      if (!bvec.exists(col)) begin
        bvec[col] = $urandom_range(20, 1);
        bcols.push_back(col); bvals.push_back(bvec[col]);
      end
    end
    load_b(0, bcols, bvals);
    build_a(1000, 60, 45, cexp);
    part.delete();
    for (int iv = 0; iv < 2; iv++) begin
      run_init(iv * 350, 350);
      c_seen.delete(); last_c_row = -1; order_ok = 1;
      run_main(cyc);
      foreach (c_seen[r]) part[r] = (part.exists(r) ? part[r] : 0) + c_seen[r];
      n_interval++;
    end
    c_seen = part; order_ok = 1;
    foreach (c_seen[r]) if (c_seen[r] == 0) c_seen.delete(r);
    compare_c(cexp, "two intervals");

    // ---- 4. re-initialization with a short B ----
    bvec.delete(); bcols.delete(); bvals.delete();
    for (int i = 0; i < 5; i++) begin
      col = 4000 + i; bvec[col] = i + 1; bcols.push_back(col); bvals.push_back(i + 1);
    end
    load_b(0, bcols, bvals);
    run_init(0, 5);
    n_reinit++;
    build_a(1000, 40, 30, cexp);
    c_seen.delete(); last_c_row = -1; order_ok = 1;
    run_main(cyc);
    compare_c(cexp, "after re-init");

    // ---- mechanisms seen ----
    $display("mechanisms: multi-group rows=%0d partial groups=%0d full groups=%0d empty rows=%0d",
             n_multi, n_partial, n_full, n_empty);
    $display("            rows with misses=%0d zero rows=%0d dropped=%0d stored=%0d lane hits=%0d",
             n_miss, n_zero, drop_count, c_count, hit_count);
    $display("            B intervals=%0d re-inits=%0d", n_interval, n_reinit);
    checks++; if (n_multi == 0)    fail("no multi-group row");
    checks++; if (n_partial == 0)  fail("no partial group");
    checks++; if (n_full == 0)     fail("no full group");
    checks++; if (n_empty == 0)    fail("no empty row");
    checks++; if (n_miss == 0)     fail("no lane without match");
    checks++; if (drop_count == 0) fail("no zero C dropped");
    checks++; if (hit_count == 0)  fail("no CAM hit");
    checks++; if (n_interval != 2) fail("B intervals not run");
    checks++; if (n_reinit == 0)   fail("no re-init");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
