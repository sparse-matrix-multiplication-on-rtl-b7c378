// spmspv_ctrl_tb -- self-checking testbench of the algorithm sequencer.
// INIT: checks the clear pulse, one B read per cycle at consecutive addresses
// and the write of element n to row n one cycle later, and the cut at H.
// MAIN: sends random CSR row descriptors (empty rows included, the descriptor
// stream sometimes idle) and checks every group read (address, count) and the
// aligned group control (lane mask, first, last, row) against groups worked out
// from the descriptors, that back-to-back rows take ceil(nzr/K) cycles each,
// and that done comes after the last row.
module spmspv_ctrl_tb;
  import spmspv_pkg::*;
  localparam int unsigned K  = 4;
  localparam int unsigned H  = 32;
  localparam int unsigned IW = 16;
  localparam int unsigned AW = 20;
  localparam int unsigned LW = 12;
  localparam int unsigned CW = $clog2(K + 1);

  logic                   clk = 0, rst_n = 0;
  logic                   cmd_valid = 0, cmd_ready;
  cmd_e                   cmd = CMD_NONE;
  logic [AW-1:0]          b_base = '0;
  logic [$clog2(H+1)-1:0] b_nnz = '0;
  logic                   rd_valid = 0, rd_ready, rd_last = 0;
  logic [IW-1:0]          rd_row = '0;
  logic [AW-1:0]          rd_ptr = '0;
  logic [LW-1:0]          rd_nzr = '0;
  logic                   mem_rd_en;
  logic [AW-1:0]          mem_rd_addr;
  logic [CW-1:0]          mem_rd_cnt;
  logic                   b_clear, b_wr_en, a_valid, a_first, a_last;
  logic [$clog2(H)-1:0]   b_wr_row;
  logic [K-1:0]           a_lane_en;
  logic [IW-1:0]          a_row;
  ctrl_state_e            state;
  logic                   done;
  int checks = 0, failures = 0;

  spmspv_ctrl #(.K(K), .H(H), .IW(IW), .AW(AW), .LW(LW), .DRAIN(6)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(input string msg);
    failures++;
    $display("FAIL %s", msg);
  endtask

  typedef struct { logic [AW-1:0] addr; int cnt; logic first, last; logic [IW-1:0] row; } grp_t;
  grp_t exp_q [$];
  grp_t pend;     // read seen last cycle, its control is due now
  bit   pend_v = 0;
  int   reads = 0;
  bit   main_on = 0;

  // MAIN checker: every read must be the next expected group; its control
  // outputs must follow one cycle later.
  always @(posedge clk) begin
    if (main_on) begin
      if (pend_v) begin
        checks++;
        if (!a_valid || a_first !== pend.first || a_last !== pend.last || a_row !== pend.row ||
            a_lane_en !== K'((1 << pend.cnt) - 1))
          fail($sformatf("group control row %0d: v=%0b f=%0b l=%0b row=%0d mask=%b",
                         pend.row, a_valid, a_first, a_last, a_row, a_lane_en));
      end else if (a_valid) fail("a_valid without a read");
      pend_v = 0;
      if (mem_rd_en) begin
        checks++;
        if (exp_q.size() == 0) fail("read beyond the last group");
        else begin
          pend = exp_q.pop_front();
          pend_v = 1;
          reads++;
          if (mem_rd_addr !== pend.addr || int'(mem_rd_cnt) != pend.cnt)
            fail($sformatf("read addr=%0d cnt=%0d expected %0d/%0d", mem_rd_addr, mem_rd_cnt, pend.addr, pend.cnt));
        end
      end
    end
  end

  task automatic do_init(input int base, input int n);
    int rd_seen = 0, wr_seen = 0, exp_n;
    logic [AW-1:0] last_addr;
    exp_n = (n > int'(H)) ? int'(H) : n;
    @(negedge clk); cmd_valid = 1; cmd = CMD_INIT; b_base = AW'(base); b_nnz = $bits(b_nnz)'(n);
    @(posedge clk); #1; cmd_valid = 0;
    checks++;
    if (!b_clear) fail("no clear pulse at INIT");
    while (!done) begin
      @(posedge clk);
      if (b_wr_en) begin
        checks++;
        if (int'(b_wr_row) != wr_seen || last_addr != AW'(base + wr_seen)) fail("B write out of order");
        wr_seen++;
      end
      if (mem_rd_en) begin
        checks++;
        if (mem_rd_addr != AW'(base + rd_seen) || mem_rd_cnt != 1) fail("B read address");
        last_addr = mem_rd_addr;
        rd_seen++;
      end
      #1;
    end
    checks++;
    if (wr_seen != exp_n || rd_seen != exp_n) fail($sformatf("INIT wrote %0d of %0d", wr_seen, exp_n));
  endtask

  task automatic do_main(input int nrows, input bit idle_gaps, output int cycles);
    int ptr = 100, nzr, t0, exp_cycles = 0;
    main_on = 1;
    @(negedge clk); cmd_valid = 1; cmd = CMD_MAIN;
    @(negedge clk); cmd_valid = 0;
    t0 = $time;
    for (int j = 0; j < nrows; j++) begin
      nzr = ($urandom_range(5, 0) == 0) ? 0 : $urandom_range(3 * K + 1, 1);
      for (int a = 0; a < nzr; a += K) begin
        grp_t g;
        g.addr = AW'(ptr + a); g.cnt = (nzr - a > int'(K)) ? int'(K) : nzr - a;
        g.first = (a == 0); g.last = (a + int'(K) >= nzr); g.row = IW'(3 * j + 1);
        exp_q.push_back(g);
      end
      exp_cycles += (nzr == 0) ? 1 : (nzr + K - 1) / K;
      rd_valid = 1; rd_row = IW'(3 * j + 1); rd_ptr = AW'(ptr); rd_nzr = LW'(nzr); rd_last = (j == nrows - 1);
      ptr += nzr;
      do @(posedge clk); while (!rd_ready);
      @(negedge clk); rd_valid = 0;
      if (idle_gaps && $urandom_range(3, 0) == 0) @(negedge clk);
    end
    while (!done) @(posedge clk);
    cycles = ($time - t0) / 10;
    checks++;
    if (exp_q.size() != 0) fail($sformatf("%0d groups never read", exp_q.size()));
    if (!idle_gaps) begin
      checks++;
      // one cycle to load the first descriptor, DRAIN cycles at the end
      if (cycles > exp_cycles + 1 + 6 + 2)
        fail($sformatf("MAIN took %0d cycles for %0d group slots", cycles, exp_cycles));
      $display("MAIN: %0d cycles for %0d group/empty-row slots", cycles, exp_cycles);
    end
    @(negedge clk);
    main_on = 0;
  endtask

  initial begin
    int cyc;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (!cmd_ready) fail("not idle after reset");
    do_init(40, 20);
    do_init(7, 40);           // longer than H: cut to H rows
    do_main(60, 0, cyc);
    do_main(60, 1, cyc);
    do_init(0, 1);
    do_main(5, 1, cyc);
    $display("group reads checked: %0d", reads);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
