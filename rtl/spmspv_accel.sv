// spmspv_accel -- CAM-based accelerator for sparse matrix by sparse vector
// multiplication, C = A * B, with A and B (and C) in compressed sparse row form.
//
// K acceleration modules each hold a copy of the nonzeros of B: indices in a
// CAM, values in the juxtaposed RAM.  Each cycle the controller fetches up to K
// nonzeros of one row of A from memory and gives one to each module; a module's
// CAM matches the element's column index against all stored B indices at once,
// the match line reads the B value from the RAM (0 if no match), and the
// module's multiplier forms the singleton product.  The accumulator ACC adds the
// K products to its register REG; after ceil(nzr_j / K) groups, C_j is complete
// and, if nonzero, is sent to memory with its row number j.
//
// Pipeline (one algorithm step per cycle, a new group each cycle):
//   t    controller issues the memory read of a group (mem_rd_*)
//   t+1  memory returns up to K elements (mem_rd_idx/val); INDEX registers load
//   t+2  CAM compare, match lines latched
//   t+3  RAM read of the B values
//   t+4  K multiplications
//   t+5  accumulate into REG; C_j leaves on c_valid after the edge ending t+5
// so a row of nzr_j nonzeros costs ceil(nzr_j / K) cycles of throughput.
//
// Commands (cmd_valid/cmd_ready): CMD_INIT stores b_nnz elements of B read from
// element address b_base (one per cycle, broadcast to all modules); CMD_MAIN
// walks the CSR row descriptors of A (rd_*).  done pulses at the end of each.
// External memory is not part of this design; its read port (fixed latency 1,
// always ready) and the write stream of C are ports of this module.
//
// The organisation (K modules of CAM+RAM+MULT feeding one ACC with REG) is the
// paper's; interfaces, timing and number formats beyond 32-bit floats are this
// design's choices, described in each submodule.
module spmspv_accel
  import spmspv_pkg::*;
#(
  parameter int unsigned K  = K_DEF,    // acceleration modules (k)
  parameter int unsigned H  = H_DEF,    // CAM/RAM rows (h)
  parameter int unsigned IW = IW_DEF,   // index width (w)
  parameter int unsigned AW = AW_DEF,   // memory element-address width
  parameter int unsigned LW = 32        // row-length field width
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // command
  input  logic                   cmd_valid,
  input  logic [1:0]             cmd,          // cmd_e encoding
  output logic                   cmd_ready,
  input  logic [AW-1:0]          b_base,
  input  logic [$clog2(H+1)-1:0] b_nnz,
  output logic                   done,
  output logic                   busy,
  // CSR row descriptors of A
  input  logic                   rd_valid,
  output logic                   rd_ready,
  input  logic [IW-1:0]          rd_row,
  input  logic [AW-1:0]          rd_ptr,
  input  logic [LW-1:0]          rd_nzr,
  input  logic                   rd_last,
  // memory read port (from memory)
  output logic                   mem_rd_en,
  output logic [AW-1:0]          mem_rd_addr,
  output logic [$clog2(K+1)-1:0] mem_rd_cnt,
  input  logic [IW-1:0]          mem_rd_idx [K],
  input  logic [31:0]            mem_rd_val [K],
  // product vector C (to memory)
  output logic                   c_valid,
  output logic [IW-1:0]          c_row,
  output logic [31:0]            c_val,
  // event outputs
  output logic [K-1:0]           lane_hit,     // lane found a B partner
  output logic                   zero_drop     // a row summed to zero, not stored
);

  localparam int unsigned PIPE = 4;   // INDEX, compare, RAM read, multiply

  ctrl_state_e          state;
  logic                 b_clear, b_wr_en;
  logic [$clog2(H)-1:0] b_wr_row;
  logic                 a_valid, a_first, a_last;
  logic [K-1:0]         a_lane_en;
  logic [IW-1:0]        a_row;

  spmspv_ctrl #(.K(K), .H(H), .IW(IW), .AW(AW), .LW(LW), .DRAIN(PIPE + 2)) u_ctrl (
    .clk, .rst_n,
    .cmd_valid, .cmd(cmd_e'(cmd)), .cmd_ready, .b_base, .b_nnz,
    .rd_valid, .rd_ready, .rd_row, .rd_ptr, .rd_nzr, .rd_last,
    .mem_rd_en, .mem_rd_addr, .mem_rd_cnt,
    .b_clear, .b_wr_en, .b_wr_row,
    .a_valid, .a_lane_en, .a_first, .a_last, .a_row,
    .state, .done
  );

  assign busy = (state != ST_IDLE);

  // Acceleration modules.
  logic [31:0] prod [K];
  logic [K-1:0] p_valid;

  for (genvar m = 0; m < K; m++) begin : g_mod
    accel_module #(.H(H), .IW(IW)) u_mod (
      .clk, .rst_n,
      .b_clear  (b_clear),
      .b_wr_en  (b_wr_en),
      .b_wr_row (b_wr_row),
      .b_wr_idx (mem_rd_idx[0]),
      .b_wr_val (mem_rd_val[0]),
      .a_valid  (a_valid & a_lane_en[m]),
      .a_idx    (mem_rd_idx[m]),
      .a_val    (mem_rd_val[m]),
      .p_valid  (p_valid[m]),
      .p        (prod[m]),
      .p_hit    (lane_hit[m])
    );
  end

  // Group control travels beside the modules' four steps.
  logic          sb_valid [PIPE];
  logic          sb_first [PIPE];
  logic          sb_last  [PIPE];
  logic [IW-1:0] sb_row   [PIPE];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sb_valid <= '{default: 1'b0};
      sb_first <= '{default: 1'b0};
      sb_last  <= '{default: 1'b0};
      sb_row   <= '{default: '0};
    end else begin
      sb_valid[0] <= a_valid;
      sb_first[0] <= a_first;
      sb_last[0]  <= a_last;
      sb_row[0]   <= a_row;
      for (int unsigned s = 1; s < PIPE; s++) begin
        sb_valid[s] <= sb_valid[s-1];
        sb_first[s] <= sb_first[s-1];
        sb_last[s]  <= sb_last[s-1];
        sb_row[s]   <= sb_row[s-1];
      end
    end
  end

  logic [31:0] acc_reg;   // REG, kept visible for debug

  fp_accumulator #(.K(K), .RW(IW)) u_acc (
    .clk, .rst_n,
    .in_valid  (sb_valid[PIPE-1]),
    .first     (sb_first[PIPE-1]),
    .last      (sb_last[PIPE-1]),
    .row       (sb_row[PIPE-1]),
    .prod      (prod),
    .c_valid   (c_valid),
    .c_row     (c_row),
    .c_val     (c_val),
    .zero_drop (zero_drop),
    .reg_q     (acc_reg)
  );

  // Every enabled module's product arrives with the group's control.
  a_products_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    (p_valid != '0) |-> sb_valid[PIPE-1]);

endmodule
