// accel_module -- one acceleration module: a CAM array, the juxtaposed RAM
// array and a floating-point multiplier.
//
// Initialization: every (index, value) pair of the sparse vector B is written
// to the same row of the CAM (index) and the RAM (value).  The controller
// broadcasts the same writes to all modules, so each holds a full copy of B.
//
// Search-and-read-and-multiply is a four-step pipeline, one step per cycle:
//   edge 1  INDEX   <= column index of the A element   (step 1, read A)
//   edge 2  ml      <= CAM compare of INDEX with all rows (step 2, compare)
//   edge 3  b value <= RAM word selected by the match line, 0 if none (step 3)
//   edge 4  p       <= A value * B value                (step 4, multiply)
// so a_valid/a_idx/a_val presented in cycle t give p_valid/p after the fourth
// clock edge, and a new element can enter every cycle.  The A value travels
// beside the CAM and RAM in pipeline registers.  An invalid lane (the last,
// partly filled group of a row) yields p = +0 so the accumulator may add all
// lanes unconditionally.
//
// The structure (CAM, RAM, MULT, match line as word line) is the paper's; the
// register placement that makes each algorithm step one cycle, and the +0 for
// idle lanes, are this design's.
module accel_module #(
  parameter int unsigned H  = spmspv_pkg::H_DEF,
  parameter int unsigned IW = spmspv_pkg::IW_DEF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // initialization (broadcast to all modules)
  input  logic                 b_clear,
  input  logic                 b_wr_en,
  input  logic [$clog2(H)-1:0] b_wr_row,
  input  logic [IW-1:0]        b_wr_idx,
  input  logic [31:0]          b_wr_val,
  // one nonzero element of A
  input  logic                 a_valid,
  input  logic [IW-1:0]        a_idx,
  input  logic [31:0]          a_val,
  // singleton product
  output logic                 p_valid,
  output logic [31:0]          p,
  output logic                 p_hit      // the element found its B partner
);

  logic [H-1:0]  ml;
  logic          ml_valid;
  logic [31:0]   b_val;
  logic          b_valid;
  logic [31:0]   a_val_q [3];
  logic [2:0]    v_q;
  logic          hit_q;
  logic [31:0]   prod;

  cam_array #(.H(H), .IW(IW)) u_cam (
    .clk, .rst_n,
    .clear      (b_clear),
    .wr_en      (b_wr_en),
    .wr_row     (b_wr_row),
    .wr_key     (b_wr_idx),
    .search_en  (a_valid),
    .search_key (a_idx),
    .search_mask('1),          // full-index match
    .ml         (ml),
    .ml_valid   (ml_valid)
  );

  ram_array #(.H(H), .DW(32)) u_ram (
    .clk, .rst_n,
    .wr_en      (b_wr_en),
    .wr_row     (b_wr_row),
    .wr_data    (b_wr_val),
    .rd_en      (ml_valid),
    .word_lines (ml),
    .rd_data    (b_val),
    .rd_valid   (b_valid)
  );

  // A value alongside the CAM/RAM steps.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_val_q <= '{default: '0};
      v_q     <= '0;
      hit_q   <= 1'b0;
    end else begin
      v_q        <= {v_q[1:0], a_valid};
      a_val_q[0] <= a_val;
      a_val_q[1] <= a_val_q[0];
      a_val_q[2] <= a_val_q[1];
      hit_q      <= |ml;
    end
  end

  fp32_mul u_mult (.a(a_val_q[2]), .b(b_val), .y(prod));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p       <= '0;
      p_valid <= 1'b0;
      p_hit   <= 1'b0;
    end else begin
      p_valid <= b_valid;
      p       <= b_valid ? prod : 32'd0;
      p_hit   <= b_valid & hit_q;
    end
  end

  // The A value pipeline and the CAM/RAM pipeline stay in step.
  a_in_step: assert property (@(posedge clk) disable iff (!rst_n)
    b_valid == v_q[2]);

endmodule
