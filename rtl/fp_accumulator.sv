// fp_accumulator -- the floating-point accumulator ACC with its register REG.
//
// Each valid cycle it adds the K singleton products of the acceleration modules
// and the running sum in REG, in one step, through a balanced tree of fp32_add
// units (REG at leaf 0, product i at leaf i+1, unused leaves +0; K = 15 gives
// 16 leaves and 4 adder levels), and writes the sum back to REG.
//   first : this group opens a row; REG is read as +0 (algorithm step 0).
//   last  : this group closes row `row`; the sum is the product-vector element
//           C_row.  It is sent to memory (c_valid, c_row, c_val) one clock
//           edge later, only when it is not zero (algorithm step 6).
// Groups of consecutive rows may follow each other without a gap.
// zero_drop pulses for a closed row whose sum was zero and was not stored.
//
// From the paper: ACC sums the k products with REG, REG is reset per row, the
// row's result is stored with its index when nonzero.  The adder-tree shape
// and order of additions are this design's (the paper gives none); results
// therefore match a serial sum only up to floating-point rounding.
module fp_accumulator #(
  parameter int unsigned K  = spmspv_pkg::K_DEF,
  parameter int unsigned RW = spmspv_pkg::IW_DEF   // row index width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic          first,
  input  logic          last,
  input  logic [RW-1:0] row,
  input  logic [31:0]   prod [K],
  output logic          c_valid,
  output logic [RW-1:0] c_row,
  output logic [31:0]   c_val,
  output logic          zero_drop,
  output logic [31:0]   reg_q        // REG, for observation
);

  localparam int unsigned LEVELS = $clog2(K + 1);
  localparam int unsigned LEAVES = 1 << LEVELS;

  logic [31:0] leaf [LEAVES];
  logic [31:0] sum;

  for (genvar i = 0; i < LEAVES; i++) begin : g_leaf
    if (i == 0) begin : g_reg
      assign leaf[i] = first ? 32'd0 : reg_q;
    end else if (i <= K) begin : g_prod
      assign leaf[i] = prod[i-1];
    end else begin : g_zero
      assign leaf[i] = 32'd0;
    end
  end

  // Level l holds LEAVES >> (l+1) partial sums.
  for (genvar l = 0; l < LEVELS; l++) begin : g_level
    logic [31:0] v [LEAVES >> (l + 1)];
    for (genvar i = 0; i < (LEAVES >> (l + 1)); i++) begin : g_node
      if (l == 0) begin : g_first
        fp32_add u_add (.a(leaf[2*i]), .b(leaf[2*i+1]), .y(v[i]));
      end else begin : g_upper
        fp32_add u_add (.a(g_level[l-1].v[2*i]), .b(g_level[l-1].v[2*i+1]), .y(v[i]));
      end
    end
  end

  assign sum = g_level[LEVELS-1].v[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      reg_q     <= '0;
      c_valid   <= 1'b0;
      c_row     <= '0;
      c_val     <= '0;
      zero_drop <= 1'b0;
    end else begin
      c_valid   <= 1'b0;
      zero_drop <= 1'b0;
      if (in_valid) begin
        reg_q <= sum;
        if (last) begin
          c_row     <= row;
          c_val     <= sum;
          c_valid   <= (sum[30:0] != 31'd0);
          zero_drop <= (sum[30:0] == 31'd0);
        end
      end
    end
  end

endmodule
