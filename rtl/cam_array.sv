// cam_array -- content-addressable memory of one acceleration module, with its
// INDEX register and one match line per row.
//
// Each of the H rows holds the IW-bit index of one nonzero element of the
// vector B and a row-valid flag.  A search is two pipeline steps, as in the
// algorithm of the paper (read, then compare):
//   cycle t   : search_en and search_key are presented; at the clock edge the
//               key is captured in the INDEX register.
//   cycle t+1 : INDEX is compared with every valid row at once; at the edge the
//               match line of each matching row is latched (ml, ml_valid).
// A row matches when it is valid and equal to INDEX in every bit selected by
// search_mask (a 0 bit leaves that column out of the compare; all ones is a
// full-width match).  Rows are
// written one per cycle (wr_en, wr_row, wr_key); clear invalidates every row
// in one cycle, so a new vector B cannot match stale entries.  The match lines
// are the word lines of the juxtaposed ram_array.
//
// From the paper: the INDEX register, one comparison of the index with all rows
// in a single step, columns left out of a compare, and match lines used
// directly as RAM word lines.  The SpMSpV algorithm always compares the full
// index; accel_module drives an all-ones mask.  The row-
// valid flags, the clear input and latching the match lines in a register
// (standing in for the match-line sense amplifiers) are this design's choices.
module cam_array #(
  parameter int unsigned H  = spmspv_pkg::H_DEF,   // rows (h)
  parameter int unsigned IW = spmspv_pkg::IW_DEF   // index width (w)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // initialization
  input  logic                 clear,
  input  logic                 wr_en,
  input  logic [$clog2(H)-1:0] wr_row,
  input  logic [IW-1:0]        wr_key,
  // search
  input  logic                 search_en,
  input  logic [IW-1:0]        search_key,
  input  logic [IW-1:0]        search_mask,  // 1 = column takes part
  output logic [H-1:0]         ml,          // latched match lines
  output logic                 ml_valid
);

  logic [H-1:0][IW-1:0] rows;   // every row is read at once: flip-flops, not a RAM macro
  logic [H-1:0]  row_valid;
  logic [IW-1:0] index_q;      // INDEX register
  logic [IW-1:0] mask_q;
  logic          index_v;
  logic [H-1:0]  ml_d;

  // Row storage: memory array, written one row per cycle.
  always_ff @(posedge clk) begin
    if (wr_en) rows[wr_row] <= wr_key;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row_valid <= '0;
    end else if (clear) begin
      row_valid <= '0;
    end else if (wr_en) begin
      row_valid[wr_row] <= 1'b1;
    end
  end

  // Parallel compare of INDEX with all rows.
  always_comb begin
    for (int unsigned r = 0; r < H; r++) begin
      ml_d[r] = row_valid[r] && (((rows[r] ^ index_q) & mask_q) == '0);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      index_q  <= '0;
      mask_q   <= '0;
      index_v  <= 1'b0;
      ml       <= '0;
      ml_valid <= 1'b0;
    end else begin
      index_v  <= search_en;
      if (search_en) begin
        index_q <= search_key;
        mask_q  <= search_mask;
      end
      ml_valid <= index_v;
      ml       <= index_v ? ml_d : '0;
    end
  end

  // A row number past the array would be lost.
  a_wr_row_range: assert property (@(posedge clk) disable iff (!rst_n)
    wr_en |-> (int'(wr_row) < int'(H)));

endmodule
