// ram_array -- RAM array of one acceleration module, juxtaposed to the CAM.
//
// Holds, in row r, the nonzero value of B whose index is in row r of the CAM.
// Writes are one row per cycle by row number (wr_en, wr_row, wr_data).  A read
// uses the CAM's latched match lines as word lines: the word of every raised
// word line is put on the bit lines, which are ORed together, and the result is
// latched at the clock edge (rd_data, rd_valid one cycle after rd_en).  With no
// word line raised -- no match in the CAM -- the read word is 0, which is the
// "B element = 0" case of the algorithm, and needs no extra logic.
//
// From the paper: match lines as word lines, one word selected per search and
// an output of 0 on no match.  The OR of the bit lines and the output register
// (standing in for the bit-line sense amplifiers) are this design's choices.
// At most one word line may be raised (unique indices in the CAM); an assertion
// checks it.
module ram_array #(
  parameter int unsigned H  = spmspv_pkg::H_DEF,   // rows (h)
  parameter int unsigned DW = spmspv_pkg::DW       // word width
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 wr_en,
  input  logic [$clog2(H)-1:0] wr_row,
  input  logic [DW-1:0]        wr_data,
  input  logic                 rd_en,
  input  logic [H-1:0]         word_lines,
  output logic [DW-1:0]        rd_data,
  output logic                 rd_valid
);

  logic [H-1:0][DW-1:0] mem;    // all rows drive the bit lines: flip-flops
  logic [DW-1:0] bit_lines;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_row] <= wr_data;
  end

  always_comb begin
    bit_lines = '0;
    for (int unsigned r = 0; r < H; r++) begin
      if (word_lines[r]) bit_lines = bit_lines | mem[r];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_data  <= '0;
      rd_valid <= 1'b0;
    end else begin
      rd_valid <= rd_en;
      rd_data  <= rd_en ? bit_lines : '0;
    end
  end

  a_one_word_line: assert property (@(posedge clk) disable iff (!rst_n)
    rd_en |-> $onehot0(word_lines));

endmodule
