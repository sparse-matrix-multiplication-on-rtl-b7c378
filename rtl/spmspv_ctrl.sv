// spmspv_ctrl -- sequencer of the CSR sparse matrix by sparse vector algorithm.
//
// Two commands, accepted when idle (cmd_valid & cmd_ready):
//   CMD_INIT  stores vector B: reads b_nnz (index, value) pairs from memory at
//             element addresses b_base, b_base+1, ... one per cycle and writes
//             pair n into row n of the CAM and RAM of every module.  The modules'
//             row-valid flags are cleared first (b_clear), so a shorter vector
//             leaves no stale entries.  b_nnz above H is cut to H (the caller
//             must split a longer B into H-element intervals).
//   CMD_MAIN  multiplies the rows of A by the stored B.  The rows arrive as a
//             stream of CSR row descriptors (row number j, element address of
//             the row's first nonzero, nonzero count nzr_j, end-of-matrix flag)
//             with a valid/ready handshake.  For each row the controller reads
//             ceil(nzr_j / K) groups of up to K consecutive elements, one group
//             per cycle, marking the first group (REG reset) and the last one
//             (C_j complete); lanes past nzr_j in the last group are masked.
//             Rows with nzr_j = 0 are skipped.  After the row flagged last,
//             the controller waits DRAIN cycles for the pipeline to empty,
//             pulses done and returns to idle.
//
// Memory read port: mem_rd_en with mem_rd_addr and mem_rd_cnt (1..K elements)
// in cycle t; the memory returns the elements in cycle t+1 (fixed latency of
// one cycle, always ready).  The datapath outputs (b_wr_*, a_*) are registered
// so that they line up with the data returned in cycle t+1.
//
// From the paper: the two stages, K elements of a row per cycle, ceil(nzr/k)
// iterations per row, REG reset per row and the store of C_j.  The command
// and row-descriptor interfaces, the memory timing and the drain counter are
// this design's choices; the paper says only that A and B come from memory.
module spmspv_ctrl
  import spmspv_pkg::*;
#(
  parameter int unsigned K     = K_DEF,
  parameter int unsigned H     = H_DEF,
  parameter int unsigned IW    = IW_DEF,
  parameter int unsigned AW    = AW_DEF,
  parameter int unsigned LW    = 32,       // row-length field width
  parameter int unsigned DRAIN = 6         // cycles from last read to last C
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // command
  input  logic                   cmd_valid,
  input  cmd_e                   cmd,
  output logic                   cmd_ready,
  input  logic [AW-1:0]          b_base,
  input  logic [$clog2(H+1)-1:0] b_nnz,
  // CSR row descriptors of A
  input  logic                   rd_valid,
  output logic                   rd_ready,
  input  logic [IW-1:0]          rd_row,
  input  logic [AW-1:0]          rd_ptr,
  input  logic [LW-1:0]          rd_nzr,
  input  logic                   rd_last,
  // memory read request
  output logic                   mem_rd_en,
  output logic [AW-1:0]          mem_rd_addr,
  output logic [$clog2(K+1)-1:0] mem_rd_cnt,
  // datapath control, aligned with the returned memory data
  output logic                   b_clear,
  output logic                   b_wr_en,
  output logic [$clog2(H)-1:0]   b_wr_row,
  output logic                   a_valid,
  output logic [K-1:0]           a_lane_en,
  output logic                   a_first,
  output logic                   a_last,
  output logic [IW-1:0]          a_row,
  // status
  output ctrl_state_e            state,
  output logic                   done
);

  localparam int unsigned HW = $clog2(H + 1);
  localparam int unsigned CW = $clog2(K + 1);

  // initialization counters
  logic [HW-1:0]  b_cnt, b_len;
  logic [AW-1:0]  b_addr;

  // current row of A
  logic           cur_act;       // a row with elements left is loaded
  logic [IW-1:0]  cur_row;
  logic [AW-1:0]  cur_ptr;
  logic [LW-1:0]  cur_rem;
  logic           cur_first;
  logic           cur_end;       // the loaded row is the matrix's last
  logic           end_seen;      // last row issued; draining
  logic [$clog2(DRAIN+1)-1:0] drain_cnt;

  // group issued this cycle
  logic           issue;
  logic           issue_last;
  logic [CW-1:0]  issue_cnt;
  logic [K-1:0]   issue_mask;

  always_comb begin
    issue      = (state == ST_MAIN) && cur_act;
    issue_last = (cur_rem <= LW'(K));
    issue_cnt  = issue_last ? CW'(cur_rem) : CW'(K);
    for (int unsigned l = 0; l < K; l++) begin
      issue_mask[l] = (l < issue_cnt);
    end
    // A new descriptor is taken when no row is loaded or the loaded one ends now.
    rd_ready  = (state == ST_MAIN) && !end_seen && (!cur_act || (issue_last && !cur_end));
    cmd_ready = (state == ST_IDLE);

    mem_rd_en   = 1'b0;
    mem_rd_addr = '0;
    mem_rd_cnt  = '0;
    if (state == ST_INIT && b_cnt < b_len) begin
      mem_rd_en   = 1'b1;
      mem_rd_addr = b_addr;
      mem_rd_cnt  = CW'(1);
    end else if (issue) begin
      mem_rd_en   = 1'b1;
      mem_rd_addr = cur_ptr;
      mem_rd_cnt  = issue_cnt;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= ST_IDLE;
      b_cnt     <= '0;
      b_len     <= '0;
      b_addr    <= '0;
      cur_act   <= 1'b0;
      cur_row   <= '0;
      cur_ptr   <= '0;
      cur_rem   <= '0;
      cur_first <= 1'b0;
      cur_end   <= 1'b0;
      end_seen  <= 1'b0;
      drain_cnt <= '0;
      done      <= 1'b0;
      b_clear   <= 1'b0;
      b_wr_en   <= 1'b0;
      b_wr_row  <= '0;
      a_valid   <= 1'b0;
      a_lane_en <= '0;
      a_first   <= 1'b0;
      a_last    <= 1'b0;
      a_row     <= '0;
    end else begin
      done    <= 1'b0;
      b_clear <= 1'b0;
      b_wr_en <= 1'b0;
      a_valid <= 1'b0;

      unique case (state)
        ST_IDLE: begin
          if (cmd_valid && cmd == CMD_INIT) begin
            state   <= ST_INIT;
            b_cnt   <= '0;
            b_len   <= (int'(b_nnz) > int'(H)) ? HW'(H) : b_nnz;
            b_addr  <= b_base;
            b_clear <= 1'b1;
          end else if (cmd_valid && cmd == CMD_MAIN) begin
            state    <= ST_MAIN;
            cur_act  <= 1'b0;
            end_seen <= 1'b0;
          end
        end

        ST_INIT: begin
          if (b_cnt < b_len) begin
            b_wr_en  <= 1'b1;
            b_wr_row <= $clog2(H)'(b_cnt);
            b_cnt    <= b_cnt + HW'(1);
            b_addr   <= b_addr + AW'(1);
          end else begin
            state <= ST_IDLE;     // last write leaves this cycle
            done  <= 1'b1;
          end
        end

        ST_MAIN: begin
          if (issue) begin
            a_valid   <= 1'b1;
            a_lane_en <= issue_mask;
            a_first   <= cur_first;
            a_last    <= issue_last;
            a_row     <= cur_row;
            cur_ptr   <= cur_ptr + AW'(issue_cnt);
            cur_rem   <= cur_rem - LW'(issue_cnt);
            cur_first <= 1'b0;
            if (issue_last) begin
              cur_act <= 1'b0;
              if (cur_end) begin
                end_seen  <= 1'b1;
                drain_cnt <= '0;
              end
            end
          end
          if (rd_valid && rd_ready) begin
            if (rd_nzr != '0) begin
              cur_act   <= 1'b1;
              cur_row   <= rd_row;
              cur_ptr   <= rd_ptr;
              cur_rem   <= rd_nzr;
              cur_first <= 1'b1;
              cur_end   <= rd_last;
            end else if (rd_last) begin
              end_seen  <= 1'b1;   // empty last row: nothing more to read
              drain_cnt <= '0;
            end
          end
          if (end_seen) begin
            if (int'(drain_cnt) == int'(DRAIN) - 1) begin
              state    <= ST_IDLE;
              done     <= 1'b1;
              end_seen <= 1'b0;
            end else begin
              drain_cnt <= drain_cnt + 1'b1;
            end
          end
        end

        default: state <= ST_IDLE;
      endcase
    end
  end

  a_cmd_known: assert property (@(posedge clk) disable iff (!rst_n)
    (cmd_valid && cmd_ready) |-> (cmd inside {CMD_INIT, CMD_MAIN, CMD_NONE}));
  a_one_read: assert property (@(posedge clk) disable iff (!rst_n)
    mem_rd_en |-> (mem_rd_cnt >= 1 && int'(mem_rd_cnt) <= int'(K)));

endmodule
