// prac_counter_array: the per-row activation counters (PRAC) of one bank.
//
// Every row of the bank owns a CTR_W-bit activation counter. In a PRAC device
// the counters live in extra DRAM columns of each row and are updated by a
// read-modify-write while the row is precharged; here they are a synchronous
// single-port memory. The memory is organised as one word per refresh group
// (ROWS_PER_GROUP counters side by side), so a whole group can be reset by
// one write when the group is refreshed.
//
// Operations (op_valid for one cycle while op_ready is high):
//   ARR_INC       row op_row: counter := min(counter+1, max). new_count gives
//                 the incremented value.
//   ARR_CLR_ROW   row op_row: counter := 0.
//   ARR_CLR_GROUP group holding op_row: all its counters := 0. last2 gives the
//                 old values of the group's last two rows (for the shadow
//                 counters of the safe reset scheme).
// Timing: the memory is read in the cycle after op_valid and written in the
// next; done pulses in the cycle after the write, with new_count / last2
// valid in that cycle. op_ready is low from op_valid until done.
// After reset the array clears itself, one group per cycle (GROUPS cycles),
// and op_ready stays low until that sweep is finished.
//
// Per-row counters, their increment at precharge and their reset on refresh
// follow the design description; the group-wide word, the saturation at the
// counter maximum and the power-up clearing sweep are this implementation's
// choices.
module prac_counter_array
  import moat_pkg::*;
#(
  parameter int unsigned ROWS           = DEF_ROWS,
  parameter int unsigned ROWS_PER_GROUP = DEF_ROWS_PER_GROUP,
  parameter int unsigned CTR_W          = DEF_CTR_W,
  localparam int unsigned ROW_W  = $clog2(ROWS),
  localparam int unsigned GROUPS = ROWS / ROWS_PER_GROUP,
  localparam int unsigned GRP_W  = $clog2(GROUPS),
  localparam int unsigned LANE_W = $clog2(ROWS_PER_GROUP),
  localparam int unsigned WORD_W = ROWS_PER_GROUP * CTR_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             op_valid,
  input  arr_op_e          op,
  input  logic [ROW_W-1:0] op_row,
  output logic             op_ready,
  output logic             done,
  output logic [CTR_W-1:0] new_count,
  output logic [CTR_W-1:0] last2 [2]
);

  typedef enum logic [1:0] {A_INIT, A_IDLE, A_READ, A_WRITE} astate_e;

  localparam logic [CTR_W-1:0] CTR_MAX = '1;

  logic [WORD_W-1:0] mem [GROUPS];
  logic [WORD_W-1:0] rd_word;
  logic [WORD_W-1:0] wr_word;
  logic [GRP_W-1:0]  mem_addr;
  logic              mem_we;

  astate_e           state;
  arr_op_e           op_q;
  logic [ROW_W-1:0]  row_q;
  logic [GRP_W-1:0]  init_grp;
  logic [LANE_W-1:0] lane_q;

  assign lane_q = row_q[LANE_W-1:0];

  // Memory port: one read and at most one write per cycle at mem_addr.
  always_ff @(posedge clk) begin
    if (mem_we) mem[mem_addr] <= wr_word;
    rd_word <= mem[mem_addr];
  end

  always_comb begin
    mem_addr = row_q[ROW_W-1:LANE_W];
    mem_we   = 1'b0;
    wr_word  = rd_word;
    unique case (state)
      A_INIT: begin
        mem_addr = init_grp;
        mem_we   = 1'b1;
        wr_word  = '0;
      end
      A_IDLE:  mem_addr = op_row[ROW_W-1:LANE_W];
      A_READ:  mem_addr = row_q[ROW_W-1:LANE_W];
      A_WRITE: begin
        mem_we = 1'b1;
        unique case (op_q)
          ARR_INC: begin
            if (rd_word[lane_q*CTR_W +: CTR_W] != CTR_MAX)
              wr_word[lane_q*CTR_W +: CTR_W] = rd_word[lane_q*CTR_W +: CTR_W] + 1'b1;
          end
          ARR_CLR_ROW:   wr_word[lane_q*CTR_W +: CTR_W] = '0;
          ARR_CLR_GROUP: wr_word = '0;
          default:       mem_we = 1'b0;
        endcase
      end
      default: ;
    endcase
  end

  assign op_ready = (state == A_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= A_INIT;
      init_grp  <= '0;
      op_q      <= ARR_INC;
      row_q     <= '0;
      done      <= 1'b0;
      new_count <= '0;
      last2[0]  <= '0;
      last2[1]  <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        A_INIT: begin
          init_grp <= init_grp + 1'b1;
          if (init_grp == GRP_W'(GROUPS - 1)) state <= A_IDLE;
        end
        A_IDLE: begin
          if (op_valid) begin
            op_q  <= op;
            row_q <= op_row;
            state <= A_READ;
          end
        end
        A_READ: state <= A_WRITE;
        A_WRITE: begin
          done      <= 1'b1;
          new_count <= wr_word[lane_q*CTR_W +: CTR_W];
          last2[0]  <= rd_word[(ROWS_PER_GROUP-2)*CTR_W +: CTR_W];
          last2[1]  <= rd_word[(ROWS_PER_GROUP-1)*CTR_W +: CTR_W];
          state     <= A_IDLE;
        end
        default: state <= A_IDLE;
      endcase
    end
  end

  // An operation may only be started while the array is idle.
  a_op_when_ready: assert property (@(posedge clk) disable iff (!rst_n)
    op_valid |-> op_ready);

endmodule
