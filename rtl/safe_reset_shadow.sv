// safe_reset_shadow: safe counter reset on refresh for one bank.
//
// Refresh walks the bank in spatially contiguous groups of ROWS_PER_GROUP
// rows; grp_ptr names the group the next REF refreshes and advances by one
// per REF, wrapping after the last group. Refresh resets the counters of the
// group it refreshes. The last two rows of the group refreshed most recently
// are the only rows whose victims (the first rows of the next group) have not
// been refreshed yet, so their counters must not be forgotten: when the group
// is reset, the old counts of those two rows are copied into two shadow
// counters (2 x CTR_W bits of SRAM). Until the next REF, an activation of one
// of those two rows increments its shadow counter, and the shadow value (not
// the freshly reset array value) is the count used for tracking and ALERT.
//
// Interface:
//   ref_done / ref_last2  one-cycle pulse when the group at grp_ptr has been
//                         reset, with the old counts of its last two rows.
//   inc_valid / inc_row / inc_arr_count
//                         a precharge of inc_row has raised its array counter
//                         to inc_arr_count; eff_count (combinational, same
//                         cycle) is the count to use for that row.
//   clr_valid / clr_row   inc_row's counter was reset by a mitigation; a
//                         matching shadow counter is reset too.
// The pointer, the two shadow counters and their use follow the design
// description. Clearing a shadow counter when its row is mitigated is this
// implementation's choice (the mitigation has refreshed that row's victims).
module safe_reset_shadow
  import moat_pkg::*;
#(
  parameter int unsigned ROWS           = DEF_ROWS,
  parameter int unsigned ROWS_PER_GROUP = DEF_ROWS_PER_GROUP,
  parameter int unsigned CTR_W          = DEF_CTR_W,
  localparam int unsigned ROW_W  = $clog2(ROWS),
  localparam int unsigned GROUPS = ROWS / ROWS_PER_GROUP,
  localparam int unsigned GRP_W  = $clog2(GROUPS),
  localparam int unsigned LANE_W = $clog2(ROWS_PER_GROUP)
) (
  input  logic             clk,
  input  logic             rst_n,
  output logic [GRP_W-1:0] grp_ptr,
  input  logic             ref_done,
  input  logic [CTR_W-1:0] ref_last2 [2],
  input  logic             inc_valid,
  input  logic [ROW_W-1:0] inc_row,
  input  logic [CTR_W-1:0] inc_arr_count,
  output logic [CTR_W-1:0] eff_count,
  output logic             eff_from_shadow,
  input  logic             clr_valid,
  input  logic [ROW_W-1:0] clr_row
);

  localparam logic [CTR_W-1:0]  CTR_MAX    = '1;
  localparam logic [LANE_W-1:0] FIRST_LANE = LANE_W'(ROWS_PER_GROUP - 2);

  logic             shadow_valid;
  logic [CTR_W-1:0] shadow_cnt [2];
  logic [GRP_W-1:0] shadow_grp;

  assign shadow_grp = grp_ptr - 1'b1;

  // Does a row address hit one of the two shadowed rows, and which one?
  function automatic logic hits(input logic [ROW_W-1:0] row);
    return shadow_valid && (row[ROW_W-1:LANE_W] == shadow_grp)
           && (row[LANE_W-1:0] >= FIRST_LANE);
  endfunction

  logic inc_hit, clr_hit;
  logic inc_idx, clr_idx;
  assign inc_hit = hits(inc_row);
  assign clr_hit = hits(clr_row);
  assign inc_idx = (inc_row[LANE_W-1:0] != FIRST_LANE);
  assign clr_idx = (clr_row[LANE_W-1:0] != FIRST_LANE);

  always_comb begin
    eff_count       = inc_arr_count;
    eff_from_shadow = 1'b0;
    if (inc_hit) begin
      eff_from_shadow = 1'b1;
      eff_count = (shadow_cnt[inc_idx] == CTR_MAX) ? CTR_MAX
                                                   : shadow_cnt[inc_idx] + 1'b1;
      // The shadow never holds less than the array; keep the larger one.
      if (inc_arr_count > eff_count) eff_count = inc_arr_count;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      grp_ptr       <= '0;
      shadow_valid  <= 1'b0;
      shadow_cnt[0] <= '0;
      shadow_cnt[1] <= '0;
    end else begin
      if (ref_done) begin
        grp_ptr       <= (grp_ptr == GRP_W'(GROUPS - 1)) ? '0 : grp_ptr + 1'b1;
        shadow_valid  <= 1'b1;
        shadow_cnt[0] <= ref_last2[0];
        shadow_cnt[1] <= ref_last2[1];
      end else begin
        if (inc_valid && inc_hit) shadow_cnt[inc_idx] <= eff_count;
        if (clr_valid && clr_hit) shadow_cnt[clr_idx] <= '0;
      end
    end
  end

  a_one_event: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({ref_done, inc_valid, clr_valid}));

endmodule
