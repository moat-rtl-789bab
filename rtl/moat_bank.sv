// moat_bank: all MOAT logic of one DRAM bank.
//
// It ties together the bank's per-row counter array, the safe-reset shadow
// counters, the CTA tracker and the CMA mitigation engine, and sequences them
// for the commands the bank receives:
//   ACT  latches the opened row (one cycle).
//   PRE  increments the open row's counter (read-modify-write in the array),
//        turns it into the effective count (shadow counter for the two rows
//        of the last refreshed group) and reports it to the tracker, which
//        may update the CTA and raise alert_req.
//   REF  resets the counters of the next refresh group (grp_ref_* tells the
//        array which group is refreshed), loads the shadow counters, then
//        gives the mitigation engine its steps (one with the default
//        MIT_PERIOD of 5 REFs per aggressor row).
//   RFM  lets the mitigation engine run a whole mitigation of the CTA row
//        (with TRACK_ENTRIES > 1: of the tracked row with the highest count).
// Mitigation steps come out as victim refreshes (vref_valid / vref_row, one
// cycle each) or as a counter reset done in the array.
//
// Timing, in clock cycles from the command: PRE 3 until the count reaches the
// tracker and 4 until ready; REF 6 (victim step) or 9 (counter reset) with
// one step per REF, about 2 more per extra step otherwise; RFM at most
// 2*BLAST_RADIUS + 6 (10 by default). ready is low while the bank is busy and a command must
// only be given while it is high (asserted); a device clock of a few hundred
// MHz finishes every command well within tPRE (36 ns), tRFC (410 ns) and
// tRFM (350 ns). The command sequencing and its cycle counts are this
// implementation's own; the behaviour of each command follows the design
// description.
module moat_bank
  import moat_pkg::*;
#(
  parameter int unsigned ROWS           = DEF_ROWS,
  parameter int unsigned ROWS_PER_GROUP = DEF_ROWS_PER_GROUP,
  parameter int unsigned CTR_W          = DEF_CTR_W,
  parameter int unsigned ATH            = DEF_ATH,
  parameter int unsigned ETH            = DEF_ETH,
  parameter int unsigned BLAST_RADIUS   = DEF_BLAST_RADIUS,
  parameter int unsigned TRACK_ENTRIES  = DEF_TRACK_ENTRIES,
  parameter int unsigned MIT_PERIOD     = DEF_MIT_PERIOD,
  localparam int unsigned ROW_W     = $clog2(ROWS),
  localparam int unsigned GROUPS    = ROWS / ROWS_PER_GROUP,
  localparam int unsigned GRP_W     = $clog2(GROUPS),
  localparam int unsigned LANE_W    = $clog2(ROWS_PER_GROUP),
  localparam int unsigned MIT_STEPS = 2 * BLAST_RADIUS + 1,
  localparam int unsigned STEP_W    = $clog2(MIT_STEPS + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  // command from the device's command decoder
  input  logic             cmd_valid,
  input  cmd_e             cmd,
  input  logic [ROW_W-1:0] cmd_row,
  output logic             ready,
  // to the ALERT logic
  output logic             alert_req,
  // to the bank's DRAM array: victim row refresh and group refresh
  output logic             vref_valid,
  output logic [ROW_W-1:0] vref_row,
  output logic             grp_ref_valid,
  output logic [GRP_W-1:0] grp_ref_grp,
  // observation: count reported at each precharge, mitigation completions
  output logic             upd_valid,
  output logic [ROW_W-1:0] upd_row,
  output logic [CTR_W-1:0] upd_ctr,
  output logic             mit_done,
  output logic             mit_reactive
);

  typedef enum logic [2:0] {
    B_INIT, B_IDLE, B_PRE, B_REF, B_MIT, B_MIT_CLR
  } bstate_e;

  bstate_e          state;
  logic             row_open;
  logic [ROW_W-1:0] open_row;

  // counter array
  logic             arr_op_valid, arr_ready, arr_done;
  arr_op_e          arr_op;
  logic [ROW_W-1:0] arr_row;
  logic [CTR_W-1:0] arr_new_count;
  logic [CTR_W-1:0] arr_last2 [2];

  // safe reset shadow
  logic [GRP_W-1:0] grp_ptr;
  logic             sh_ref_done, sh_clr_valid, eff_from_shadow;
  logic [CTR_W-1:0] eff_count;

  // tracker
  logic             cta_take, cta_valid, cta_inserted;
  logic [ROW_W-1:0] cta_row;
  logic [CTR_W-1:0] cta_ctr;

  // mitigation engine
  logic              eng_ref_slot, eng_rfm_start;
  logic              step_valid, step_is_reset, step_in_range, step_ack, eng_done;
  logic [ROW_W-1:0]  step_row;
  logic              cma_valid;
  logic [ROW_W-1:0]  cma_row;
  logic [((MIT_PERIOD > 1) ? $clog2(MIT_PERIOD) : 1)-1:0] phase;

  logic accept;
  assign ready  = (state == B_IDLE);
  assign accept = cmd_valid && ready;

  prac_counter_array #(
    .ROWS(ROWS), .ROWS_PER_GROUP(ROWS_PER_GROUP), .CTR_W(CTR_W)
  ) u_array (
    .clk, .rst_n,
    .op_valid (arr_op_valid),
    .op       (arr_op),
    .op_row   (arr_row),
    .op_ready (arr_ready),
    .done     (arr_done),
    .new_count(arr_new_count),
    .last2    (arr_last2)
  );

  safe_reset_shadow #(
    .ROWS(ROWS), .ROWS_PER_GROUP(ROWS_PER_GROUP), .CTR_W(CTR_W)
  ) u_shadow (
    .clk, .rst_n,
    .grp_ptr        (grp_ptr),
    .ref_done       (sh_ref_done),
    .ref_last2      (arr_last2),
    .inc_valid      (upd_valid),
    .inc_row        (open_row),
    .inc_arr_count  (arr_new_count),
    .eff_count      (eff_count),
    .eff_from_shadow(eff_from_shadow),
    .clr_valid      (sh_clr_valid),
    .clr_row        (step_row)
  );

  moat_tracker #(
    .ROW_W(ROW_W), .CTR_W(CTR_W), .ATH(ATH), .ETH(ETH), .ENTRIES(TRACK_ENTRIES)
  ) u_tracker (
    .clk, .rst_n,
    .upd_valid(upd_valid),
    .upd_row  (open_row),
    .upd_ctr  (eff_count),
    .take     (cta_take),
    .cta_valid(cta_valid),
    .cta_row  (cta_row),
    .cta_ctr  (cta_ctr),
    .alert_req(alert_req),
    .inserted (cta_inserted)
  );

  mitigation_engine #(
    .ROWS(ROWS), .BLAST_RADIUS(BLAST_RADIUS), .MIT_PERIOD(MIT_PERIOD)
  ) u_engine (
    .clk, .rst_n,
    .ref_slot     (eng_ref_slot),
    .rfm_start    (eng_rfm_start),
    .cta_valid    (cta_valid),
    .cta_row      (cta_row),
    .cta_take     (cta_take),
    .step_valid   (step_valid),
    .step_is_reset(step_is_reset),
    .step_in_range(step_in_range),
    .step_row     (step_row),
    .step_ack     (step_ack),
    .done         (eng_done),
    .mit_done     (mit_done),
    .mit_reactive (mit_reactive),
    .cma_valid    (cma_valid),
    .cma_row      (cma_row),
    .phase        (phase)
  );

  assign upd_row = open_row;
  assign upd_ctr = eff_count;

  always_comb begin
    arr_op_valid  = 1'b0;
    arr_op        = ARR_INC;
    arr_row       = open_row;
    upd_valid     = 1'b0;
    sh_ref_done   = 1'b0;
    sh_clr_valid  = 1'b0;
    eng_ref_slot  = 1'b0;
    eng_rfm_start = 1'b0;
    step_ack      = 1'b0;
    vref_valid    = 1'b0;
    vref_row      = step_row;
    grp_ref_valid = 1'b0;
    grp_ref_grp   = grp_ptr;
    unique case (state)
      B_IDLE: begin
        if (accept) begin
          unique case (cmd)
            CMD_PRE: begin
              arr_op_valid = row_open;
              arr_op       = ARR_INC;
              arr_row      = open_row;
            end
            CMD_REF: begin
              arr_op_valid  = 1'b1;
              arr_op        = ARR_CLR_GROUP;
              arr_row       = ROW_W'({grp_ptr, LANE_W'(0)});
              grp_ref_valid = 1'b1;
            end
            CMD_RFM: eng_rfm_start = 1'b1;
            default: ;
          endcase
        end
      end
      B_PRE: upd_valid = arr_done;
      B_REF: begin
        sh_ref_done  = arr_done;
        eng_ref_slot = arr_done;
      end
      B_MIT: begin
        if (step_valid) begin
          if (step_is_reset) begin
            arr_op_valid = arr_ready;
            arr_op       = ARR_CLR_ROW;
            arr_row      = step_row;
          end else begin
            vref_valid = step_in_range;
            step_ack   = 1'b1;
          end
        end
      end
      B_MIT_CLR: begin
        sh_clr_valid = arr_done;
        step_ack     = arr_done;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= B_INIT;
      row_open <= 1'b0;
      open_row <= '0;
    end else begin
      unique case (state)
        B_INIT: if (arr_ready) state <= B_IDLE;
        B_IDLE: begin
          if (accept) begin
            unique case (cmd)
              CMD_ACT: begin
                row_open <= 1'b1;
                open_row <= cmd_row;
              end
              CMD_PRE: begin
                row_open <= 1'b0;
                if (row_open) state <= B_PRE;
              end
              CMD_REF: state <= B_REF;
              CMD_RFM: state <= B_MIT;
              default: ;
            endcase
          end
        end
        B_PRE: if (arr_done) state <= B_IDLE;
        B_REF: if (arr_done) state <= B_MIT;
        B_MIT: begin
          if (eng_done) state <= B_IDLE;
          else if (step_valid && step_is_reset && arr_ready) state <= B_MIT_CLR;
        end
        B_MIT_CLR: if (arr_done) state <= B_MIT;
        default: state <= B_IDLE;
      endcase
    end
  end

  // Protocol rules of the command stream.
  a_cmd_when_ready: assert property (@(posedge clk) disable iff (!rst_n)
    (cmd_valid && cmd != CMD_NOP) |-> ready);
  a_no_act_when_open: assert property (@(posedge clk) disable iff (!rst_n)
    (accept && cmd == CMD_ACT) |-> !row_open);
  a_no_ref_when_open: assert property (@(posedge clk) disable iff (!rst_n)
    (accept && (cmd == CMD_REF || cmd == CMD_RFM)) |-> !row_open);

endmodule
