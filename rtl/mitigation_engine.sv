// mitigation_engine: the Currently Mitigated Addr (CMA) register of one bank
// and the sequencer that mitigates the row it holds.
//
// Mitigating an aggressor row takes MIT_STEPS = 2*BLAST_RADIUS + 1 row
// operations: refreshing the BLAST_RADIUS victim rows on each side, then
// resetting the aggressor's activation counter. Proactive mitigation spreads
// these operations over a mitigation period of MIT_PERIOD REFs: with the
// default MIT_PERIOD = MIT_STEPS = 5, one operation per REF (5 tREFI per
// aggressor row). Other periods give other mitigation rates: the REF at
// phase k of the period performs floor((k+1)*S/P) - floor(k*S/P) steps
// (S = MIT_STEPS, P = MIT_PERIOD), e.g. all five at every REF for P = 1, or
// one at every second REF for P = 10; P = 0 turns proactive mitigation off.
// An RFM gives time for all steps (reactive mitigation, 350 ns = five row
// operations).
//
//   ref_slot   pulse: a REF has left time for mitigation steps. At the
//              first REF of each mitigation period (phase 0) a valid CTA
//              entry is moved into the CMA (cta_take pulses, same cycle).
//              Then, if the CMA is valid, its next steps are issued.
//   rfm_start  pulse: an RFM. A valid CTA entry is moved into the CMA
//              (replacing any mitigation in progress), and all remaining steps
//              of the CMA are issued. Afterwards CTA and CMA are both empty.
//   step_*     the step to perform: victim refresh of step_row (only if
//              step_in_range; rows outside the bank are skipped) or, when
//              step_is_reset, the counter reset of the aggressor step_row.
//              step_ack completes it; a new step can follow next cycle.
//   done       pulse one cycle after the REF/RFM work has been finished.
//   mit_done   pulse when a row's mitigation completes; mit_reactive tells
//              whether it was finished by an RFM.
// Victim order is row-1, row+1, row-2, row+2, ... and the counter reset comes
// last, so a mitigation abandoned by an RFM leaves the aggressor's counter
// intact. That order, and skipping victims outside the bank, are this
// implementation's choices, as is the even spreading of steps for periods
// other than five REFs (only the rates themselves are evaluated); the 5-tREFI
// period, the CTA-to-CMA hand-over once per period and at RFM, and
// invalidating both registers after the reactive mitigation follow the
// design description.
module mitigation_engine
  import moat_pkg::*;
#(
  parameter int unsigned ROWS         = DEF_ROWS,
  parameter int unsigned BLAST_RADIUS = DEF_BLAST_RADIUS,
  parameter int unsigned MIT_PERIOD   = DEF_MIT_PERIOD,
  localparam int unsigned ROW_W     = $clog2(ROWS),
  localparam int unsigned MIT_STEPS = 2 * BLAST_RADIUS + 1,
  localparam int unsigned STEP_W    = $clog2(MIT_STEPS + 1),
  localparam int unsigned PH_W      = (MIT_PERIOD > 1) ? $clog2(MIT_PERIOD) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              ref_slot,
  input  logic              rfm_start,
  input  logic              cta_valid,
  input  logic [ROW_W-1:0]  cta_row,
  output logic              cta_take,
  output logic              step_valid,
  output logic              step_is_reset,
  output logic              step_in_range,
  output logic [ROW_W-1:0]  step_row,
  input  logic              step_ack,
  output logic              done,
  output logic              mit_done,
  output logic              mit_reactive,
  output logic              cma_valid,
  output logic [ROW_W-1:0]  cma_row,
  output logic [PH_W-1:0]   phase
);

  typedef enum logic {E_IDLE, E_STEP} estate_e;

  estate_e           state;
  logic [STEP_W-1:0] step;
  logic              all_steps;  // RFM: run to the end of the mitigation
  logic [STEP_W-1:0] ref_left;   // steps still allowed in this REF

  // Steps the REF at the current phase may perform.
  localparam int unsigned PERIOD_NZ = (MIT_PERIOD == 0) ? 1 : MIT_PERIOD;
  logic [STEP_W-1:0] quota;
  always_comb begin
    if (MIT_PERIOD == 0) quota = '0;
    else quota = STEP_W'(((32'(phase) + 1) * MIT_STEPS) / PERIOD_NZ - (32'(phase) * MIT_STEPS) / PERIOD_NZ);
  end

  logic take_ref, take_rfm;
  assign take_ref = (state == E_IDLE) && ref_slot && (phase == '0) && cta_valid && !cma_valid
                    && (MIT_PERIOD != 0);
  assign take_rfm = (state == E_IDLE) && rfm_start && cta_valid;
  assign cta_take = take_ref || take_rfm;

  // Victim distance and side for the current step.
  logic [ROW_W:0] vdist;
  logic [ROW_W:0] target;
  always_comb begin
    vdist          = (ROW_W+1)'(step / 2) + 1'b1;
    step_is_reset = (step == STEP_W'(MIT_STEPS - 1));
    if (step_is_reset) begin
      target        = {1'b0, cma_row};
      step_in_range = 1'b1;
    end else if (step[0]) begin
      target        = {1'b0, cma_row} + vdist;
      step_in_range = (target < (ROW_W+1)'(ROWS));
    end else begin
      target        = {1'b0, cma_row} - vdist;
      step_in_range = ({1'b0, cma_row} >= vdist);
    end
    step_row   = target[ROW_W-1:0];
    step_valid = (state == E_STEP);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= E_IDLE;
      step         <= '0;
      all_steps    <= 1'b0;
      cma_valid    <= 1'b0;
      cma_row      <= '0;
      phase        <= '0;
      ref_left     <= '0;
      done         <= 1'b0;
      mit_done     <= 1'b0;
      mit_reactive <= 1'b0;
    end else begin
      done     <= 1'b0;
      mit_done <= 1'b0;
      unique case (state)
        E_IDLE: begin
          if (ref_slot) begin
            phase     <= (32'(phase) >= PERIOD_NZ - 1) ? '0 : phase + 1'b1;
            all_steps <= 1'b0;
            ref_left  <= quota;
            if (take_ref) begin
              cma_valid <= 1'b1;
              cma_row   <= cta_row;
              step      <= '0;
            end
            if ((take_ref || cma_valid) && quota != '0) begin
              state <= E_STEP;
            end else begin
              done <= 1'b1;
            end
          end else if (rfm_start) begin
            all_steps <= 1'b1;
            if (take_rfm) begin
              cma_valid <= 1'b1;
              cma_row   <= cta_row;
              step      <= '0;
              state     <= E_STEP;
            end else if (cma_valid) begin
              state <= E_STEP;
            end else begin
              done <= 1'b1;
            end
          end
        end
        E_STEP: begin
          if (step_ack) begin
            if (step_is_reset) begin
              cma_valid    <= 1'b0;
              step         <= '0;
              mit_done     <= 1'b1;
              mit_reactive <= all_steps;
              state        <= E_IDLE;
              done         <= 1'b1;
            end else begin
              step     <= step + 1'b1;
              ref_left <= ref_left - 1'b1;
              if (!all_steps && ref_left == STEP_W'(1)) begin
                state <= E_IDLE;
                done  <= 1'b1;
              end
            end
          end
        end
        default: state <= E_IDLE;
      endcase
    end
  end

  a_slot_when_idle: assert property (@(posedge clk) disable iff (!rst_n)
    (ref_slot || rfm_start) |-> (state == E_IDLE));
  a_one_request: assert property (@(posedge clk) disable iff (!rst_n)
    !(ref_slot && rfm_start));

endmodule
