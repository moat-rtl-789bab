// abo_controller: the device's ALERT-Back-Off (ABO) state.
//
// The ALERT pin is shared by all banks of the device. When any bank has a
// row above ATH (alert_req) the controller asserts alert. The memory
// controller may keep issuing commands for up to 180 ns, then must stop and
// issue ABO_LEVEL RFM commands; alert is deasserted once the last of them has
// been carried out by every bank (banks_ready high again). Before the next
// ALERT may be raised, at least ABO_LEVEL ACTs must have been issued after
// the deassertion (the inter-ALERT minimum of the ABO protocol; the counter
// starts satisfied after reset).
//
//   alert_req  per-bank request, level
//   act_seen   pulse per ACT accepted by the device
//   rfm_seen   pulse per RFM accepted by the device
//   banks_ready all banks idle
//   alert      ALERT asserted (the pad drives ALERT_n = !alert)
//   alert_start pulse when alert rises; held_off high while a request waits
//              for the inter-ALERT ACT minimum.
// Registered: alert rises one cycle after a request is seen.
// The ALERT / RFM / minimum-ACT sequence follows the ABO protocol as the
// design description gives it; deasserting on completion of the last RFM and
// counting only ACTs after the deassertion are this implementation's reading
// of it.
module abo_controller
  import moat_pkg::*;
#(
  parameter int unsigned NUM_BANKS = DEF_NUM_BANKS,
  parameter int unsigned ABO_LEVEL = DEF_ABO_LEVEL,
  localparam int unsigned LVL_W = $clog2(ABO_LEVEL + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [NUM_BANKS-1:0] alert_req,
  input  logic                 act_seen,
  input  logic                 rfm_seen,
  input  logic                 banks_ready,
  output logic                 alert,
  output logic                 alert_start,
  output logic                 held_off
);

  typedef enum logic {S_IDLE, S_ALERT} sstate_e;

  sstate_e          state;
  logic [LVL_W-1:0] acts_since;
  logic [LVL_W-1:0] rfm_cnt;
  logic             min_acts_met;

  assign min_acts_met = (acts_since == LVL_W'(ABO_LEVEL));
  assign alert        = (state == S_ALERT);
  assign alert_start  = (state == S_IDLE) && (|alert_req) && min_acts_met;
  assign held_off     = (state == S_IDLE) && (|alert_req) && !min_acts_met;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      acts_since <= LVL_W'(ABO_LEVEL);
      rfm_cnt    <= '0;
    end else begin
      unique case (state)
        S_IDLE: begin
          if (act_seen && !min_acts_met) acts_since <= acts_since + 1'b1;
          if (alert_start) begin
            state   <= S_ALERT;
            rfm_cnt <= '0;
          end
        end
        S_ALERT: begin
          if (rfm_seen && rfm_cnt != LVL_W'(ABO_LEVEL)) rfm_cnt <= rfm_cnt + 1'b1;
          if (!rfm_seen && rfm_cnt == LVL_W'(ABO_LEVEL) && banks_ready) begin
            state      <= S_IDLE;
            acts_since <= '0;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
