// tb_prac_counter_array: self-checking test of the per-row counter array.
// A reference array in the testbench follows every operation; random
// increments, row clears and group clears are issued and new_count / last2
// are compared with it, the done latency (3 cycles) is checked, one counter
// is driven into saturation and the power-up clear is verified.
module tb_prac_counter_array;
  import moat_pkg::*;
  localparam int unsigned ROWS = 64, RPG = 8, CTR_W = 8;
  localparam int unsigned ROW_W = $clog2(ROWS);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             op_valid = 1'b0;
  arr_op_e          op = ARR_INC;
  logic [ROW_W-1:0] op_row = '0;
  logic             op_ready, done;
  logic [CTR_W-1:0] new_count;
  logic [CTR_W-1:0] last2 [2];

  prac_counter_array #(.ROWS(ROWS), .ROWS_PER_GROUP(RPG), .CTR_W(CTR_W)) dut (.*);

  int checks = 0, failures = 0;
  int unsigned model [ROWS];

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  // Issue one operation and wait for done; checks latency and results.
  task automatic do_op(input arr_op_e o, input int unsigned row);
    int unsigned cyc = 0;
    int unsigned g = row / RPG;
    int unsigned exp_l0 = model[g*RPG + RPG-2], exp_l1 = model[g*RPG + RPG-1];
    while (!op_ready) @(posedge clk);
    #1 op_valid = 1'b1; op = o; op_row = ROW_W'(row);
    @(posedge clk); #1 op_valid = 1'b0;
    do begin @(posedge clk); cyc++; end while (!done && cyc < 20);
    check(cyc == 3, $sformatf("done latency %0d, expected 3", cyc));
    case (o)
      ARR_INC: begin
        if (model[row] < 255) model[row]++;
        check(new_count == CTR_W'(model[row]),
              $sformatf("INC row %0d: got %0d exp %0d", row, new_count, model[row]));
      end
      ARR_CLR_ROW: model[row] = 0;
      ARR_CLR_GROUP: begin
        check(last2[0] == CTR_W'(exp_l0) && last2[1] == CTR_W'(exp_l1),
              $sformatf("CLR_GROUP %0d last2 %0d/%0d exp %0d/%0d", g, last2[0], last2[1], exp_l0, exp_l1));
        for (int r = 0; r < RPG; r++) model[g*RPG + r] = 0;
      end
      default: ;
    endcase
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (model[i]) model[i] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    // power-up clear: op_ready comes after the sweep, all counters read 0
    repeat (ROWS/RPG + 2) @(posedge clk);
    check(op_ready, "array ready after init sweep");
    for (int g = 0; g < ROWS/RPG; g++) do_op(ARR_CLR_GROUP, g*RPG);
    // random traffic
    for (int i = 0; i < 3000; i++) begin
      automatic int unsigned r = $urandom_range(ROWS-1);
      automatic int unsigned k = $urandom_range(99);
      if (k < 80)      do_op(ARR_INC, r);
      else if (k < 90) do_op(ARR_CLR_ROW, r);
      else             do_op(ARR_CLR_GROUP, r);
    end
    // saturation
    for (int i = 0; i < 300; i++) do_op(ARR_INC, 5);
    check(new_count == 8'hff, "counter saturates at 255");
    // every counter matches the model
    for (int r = 0; r < ROWS; r++) begin
      automatic int unsigned prev = model[r];
      do_op(ARR_INC, r);
      check(new_count == CTR_W'(prev < 255 ? prev + 1 : 255), $sformatf("final sweep row %0d got %0d prev %0d", r, new_count, prev));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
