// swcu - Switching-Control Unit: time-triggered partition scheduler.
//
// Each processor runs its three partitions one after another in a fixed,
// periodic order 1 -> 2 -> 3 -> 1 ..., giving partition p exactly BUDGET[p]
// clock cycles per round. The output is the 2-bit active-partition flag:
// 2'b01, 2'b10, 2'b11 for partitions 1..3, 2'b00 while the GPIO 'hold' input
// forces all execution off (used while memories are loaded). A partition
// whose budget is 0 is skipped. Software cannot reach this unit: the
// schedule is fixed by parameters.
//
// Timing: after reset partition 1 is active in the first cycle. The switch
// is cycle exact: partition p is active for BUDGET[p] consecutive cycles,
// and part_switch is high in the first cycle of each window. Releasing
// 'hold' restarts the round at partition 1.
//
// From the paper: periodic, time-triggered, uniform-priority switching with
// a per-partition execution time set by the system designer, and the 00 code
// forced by the GPIO pin. Restart at partition 1, the fixed order and the
// skipping of empty partitions are this design's choices.
module swcu #(
  // BUDGET[i] = cycles of partition i+1 per round
  parameter logic [2:0][31:0] BUDGET = {32'd50000, 32'd50000, 32'd50000}
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       hold,
  output logic [1:0] apf,
  output logic       part_switch
);
  localparam int CW = 32;

  logic [1:0]    cur;      // 0..2 = partition 1..3
  logic [CW-1:0] left;     // cycles remaining in the current window
  logic          all_zero;

  assign all_zero = (BUDGET[0] == 0) && (BUDGET[1] == 0) && (BUDGET[2] == 0);

  // Next partition with a non-zero budget after 'p'.
  function automatic logic [1:0] next_part(input logic [1:0] p);
    logic [1:0] q;
    q = p;
    for (int i = 0; i < 3; i++) begin
      q = (q == 2'd2) ? 2'd0 : q + 2'd1;
      if (BUDGET[q] != 0) return q;
    end
    return p;
  endfunction

  function automatic logic [1:0] first_part();
    for (int i = 0; i < 3; i++)
      if (BUDGET[i] != 0) return 2'(i);
    return 2'd0;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur     <= first_part();
      left    <= CW'(BUDGET[first_part()]);
    end else if (hold || all_zero) begin
      cur     <= first_part();
      left    <= CW'(BUDGET[first_part()]);
    end else begin
      if (left <= 1) begin
        cur  <= next_part(cur);
        left <= CW'(BUDGET[next_part(cur)]);
      end else begin
        left <= left - 1'b1;
      end
    end
  end

  assign apf = (hold || all_zero) ? 2'b00 : (cur + 2'd1);
  // First cycle of a window: the counter holds the full budget.
  assign part_switch = !hold && !all_zero && (left == CW'(BUDGET[cur]));
endmodule
