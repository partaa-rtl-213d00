// proc_flags - processor flag unit of one AEro processor.
//
// Each partition owns a 10-bit user flag. A partition sets it by an ordinary
// store to the base address (offset 0) of its protected region; the unit
// keeps the 10 LSBs of the stored word. The 32-bit processor flag word is
// the concatenation {active-partition flag[1:0], partition-3 flag,
// partition-2 flag, partition-1 flag}. The word is exported to every
// partition of every processor, where it is read-only.
//
// Interface: 'we' with 'wr_part' (the segment code 01..11 the MCU put on the
// address MSBs) and 'wdata'. Timing: the flag changes at the clock edge
// that takes the store; the word is visible from the next cycle. Flags clear
// on reset.
//
// From the paper: 32-bit word, 2-bit active-partition field followed by
// three 10-bit fields, set through the protected base address, 10-LSB
// slice, read-only export. Placing the active-partition field in bits 31:30
// and partition 1 in bits 9:0 follows the top-to-bottom order of the
// concatenation in the paper's memory figure; the paper prints no bit
// numbers for it.
// Lint note: wdata[31:10] is unused on purpose; only the 10 LSBs of the
// stored word become the partition flag.
module proc_flags (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [1:0]  apf,
  input  logic        we,
  input  logic [1:0]  wr_part,
  input  logic [31:0] wdata,
  output logic [29:0] part_flags,  // {p3, p2, p1}
  output logic [31:0] flags
);
  logic [9:0] pf [3];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 3; i++) pf[i] <= '0;
    end else if (we && wr_part != 2'b00) begin
      pf[wr_part - 2'd1] <= wdata[9:0];
    end
  end

  assign part_flags = {pf[2], pf[1], pf[0]};
  assign flags      = {apf, pf[2], pf[1], pf[0]};
endmodule
