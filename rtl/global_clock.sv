// global_clock - 64-bit global hardware clock of the multiprocessor.
//
// Counts processor clock cycles from reset. Every processor reads it in its
// shared region as clock_L (bits 31:0) and clock_H (bits 63:32). The 64-bit
// width and the mapping follow the paper; clearing it on the global reset is
// this design's choice. A 64-bit count at 50 MHz wraps after ~11,700 years.
module global_clock (
  input  logic        clk,
  input  logic        rst_n,
  output logic [63:0] count
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) count <= '0;
    else        count <= count + 64'd1;
  end
endmodule
