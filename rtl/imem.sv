// imem - instruction memory of one AEro processor.
//
// One memory device shared by the three partitions and read-only for them.
// It is split into four segments of 2**PC_W words; the fetch address is
// {partition segment, pc}, so each partition's program counter starts at
// zero inside its own segment (segment 0 is unused by the core). The
// processor reads it combinationally in the fetch stage. A write port loads
// the programs while execution is held.
//
// The paper states that the instruction memory is read-only and shared, and
// that reset sets the program counters to zero; it gives no size and no
// rule for separating the partitions' programs. The segment rule and
// PC_W = 10 (1024 instructions per partition) are this design's choice.
module imem #(
  parameter int PC_W = 10
) (
  input  logic              clk,
  input  logic              ld_we,
  input  logic [PC_W+1:0]   ld_addr,
  input  logic [31:0]       ld_data,
  input  logic [PC_W+1:0]   raddr,
  output logic [31:0]       rdata
);
  logic [31:0] mem [2**(PC_W+2)];

  always_ff @(posedge clk) begin
    if (ld_we) mem[ld_addr] <= ld_data;
  end

  assign rdata = mem[raddr];
endmodule
