// dmem - dual-port data memory of one AEro processor.
//
// One device holds four segments selected by the two address MSBs that the
// MCU drives: 00 shared, 01..11 the protected regions of partitions 1..3.
// Port A serves the pipeline's loads and stores (and the load port while
// execution is held). Port B is the second access channel that operates the
// partition stacks at the low end of each protected region. Both ports read
// combinationally and write at the clock edge. When both write the same
// word in one cycle, port A wins.
//
// The dual-port device, the four segments and the stack on the second port
// follow the paper. Asynchronous reads and N = 12 (4096 words) are this
// design's choices.
module dmem #(
  parameter int N = 12,
  parameter int W = 32
) (
  input  logic         clk,
  input  logic         a_we,
  input  logic [N-1:0] a_addr,
  input  logic [W-1:0] a_wdata,
  output logic [W-1:0] a_rdata,
  input  logic         b_we,
  input  logic [N-1:0] b_addr,
  input  logic [W-1:0] b_wdata,
  output logic [W-1:0] b_rdata
);
  logic [W-1:0] mem [2**N];

  always_ff @(posedge clk) begin
    if (b_we && !(a_we && a_addr == b_addr)) mem[b_addr] <= b_wdata;
    if (a_we) mem[a_addr] <= a_wdata;
  end

  assign a_rdata = mem[a_addr];
  assign b_rdata = mem[b_addr];
endmodule
