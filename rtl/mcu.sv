// mcu - memory-control unit of one AEro processor.
//
// A partition sees an (N-1)-bit data address. Bit N-2 selects its protected
// region (1) or the processor's shared region (0). The MCU makes the N-bit
// physical address by driving the two MSBs: the active-partition flag for a
// protected access, 2'b00 for a shared access. The lower N-2 bits pass
// unchanged. Purely combinational.
//
// This is the rule printed in the paper's MCU pseudocode. Note that bit N-2
// of the partition address is itself overwritten, so the partition cannot
// name any other partition's segment. N = 12 is this design's choice; the
// paper keeps n symbolic.
module mcu #(
  parameter int N = 12
) (
  input  logic [1:0]   apf,    // active-partition flag (01..11)
  input  logic [N-2:0] vaddr,  // partition-visible address
  output logic [N-1:0] paddr   // physical data-memory address
);
  always_comb begin
    if (vaddr[N-2]) paddr = {apf,   vaddr[N-3:0]};
    else            paddr = {2'b00, vaddr[N-3:0]};
  end
endmodule
