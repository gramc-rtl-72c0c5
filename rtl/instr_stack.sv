// instr_stack: instruction memory of the GRAMC digital control module.
//
// "The instructions from compiling stage will be loaded into the instruction stack in
// advance." A host writes 64-bit instructions through the load port before a run; the
// controller reads the word at the program-counter address. The read is synchronous: the
// word addressed in cycle t is on `rd_data` in cycle t+1. Depth is this design's choice.
module instr_stack
  import gramc_pkg::*;
#(
  parameter int unsigned DEPTH = 256,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          ld_en,
  input  logic [AW-1:0] ld_addr,
  input  instr_t        ld_data,
  input  logic [AW-1:0] rd_addr,
  output instr_t        rd_data
);
  instr_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (ld_en) mem[ld_addr] <= ld_data;
    rd_data <= mem[rd_addr];
  end
endmodule
