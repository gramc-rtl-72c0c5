// prog_counter: program counter of the GRAMC digital control module.
//
// Holds the address of the instruction to fetch from the instruction stack ("Instruction
// Address" in the system figure). It clears to 0 on reset or on `clear` (start of a program)
// and advances by one when the controller accepts the current instruction (`advance`).
// The paper names the PC only; the clear/advance interface and the absence of branches are
// this design's choices (the described programs are straight-line instruction sequences).
module prog_counter #(
  parameter int unsigned AW = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,    // restart from address 0
  input  logic          advance,  // current instruction consumed
  output logic [AW-1:0] pc
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        pc <= '0;
    else if (clear)    pc <= '0;
    else if (advance)  pc <= pc + 1'b1;
  end
endmodule
