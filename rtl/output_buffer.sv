// output_buffer: output buffer of GRAMC.
//
// "The computation results converted by ADCs will be stored in the output buffer", from
// where the digital functional module and the host read them. One write port, shared in
// time by the solve path and the functional module, and three synchronous read ports:
// two for the functional module (bit-slice recombination reads two operands per word)
// and one for the host. Read data appear one cycle after the address. Port count, depth
// and the 16-bit word are this design's choices.
module output_buffer
  import gramc_pkg::*;
#(
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned W     = DATA_W,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [W-1:0]  wr_data,
  input  logic [AW-1:0] rd_addr_a,
  output logic [W-1:0]  rd_data_a,
  input  logic [AW-1:0] rd_addr_b,
  output logic [W-1:0]  rd_data_b,
  input  logic [AW-1:0] rd_addr_h,
  output logic [W-1:0]  rd_data_h
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    rd_data_a <= mem[rd_addr_a];
    rd_data_b <= mem[rd_addr_b];
    rd_data_h <= mem[rd_addr_h];
  end
endmodule
