// global_buffer: on-chip global buffer of GRAMC.
//
// Holds, loaded by the host in advance, the ideal conductance levels used by write-verify
// ("ideal values from global buffer") and the digital input vectors sent to the DACs during
// system solution ("external digital inputs from global buffer"). One host write port and
// one synchronous read port (data one cycle after the address). Depth and the 8-bit word
// (a signed DAC code or an unsigned 4-bit level) are this design's choices.
module global_buffer
  import gramc_pkg::*;
#(
  parameter int unsigned DEPTH = 65536,
  parameter int unsigned W     = GBUF_W,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [W-1:0]  wr_data,
  input  logic [AW-1:0] rd_addr,
  output logic [W-1:0]  rd_data
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    rd_data <= mem[rd_addr];
  end
endmodule
