// lutram64x1 - 64 x 1 distributed RAM, the writeable form of an FPGA 6-input LUT.
//
// Read is asynchronous: o always shows the bit at address a.  Write is synchronous: when we is
// high at a rising clock edge, bit d is stored at address a and appears on o after that edge.
// There is no reset, as in the FPGA primitive; the contents must be written before they are
// relied upon.  The 64 x 1 shape follows the LUTRAMs the TsetlinWiSARD architecture uses;
// ADDR_W is kept as a parameter so other LUT sizes can be tried.
module lutram64x1 #(
  parameter int unsigned ADDR_W = 6
) (
  input  logic              clk,
  input  logic              we,
  input  logic [ADDR_W-1:0] a,
  input  logic              d,
  output logic              o
);
  logic [(1<<ADDR_W)-1:0] mem;

  always_ff @(posedge clk) begin
    if (we) mem[a] <= d;
  end

  assign o = mem[a];
endmodule
