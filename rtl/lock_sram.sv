// lock_sram: the SCRAMBLE-L memory, 2^AW words of DW bits.
//
// Holds the truth table of the fan-in cones it replaces. It is written only
// at boot, one word per clock through the write port, from the tamper-proof
// key NVM; afterwards it is only read. The read is a one-cycle read: the
// address is presented in a cycle and the word is captured by the state and
// output flip-flops of the FSM at the end of that same cycle, so the read
// port itself is combinational here. Written as an array; a synthesis flow
// maps it to an SRAM macro. The contents are not reset.
//
// From the paper: a one-cycle read memory such as an SRAM, 2^8 x 8 as the
// resilient size. This design's choices: the write port and the
// combinational read port feeding external flip-flops.
module lock_sram #(
  parameter int unsigned AW = 8,
  parameter int unsigned DW = 8
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [DW-1:0] wdata,
  input  logic [AW-1:0] raddr,
  output logic [DW-1:0] rdata
);
  logic [DW-1:0] mem [2**AW];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];
endmodule
