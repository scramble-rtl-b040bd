// scramble_c_dff_bank: SCRAMBLE-C locking of FSM and datapath flip-flops.
//
// N flip-flops, which may mix controller (FSM) state bits and datapath bits,
// take their data inputs through a CRLB instead of straight from their
// fan-in cones (FiCs). With the correct key the CRLB routes, and un-inverts,
// every FiC output to the flip-flop it belongs to; with any other key the
// flip-flops receive permuted and negated values, which adds key-controlled
// false state transitions and false FF-to-FF connections.
//
// Interface: fic[] are the FiC outputs in the order they are wired to the
// CRLB inputs, q[] the flip-flop outputs that return to the FiCs and the
// primary outputs. en is a clock enable (held low until the key is loaded);
// rst_n is an asynchronous active-low reset to all zeros. Timing: q follows
// the routed fic one clock edge later, the CRLB being combinational.
//
// From the paper: the CRLB placed between the FiC outputs and the DI pins.
// This design's choices: the enable, the reset and its value.
module scramble_c_dff_bank
  import scramble_pkg::*;
#(
  parameter int unsigned N = 32,
  parameter int unsigned M = $clog2(N) - 2,
  localparam int unsigned SWK = crlb_sw_keys(N, M)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           en,
  input  logic [N-1:0]   fic,      // fan-in-cone outputs
  input  logic [SWK-1:0] key_sw,
  input  logic [N-1:0]   key_inv,
  output logic [N-1:0]   q
);
  logic [N-1:0] di;

  crlb #(.N(N), .M(M)) u_crlb (
    .in      (fic),
    .key_sw  (key_sw),
    .key_inv (key_inv),
    .out     (di)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  q <= '0;
    else if (en) q <= di;
  end
endmodule
