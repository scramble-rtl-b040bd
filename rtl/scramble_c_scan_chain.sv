// scramble_c_scan_chain: SCRAMBLE-C locking of a scan chain.
//
// N scan flip-flops (SFFs). In functional mode (scan_en = 0) SFF k loads its
// data input d[k]. In scan mode (scan_en = 1) its scan-in (SI) pin is driven
// by output k of a CRLB placed in the scan network. The CRLB inputs are the
// chain's hops: input 0 is the chip's scan_in, input k (k >= 1) is the output
// of SFF k-1. SFF N-1 drives scan_out. The key therefore chooses which SFF
// follows which and which hops are inverted: the correct key yields the one
// scan order known to the test program, every other key a false sequence (or
// a broken chain), so shifting patterns in and responses out is useless
// without it.
//
// Timing: one shift per clock in scan mode; the CRLB is combinational.
// rst_n is an asynchronous active-low reset to all zeros (this design's
// choice). From the paper: the CRLB before the SI pins. This design's
// choices: which wire feeds which CRLB input, and the reset.
module scramble_c_scan_chain
  import scramble_pkg::*;
#(
  parameter int unsigned N = 16,
  parameter int unsigned M = $clog2(N) - 2,
  localparam int unsigned SWK = crlb_sw_keys(N, M)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           scan_en,
  input  logic           scan_in,
  input  logic [N-1:0]   d,        // functional data inputs
  input  logic [SWK-1:0] key_sw,
  input  logic [N-1:0]   key_inv,
  output logic [N-1:0]   q,
  output logic           scan_out
);
  logic [N-1:0] hop;   // CRLB inputs: scan_in and the SFF outputs
  logic [N-1:0] si;    // SI pins of the SFFs

  assign hop = {q[N-2:0], scan_in};

  crlb #(.N(N), .M(M)) u_crlb (
    .in      (hop),
    .key_sw  (key_sw),
    .key_inv (key_inv),
    .out     (si)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) q <= '0;
    else        q <= scan_en ? si : d;
  end

  assign scan_out = q[N-1];
endmodule
