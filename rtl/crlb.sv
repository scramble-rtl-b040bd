// crlb: configurable routing and logic block of SCRAMBLE-C.
//
// A near non-blocking logarithmic shuffle network LOG2(N, M, 1) with
// M = log2(N) - 2 extra cascaded stages (for N = 8: four stages of four
// switch boxes, for N = 32: eight stages of sixteen). Every stage is a column
// of N/2 sw2x2 boxes; box r of a stage takes positions 2r and 2r+1. Between
// two stages the wiring is the perfect shuffle: output position p feeds input
// position rotl(p) of the next stage. The first stage is fed straight from
// the inputs and the last stage feeds straight into the inversion layer,
// out[p] = x[p] ^ key_inv[p], which lets the key both permute and negate.
//
// Key layout follows the paper's 8-input drawing, where box sw_ij (row i,
// stage j) is driven by k_(i*STAGES + j): key_sw[r*STAGES + s] controls the
// box in row r of stage s. The network is purely combinational; the keys are
// expected to be static after boot.
//
// From the paper: the sw2x2 boxes, the shuffle topology, the number of
// stages and the XOR inversion layer as the last layer. This design's
// choices: the exact shuffle permutation (the standard perfect shuffle), no
// shuffle before the first stage or after the last, and the key numbering.
module crlb
  import scramble_pkg::*;
#(
  parameter int unsigned N = 32,               // inputs / outputs (power of 2)
  parameter int unsigned M = $clog2(N) - 2,    // extra cascaded stages
  localparam int unsigned STAGES = crlb_stages(N, M),
  localparam int unsigned SWK    = crlb_sw_keys(N, M)
) (
  input  logic [N-1:0]   in,
  input  logic [SWK-1:0] key_sw,   // switch-box keys
  input  logic [N-1:0]   key_inv,  // inversion-layer keys
  output logic [N-1:0]   out
);
  // st[s]: inputs of stage s; x[s]: outputs of stage s
  logic [N-1:0] st [STAGES];
  logic [N-1:0] x  [STAGES];

  assign st[0] = in;

  for (genvar s = 0; s < STAGES; s++) begin : g_stage
    for (genvar r = 0; r < N / 2; r++) begin : g_box
      sw2x2 u_sw (
        .wi   (st[s][2*r]),
        .wj   (st[s][2*r+1]),
        .k    (key_sw[r*STAGES + s]),
        .wi_o (x[s][2*r]),
        .wj_o (x[s][2*r+1])
      );
    end
    if (s < STAGES - 1) begin : g_shuffle
      for (genvar p = 0; p < N; p++) begin : g_wire
        assign st[s+1][shuffle_pos(p, N)] = x[s][p];
      end
    end
  end

  // inversion layer: out = in XOR key
  assign out = x[STAGES-1] ^ key_inv;

endmodule
