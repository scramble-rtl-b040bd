// sw2x2: key-programmable 2x2 switch box of the CRLB.
//
// The switch box takes two wires w_i and w_j and drives w'_i and w'_j. With
// its key bit at 0 it keeps the order (w'_i = w_i, w'_j = w_j); with the key
// at 1 it swaps them. As in the paper's switch-box drawing it is two 2:1
// multiplexers sharing one key bit. Which key value means "keep" is not
// given in the paper; 0 = keep is this design's choice. Purely
// combinational.
module sw2x2 (
  input  logic wi,    // upper input
  input  logic wj,    // lower input
  input  logic k,     // key: 0 keeps the order, 1 swaps
  output logic wi_o,  // upper output w'_i
  output logic wj_o   // lower output w'_j
);
  assign wi_o = k ? wj : wi;
  assign wj_o = k ? wi : wj;
endmodule
