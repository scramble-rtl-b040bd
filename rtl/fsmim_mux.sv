// fsmim_mux: FSM input multiplexing (FSMIM) controlled by the current state.
//
// In any one state an FSM's next state and outputs depend on only a few of
// its inputs. IP_W multiplexers, each choosing one of the I_W primary
// inputs, pass on just those inputs, so the SCRAMBLE-L memory is addressed
// by IP_W input bits instead of I_W. The selects are a fixed function of the
// current state: SEL_MAP holds, for state s and multiplexer m, the input
// index at bit offset (s*IP_W + m)*SELW. Purely combinational.
//
// From the paper: multiplexers controlled by the current state (the first of
// its two FSMIM options). This design's choices: one I_W:1 multiplexer per
// selected input and the default map sel(s, m) = (s + m*I_W/IP_W) mod I_W,
// which stands in for the map a designer derives from the FSM being locked.
// The map must fit in scramble_pkg::FSMIM_MAP_MAX bits (4096).
module fsmim_mux
  import scramble_pkg::*;
#(
  parameter int unsigned I_W  = 8,   // primary inputs i
  parameter int unsigned IP_W = 4,   // selected inputs i'
  parameter int unsigned S_W  = 4,   // state bits s
  localparam int unsigned SELW = (I_W > 1) ? $clog2(I_W) : 1,
  localparam int unsigned MAPW = (2**S_W) * IP_W * SELW,
  parameter logic [MAPW-1:0] SEL_MAP =
      MAPW'(fsmim_default_map(I_W, IP_W, S_W, SELW))
) (
  input  logic [I_W-1:0]  in,
  input  logic [S_W-1:0]  state,
  output logic [IP_W-1:0] sel_in
);
  always_comb begin
    for (int j = 0; j < IP_W; j++) begin
      logic [SELW-1:0] idx;
      idx = SEL_MAP[(int'(state)*IP_W + j)*SELW +: SELW];
      sel_in[j] = in[idx];
    end
  end
endmodule
