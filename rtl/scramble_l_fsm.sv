// scramble_l_fsm: SCRAMBLE-L, a memory-based FSM with input multiplexing.
//
// The next-state and output logic of an FSM is replaced by a memory of
// 2^(i'+s) words of (o+s) bits. The current state (s bits) drives the FSMIM
// multiplexers, which pick the i' primary inputs that matter in that state;
// the state and those i' inputs form the memory address, {state, sel_in}.
// The word read back is {output, next state}: bits [S_W-1:0] are the next
// state, bits [S_W+O_W-1:S_W] the registered outputs. The memory is loaded
// at boot from the key NVM, so the netlist holds no logic equivalent to the
// hidden FSM.
//
// Interface: run enables the state and output flip-flops (held low until the
// memory is loaded); mem_we/mem_waddr/mem_wdata is the boot write port.
// Timing: one transition per enabled clock. rst_n is an asynchronous
// active-low reset to state 0 and output 0; taking state 0 as the initial
// state is this design's choice. The defaults give the paper's resilient
// 2^8 x 8 memory (i' + s = 8, o + s = 8); the split 4 + 4 is this design's
// choice.
module scramble_l_fsm #(
  parameter int unsigned I_W  = 8,   // primary inputs i
  parameter int unsigned IP_W = 4,   // multiplexed inputs i'
  parameter int unsigned S_W  = 4,   // state bits s
  parameter int unsigned O_W  = 4,   // output bits o
  localparam int unsigned AW = IP_W + S_W,
  localparam int unsigned DW = O_W + S_W
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           run,
  input  logic [I_W-1:0] in,
  input  logic           mem_we,
  input  logic [AW-1:0]  mem_waddr,
  input  logic [DW-1:0]  mem_wdata,
  output logic [S_W-1:0] state,
  output logic [O_W-1:0] out
);
  logic [IP_W-1:0] sel_in;
  logic [DW-1:0]   word;

  fsmim_mux #(.I_W(I_W), .IP_W(IP_W), .S_W(S_W)) u_mux (
    .in     (in),
    .state  (state),
    .sel_in (sel_in)
  );

  lock_sram #(.AW(AW), .DW(DW)) u_mem (
    .clk   (clk),
    .we    (mem_we),
    .waddr (mem_waddr),
    .wdata (mem_wdata),
    .raddr ({state, sel_in}),
    .rdata (word)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= '0;
      out   <= '0;
    end else if (run) begin
      state <= word[S_W-1:0];
      out   <= word[DW-1:S_W];
    end
  end
endmodule
