// scramble_top: a sequential circuit's locking hardware under SCRAMBLE.
//
// Three locked structures share one boot-loaded key:
//   * SCRAMBLE-C on flip-flop data pins: a bank of D_N flip-flops (controller
//     and datapath bits mixed) whose DI pins are fed through a D_N-input
//     near non-blocking CRLB (default 32, LOG2(32, 3, 1)).
//   * SCRAMBLE-C on the scan network: an S_N-flip-flop scan chain whose SI
//     pins are fed through an S_N-input CRLB (default 16).
//   * SCRAMBLE-L: an FSM whose next-state and output logic is a 2^8 x 8
//     memory addressed by the state and the FSMIM-selected inputs.
// At reset, key_loader reads the tamper-proof NVM: the data-pin CRLB key,
// the scan CRLB key, then the 256 memory words. Until it raises boot_done
// the flip-flop bank and the memory FSM hold their reset state.
//
// The circuit being locked is outside this block: its fan-in cones drive
// fic_d (in the order they are wired to the CRLB) and scan_d, read bank_q,
// scan_q and the FSM outputs, and the NVM is reached through the nvm_*
// port (read data one cycle after the request). All flip-flops share clk
// and the asynchronous active-low rst_n.
//
// From the paper: the three locking structures and that their keys and
// memory contents come from a tamper-proof NVM at boot. This design's
// choices: one shared loader, the key order in the NVM, the holding of the
// locked blocks until the load is done, and the sizes of the scan chain
// (the 16-input CRLB the paper evaluates for scan locking) and of the
// FSM's input, state and output fields.
module scramble_top
  import scramble_pkg::*;
#(
  parameter int unsigned D_N  = 32,  // CRLB size on flip-flop data pins
  parameter int unsigned S_N  = 16,  // CRLB size on the scan chain
  parameter int unsigned I_W  = 8,   // SCRAMBLE-L FSM primary inputs
  parameter int unsigned IP_W = 4,   // multiplexed inputs
  parameter int unsigned S_W  = 4,   // state bits
  parameter int unsigned O_W  = 4,   // output bits
  localparam int unsigned D_M    = $clog2(D_N) - 2,
  localparam int unsigned S_M    = $clog2(S_N) - 2,
  localparam int unsigned D_SWK  = crlb_sw_keys(D_N, D_M),
  localparam int unsigned S_SWK  = crlb_sw_keys(S_N, S_M),
  localparam int unsigned D_KEY  = D_SWK + D_N,
  localparam int unsigned S_KEY  = S_SWK + S_N,
  localparam int unsigned MEM_AW = IP_W + S_W,
  localparam int unsigned MEM_DW = O_W + S_W,
  localparam int unsigned W      = NVM_WORD_W,
  localparam int unsigned NVM_WORDS = (D_KEY + W - 1) / W + (S_KEY + W - 1) / W + 2**MEM_AW,
  localparam int unsigned NAW    = $clog2(NVM_WORDS + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  // tamper-proof NVM
  output logic           nvm_rd,
  output logic [NAW-1:0] nvm_addr,
  input  logic [W-1:0]   nvm_rdata,
  output logic           boot_done,
  // SCRAMBLE-C, flip-flop data pins
  input  logic [D_N-1:0] fic_d,
  output logic [D_N-1:0] bank_q,
  // SCRAMBLE-C, scan chain
  input  logic           scan_en,
  input  logic           scan_in,
  input  logic [S_N-1:0] scan_d,
  output logic [S_N-1:0] scan_q,
  output logic           scan_out,
  // SCRAMBLE-L FSM
  input  logic [I_W-1:0] fsm_in,
  output logic [S_W-1:0] fsm_state,
  output logic [O_W-1:0] fsm_out
);
  logic [D_KEY-1:0]  key_d;
  logic [S_KEY-1:0]  key_s;
  logic              mem_we;
  logic [MEM_AW-1:0] mem_waddr;
  logic [MEM_DW-1:0] mem_wdata;

  key_loader #(
    .KA_BITS (D_KEY),
    .KB_BITS (S_KEY),
    .MEM_AW  (MEM_AW),
    .MEM_DW  (MEM_DW)
  ) u_loader (
    .clk       (clk),
    .rst_n     (rst_n),
    .nvm_rd    (nvm_rd),
    .nvm_addr  (nvm_addr),
    .nvm_rdata (nvm_rdata),
    .key_a     (key_d),
    .key_b     (key_s),
    .mem_we    (mem_we),
    .mem_waddr (mem_waddr),
    .mem_wdata (mem_wdata),
    .done      (boot_done)
  );

  scramble_c_dff_bank #(.N(D_N), .M(D_M)) u_bank (
    .clk     (clk),
    .rst_n   (rst_n),
    .en      (boot_done),
    .fic     (fic_d),
    .key_sw  (key_d[D_SWK-1:0]),
    .key_inv (key_d[D_KEY-1:D_SWK]),
    .q       (bank_q)
  );

  scramble_c_scan_chain #(.N(S_N), .M(S_M)) u_scan (
    .clk      (clk),
    .rst_n    (rst_n),
    .scan_en  (scan_en),
    .scan_in  (scan_in),
    .d        (scan_d),
    .key_sw   (key_s[S_SWK-1:0]),
    .key_inv  (key_s[S_KEY-1:S_SWK]),
    .q        (scan_q),
    .scan_out (scan_out)
  );

  scramble_l_fsm #(.I_W(I_W), .IP_W(IP_W), .S_W(S_W), .O_W(O_W)) u_fsm (
    .clk       (clk),
    .rst_n     (rst_n),
    .run       (boot_done),
    .in        (fsm_in),
    .mem_we    (mem_we),
    .mem_waddr (mem_waddr),
    .mem_wdata (mem_wdata),
    .state     (fsm_state),
    .out       (fsm_out)
  );
endmodule
