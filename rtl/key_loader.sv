// key_loader: boot-time transfer of the locking key from the tamper-proof NVM.
//
// After reset the loader reads the NVM word by word, one read request per
// clock, and distributes the words in address order:
//   words 0 .. KA_WORDS-1            -> key A (bit 8w+b of key A = bit b of word w)
//   next KB_WORDS words              -> key B, packed the same way
//   next 2^MEM_AW words              -> the SCRAMBLE-L memory, word j to address j
// Key A and key B are the keys of two CRLBs (switch-box keys followed by
// inversion keys). When the last word has been written, done rises and
// stays high until the next reset; the locked blocks are held until then.
//
// NVM interface: nvm_rd with nvm_addr requests a word, which arrives on
// nvm_rdata in the next cycle. Load time: KA_WORDS + KB_WORDS + 2^MEM_AW + 1
// clocks from the end of reset to done.
//
// From the paper: keys and memory contents are held in a tamper-proof NVM
// and loaded into the memories at boot. The read protocol, word order and
// NVM word width are this design's choices.
module key_loader
  import scramble_pkg::*;
#(
  parameter int unsigned KA_BITS = 160,
  parameter int unsigned KB_BITS = 64,
  parameter int unsigned MEM_AW  = 8,
  parameter int unsigned MEM_DW  = 8,
  localparam int unsigned W        = NVM_WORD_W,
  localparam int unsigned KA_WORDS = (KA_BITS + W - 1) / W,
  localparam int unsigned KB_WORDS = (KB_BITS + W - 1) / W,
  localparam int unsigned TOTAL    = KA_WORDS + KB_WORDS + 2**MEM_AW,
  localparam int unsigned NAW      = $clog2(TOTAL + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  output logic               nvm_rd,
  output logic [NAW-1:0]     nvm_addr,
  input  logic [W-1:0]       nvm_rdata,
  output logic [KA_BITS-1:0] key_a,
  output logic [KB_BITS-1:0] key_b,
  output logic               mem_we,
  output logic [MEM_AW-1:0]  mem_waddr,
  output logic [MEM_DW-1:0]  mem_wdata,
  output logic               done
);
  typedef enum logic [1:0] {ISSUE, DRAIN, DONE} state_e;
  state_e state;

  logic [NAW-1:0]        raddr_q;   // address of the word now on nvm_rdata
  logic                  rvalid_q;
  logic [KA_WORDS*W-1:0] ka_q;
  logic [KB_WORDS*W-1:0] kb_q;

  assign nvm_rd = (state == ISSUE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= ISSUE;
      nvm_addr <= '0;
      raddr_q  <= '0;
      rvalid_q <= 1'b0;
      ka_q     <= '0;
      kb_q     <= '0;
    end else begin
      rvalid_q <= nvm_rd;
      raddr_q  <= nvm_addr;
      case (state)
        ISSUE: begin
          if (nvm_addr == NAW'(TOTAL - 1)) state <= DRAIN;
          else                              nvm_addr <= nvm_addr + 1'b1;
        end
        DRAIN:   state <= DONE;
        default: state <= DONE;
      endcase
      if (rvalid_q) begin
        if (raddr_q < NAW'(KA_WORDS))
          ka_q[int'(raddr_q)*W +: W] <= nvm_rdata;
        else if (raddr_q < NAW'(KA_WORDS + KB_WORDS))
          kb_q[(int'(raddr_q) - KA_WORDS)*W +: W] <= nvm_rdata;
      end
    end
  end

  // memory words are written straight through as they arrive
  assign mem_we    = rvalid_q && (raddr_q >= NAW'(KA_WORDS + KB_WORDS));
  assign mem_waddr = MEM_AW'(raddr_q - NAW'(KA_WORDS + KB_WORDS));
  assign mem_wdata = MEM_DW'(nvm_rdata);

  assign key_a = ka_q[KA_BITS-1:0];
  assign key_b = kb_q[KB_BITS-1:0];
  assign done  = (state == DONE);
endmodule
