// tb_scramble_c_dff_bank: the SCRAMBLE-C flip-flop bank at its default size
// (32 flip-flops, LOG2(32, 3, 1) CRLB). Each clock it drives random fan-in
// cone values, and now and then a new random key, and checks that q holds the
// reference CRLB's output one clock later; with en low q must hold; after
// reset q must be zero.
module tb_scramble_c_dff_bank;
  import tb_scramble_pkg::*;

  localparam int N = 32, M = 3, K = (N/2) * (5 + M);

  logic clk = 0, rst_n = 0, en = 0;
  logic [N-1:0] fic, inv, q;
  logic [K-1:0] ks;
  logic [N-1:0] exp_q;
  int checks = 0, failures = 0, held = 0;

  scramble_c_dff_bank dut (.clk(clk), .rst_n(rst_n), .en(en), .fic(fic),
                           .key_sw(ks), .key_inv(inv), .q(q));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [MAXK-1:0] k;
    logic [MAXN-1:0] m;
    k = rand_bits(); ks = k[K-1:0]; inv = $urandom; fic = $urandom;
    repeat (2) @(negedge clk);
    checks++;
    if (q != '0) begin failures++; $display("FAIL reset value %h", q); end
    rst_n = 1;
    exp_q = '0;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      if (t % 100 == 0) begin k = rand_bits(); ks = k[K-1:0]; inv = $urandom; end
      fic = $urandom;
      en  = ($urandom_range(7) != 0);
      m = crlb_model(N, M, MAXN'(fic), MAXK'(ks), MAXN'(inv));
      if (en) exp_q = m[N-1:0];
      else    held++;
      @(negedge clk);
      checks++;
      if (q != exp_q) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d en=%0b q=%h exp=%h", t, en, q, exp_q);
      end
    end
    checks++;
    if (held == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
