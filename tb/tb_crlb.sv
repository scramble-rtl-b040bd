// tb_crlb: checks the CRLB at its default size (32 inputs, eight stages) and
// at the paper's drawn size of 8 inputs (four stages).
//  * random inputs and keys against the packet-tracking reference model;
//  * with the inversion keys at zero, every key is a permutation (one-hot
//    inputs come out one-hot);
//  * 8 inputs, all switch keys 0: three perfect shuffles compose to the
//    identity, so out = in ^ key_inv;
//  * single-bit key changes change the routing (key sensitivity).
module tb_crlb;
  import tb_scramble_pkg::*;

  localparam int N1 = 32, M1 = 3, K1 = (N1/2) * (5 + M1);
  localparam int N2 = 8,  M2 = 1, K2 = (N2/2) * (3 + M2);

  logic [N1-1:0] in1, inv1, out1;
  logic [K1-1:0] ks1;
  logic [N2-1:0] in2, inv2, out2;
  logic [K2-1:0] ks2;

  int checks = 0, failures = 0;

  crlb dut1 (.in(in1), .key_sw(ks1), .key_inv(inv1), .out(out1));
  crlb #(.N(N2)) dut2 (.in(in2), .key_sw(ks2), .key_inv(inv2), .out(out2));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [MAXK-1:0] k;
    logic [MAXN-1:0] exp;
    // random vectors
    for (int t = 0; t < 2000; t++) begin
      k = rand_bits();
      ks1 = k[K1-1:0]; in1 = $urandom; inv1 = $urandom;
      ks2 = k[K2-1:0]; in2 = 8'($urandom); inv2 = 8'($urandom);
      #1;
      exp = crlb_model(N1, M1, MAXN'(in1), MAXK'(ks1), MAXN'(inv1));
      check(out1 == exp[N1-1:0], $sformatf("N=32 in=%h out=%h exp=%h", in1, out1, exp[N1-1:0]));
      exp = crlb_model(N2, M2, MAXN'(in2), MAXK'(ks2), MAXN'(inv2));
      check(out2 == exp[N2-1:0], $sformatf("N=8 in=%h out=%h exp=%h", in2, out2, exp[N2-1:0]));
    end
    // permutation property
    for (int t = 0; t < 50; t++) begin
      k = rand_bits(); ks1 = k[K1-1:0]; inv1 = '0;
      for (int b = 0; b < N1; b++) begin
        in1 = N1'(1) << b;
        #1;
        check($countones(out1) == 1, "one-hot in, one-hot out");
      end
    end
    // identity for N=8 with all switches straight
    ks2 = '0;
    for (int t = 0; t < 20; t++) begin
      in2 = 8'($urandom); inv2 = 8'($urandom);
      #1;
      check(out2 == (in2 ^ inv2), "N=8 straight network is the identity");
    end
    // key sensitivity: flipping one switch key moves exactly two outputs
    for (int t = 0; t < 200; t++) begin
      logic [N1-1:0] o0;
      int bitn;
      k = rand_bits(); ks1 = k[K1-1:0]; inv1 = '0;
      in1 = $urandom;
      #1; o0 = out1;
      bitn = $urandom_range(K1-1);
      ks1[bitn] = ~ks1[bitn];
      #1;
      exp = crlb_model(N1, M1, MAXN'(in1), MAXK'(ks1), '0);
      check(out1 == exp[N1-1:0], "flipped key matches model");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
