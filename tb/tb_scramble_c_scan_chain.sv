// tb_scramble_c_scan_chain: the SCRAMBLE-C scan chain at its default size
// (16 scan flip-flops, LOG2(16, 2, 1) CRLB).
//  * cycle by cycle against a reference chain built on the reference CRLB,
//    with random scan_en, scan_in, d and keys;
//  * with a key whose routing forms one chain through all 16 flip-flops
//    (found by trying random keys on the reference model), a pattern shifted
//    in, a functional capture and a shift-out return the captured data in
//    chain order, with the key's inversions undone;
//  * with a different key the same procedure returns different data.
module tb_scramble_c_scan_chain;
  import tb_scramble_pkg::*;

  localparam int N = 16, M = 2, K = (N/2) * (4 + M);

  logic clk = 0, rst_n = 0, scan_en = 0, scan_in = 0, scan_out;
  logic [N-1:0] d, inv, q, ref_q;
  logic [K-1:0] ks;
  int checks = 0, failures = 0;

  scramble_c_scan_chain dut (.clk(clk), .rst_n(rst_n), .scan_en(scan_en),
    .scan_in(scan_in), .d(d), .key_sw(ks), .key_inv(inv), .q(q), .scan_out(scan_out));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // one clock of the reference chain
  task automatic step();
    logic [MAXN-1:0] si;
    si = crlb_model(N, M, MAXN'({ref_q[N-2:0], scan_in}), MAXK'(ks), MAXN'(inv));
    @(negedge clk);
    ref_q = scan_en ? si[N-1:0] : d;
    check(q == ref_q && scan_out == ref_q[N-1], $sformatf("q=%h exp=%h", q, ref_q));
  endtask

  // chain order for the current key: order[i] = flip-flop at hop i; 0 if the
  // routing does not form a single chain
  function automatic bit chain_order(output int order[N]);
    dest_t src;
    int cur;
    bit seen[N];
    src = crlb_src(N, M, MAXK'(ks));
    for (int i = 0; i < N; i++) seen[i] = 0;
    cur = 0;  // CRLB input 0 = scan_in
    for (int i = 0; i < N; i++) begin
      int nxt = -1;
      for (int f = 0; f < N; f++) if (src[f] == cur) nxt = f;
      if (nxt < 0 || seen[nxt]) return 0;
      seen[nxt] = 1; order[i] = nxt;
      cur = nxt + 1;
    end
    return order[N-1] == N - 1;
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [MAXK-1:0] k;
    int order[N];
    int tries;
    logic [N-1:0] cap, got;
    logic [N-1:0] good_inv;
    logic [K-1:0] good_ks;
    k = rand_bits(); ks = k[K-1:0]; inv = 16'($urandom); d = 16'($urandom);
    @(negedge clk);
    ref_q = '0;
    check(q == '0, "reset");
    rst_n = 1;
    // random cycles
    for (int t = 0; t < 3000; t++) begin
      if (t % 64 == 0) begin k = rand_bits(); ks = k[K-1:0]; inv = 16'($urandom); end
      scan_en = $urandom_range(1); scan_in = $urandom_range(1); d = 16'($urandom);
      step();
    end
    // find a key that forms a single chain
    tries = 0;
    do begin
      k = rand_bits(); ks = k[K-1:0]; tries++;
    end while (!chain_order(order) && tries < 100000);
    check(tries < 100000, "found a chain-forming key");
    good_ks = ks; inv = 16'($urandom); good_inv = inv;
    // capture, then shift out
    for (int pass = 0; pass < 2; pass++) begin
      if (pass == 1) begin
        // wrong key: one switch key flipped
        ks = good_ks; ks[$urandom_range(K-1)] ^= 1'b1;
      end
      scan_en = 0; d = 16'($urandom); cap = d;
      step();
      scan_en = 1;
      got = '0;
      for (int i = N - 1; i >= 0; i--) begin
        // the bit now at scan_out came from flip-flop order[i]; it has been
        // through the inversions of every hop after hop i
        logic b;
        b = scan_out;
        for (int h = i + 1; h < N; h++) b ^= good_inv[order[h]];
        got[order[i]] = b;
        scan_in = $urandom_range(1);
        step();
      end
      if (pass == 0) check(got == cap, $sformatf("scan-out %h captured %h", got, cap));
      else           check(got != cap, "wrong key corrupts the scan-out");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
