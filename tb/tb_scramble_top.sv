// tb_scramble_top: end-to-end run of the locked circuit at the default sizes
// (32-input CRLB on the flip-flop bank, 16-input CRLB on the scan chain,
// 2^8 x 8 SCRAMBLE-L memory), with nothing overridden.
//
// A behavioural NVM holds the key and the memory contents. The testbench
// plays the circuit being locked: its fan-in cones compute the bank's next
// value g' = (5*g + pi) ^ (g >> 7) from the bank outputs and a random primary
// input pi, and are wired to the CRLB inputs in the order the correct key
// expects (output k of the CRLB is fed from the input the key routes to it,
// pre-inverted by the key's inversion bit). Two boots are run:
//   1. correct key: the bank must track the unlocked reference every clock,
//      a scan capture and shift-out must return the captured data, and the
//      memory FSM must follow its reference table;
//   2. one switch-box key bit wrong in the NVM: the bank must leave the
//      reference sequence (false transitions) and the scan shift-out must
//      no longer return the captured data.
// Mechanisms counted, each must occur: bank held during boot, boot completed,
// correct-key bank cycles, wrong-key divergence, scan capture, scan shift,
// scan round trip, wrong-key scan corruption, FSM transitions, FSM input
// selection changing with the state.
module tb_scramble_top;
  import tb_scramble_pkg::*;

  localparam int DN = 32, DM = 3, DSW = (DN/2) * 8, DK = DSW + DN;
  localparam int SN = 16, SM = 2, SSW = (SN/2) * 6, SK = SSW + SN;
  localparam int DKW = DK / 8, SKW = SK / 8, TOT = DKW + SKW + 256;

  logic clk = 0, rst_n = 0;
  logic nvm_rd, boot_done, scan_en = 0, scan_in = 0, scan_out;
  logic [8:0] nvm_addr;
  logic [7:0] nvm_rdata, fsm_in = 0;
  logic [DN-1:0] fic_d = 0, bank_q;
  logic [SN-1:0] scan_d = 0, scan_q;
  logic [3:0] fsm_state, fsm_out;

  logic [7:0] nvm [TOT];
  logic [DK-1:0] key_d;
  logic [SK-1:0] key_s;
  logic [7:0] table_q [256];

  int checks = 0, failures = 0;
  int n_hold = 0, n_boot = 0, n_bank_ok = 0, n_diverge = 0, n_capture = 0;
  int n_shift = 0, n_roundtrip = 0, n_scan_bad = 0, n_fsm = 0, n_selchange = 0;

  scramble_top dut (
    .clk(clk), .rst_n(rst_n),
    .nvm_rd(nvm_rd), .nvm_addr(nvm_addr), .nvm_rdata(nvm_rdata), .boot_done(boot_done),
    .fic_d(fic_d), .bank_q(bank_q),
    .scan_en(scan_en), .scan_in(scan_in), .scan_d(scan_d), .scan_q(scan_q), .scan_out(scan_out),
    .fsm_in(fsm_in), .fsm_state(fsm_state), .fsm_out(fsm_out));

  always #5 clk = ~clk;

  always_ff @(posedge clk) if (nvm_rd) nvm_rdata <= nvm[nvm_addr];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  function automatic logic [DN-1:0] host_next(logic [DN-1:0] g, logic [DN-1:0] pi);
    return (g * 5 + pi) ^ (g >> 7);
  endfunction

  // fan-in-cone wiring for the correct key: CRLB input src[k] carries the
  // value wanted at flip-flop k, pre-inverted by inversion key k
  function automatic logic [DN-1:0] wire_fic(logic [DN-1:0] want);
    dest_t src;
    logic [DN-1:0] f;
    src = crlb_src(DN, DM, MAXK'(key_d[DSW-1:0]));
    for (int k = 0; k < DN; k++) f[src[k]] = want[k] ^ key_d[DSW + k];
    return f;
  endfunction

  // scan order of the correct scan key; 0 if it is not one chain
  function automatic bit chain_order(logic [SSW-1:0] ks, output int order[SN]);
    dest_t src;
    int cur;
    bit seen[SN];
    src = crlb_src(SN, SM, MAXK'(ks));
    for (int i = 0; i < SN; i++) seen[i] = 0;
    cur = 0;
    for (int i = 0; i < SN; i++) begin
      int nxt = -1;
      for (int f = 0; f < SN; f++) if (src[f] == cur) nxt = f;
      if (nxt < 0 || seen[nxt]) return 0;
      seen[nxt] = 1; order[i] = nxt;
      cur = nxt + 1;
    end
    return order[SN-1] == SN - 1;
  endfunction

  task automatic fill_nvm(logic [DK-1:0] kd, logic [SK-1:0] ks);
    for (int i = 0; i < DKW; i++) nvm[i] = kd[i*8 +: 8];
    for (int i = 0; i < SKW; i++) nvm[DKW + i] = ks[i*8 +: 8];
    for (int i = 0; i < 256; i++) nvm[DKW + SKW + i] = table_q[i];
  endtask

  task automatic boot();
    rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    while (!boot_done) begin
      fic_d = $urandom;
      @(negedge clk);
      if (!boot_done) begin
        check(bank_q == '0 && fsm_state == '0, "held during boot");
        n_hold++;
      end
    end
    n_boot++;
  endtask

  // runs the bank for n clocks from the reference; returns divergences
  task automatic run_bank(int n, int seed, bit expect_match, output int diverged);
    logic [DN-1:0] g, pi;
    int unused;
    g = '0; diverged = 0;
    unused = $urandom(seed);
    for (int t = 0; t < n; t++) begin
      pi = $urandom;
      fic_d = wire_fic(host_next(bank_q, pi));
      g = host_next(g, pi);
      @(negedge clk);
      if (bank_q != g) diverged++;
      if (expect_match) begin
        check(bank_q == g, $sformatf("bank t=%0d q=%h exp=%h", t, bank_q, g));
        n_bank_ok++;
      end
    end
  endtask

  // capture d, shift the chain out; returns the data as read
  task automatic scan_unload(int order[SN], logic [SN-1:0] d, output logic [SN-1:0] got);
    scan_en = 0; scan_d = d;
    @(negedge clk);
    n_capture++;
    check(scan_q == d, "scan capture");
    scan_en = 1;
    for (int i = SN - 1; i >= 0; i--) begin
      logic b;
      b = scan_out;
      for (int h = i + 1; h < SN; h++) b ^= key_s[SSW + order[h]];
      got[order[i]] = b;
      scan_in = $urandom_range(1);
      @(negedge clk);
      n_shift++;
    end
    scan_en = 0;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [MAXK-1:0] r;
    int order[SN];
    int tries, div;
    logic [SN-1:0] cap, got;
    logic [DK-1:0] bad_d;
    logic [3:0] rs, ro, prev_sel_state;
    bit seen_sel [16];
    int nsel;

    // correct key: random data-pin key, chain-forming scan key
    r = rand_bits(); key_d = r[DK-1:0];
    tries = 0;
    do begin r = rand_bits(); key_s[SSW-1:0] = r[SSW-1:0]; tries++; end
    while (!chain_order(key_s[SSW-1:0], order) && tries < 100000);
    check(tries < 100000, "found a chain-forming scan key");
    key_s[SK-1:SSW] = 16'($urandom);
    for (int i = 0; i < 256; i++) table_q[i] = 8'($urandom);
    fill_nvm(key_d, key_s);

    // ---- boot 1: correct key ----
    boot();
    check(boot_done, "boot done");
    run_bank(500, 11, 1, div);
    // scan round trip
    for (int p = 0; p < 4; p++) begin
      cap = 16'($urandom);
      scan_unload(order, cap, got);
      check(got == cap, $sformatf("scan round trip %h exp %h", got, cap));
      if (got == cap) n_roundtrip++;
    end
    // memory FSM: reference from the table, inputs chosen by the state
    rs = fsm_state; ro = fsm_out; nsel = 0;
    for (int i = 0; i < 16; i++) seen_sel[i] = 0;
    for (int t = 0; t < 500; t++) begin
      logic [3:0] sel;
      logic [7:0] w;
      fsm_in = 8'($urandom);
      for (int j = 0; j < 4; j++) sel[j] = fsm_in[(int'(rs) + 2*j) % 8];
      w = table_q[{rs, sel}];
      rs = w[3:0]; ro = w[7:4];
      @(negedge clk);
      check(fsm_state == rs && fsm_out == ro, $sformatf("fsm t=%0d state=%h exp %h", t, fsm_state, rs));
      n_fsm++;
      if (!seen_sel[rs]) begin seen_sel[rs] = 1; nsel++; end
    end
    n_selchange = nsel;   // distinct states, each with its own input selection

    // ---- boot 2: one switch-box key bit wrong ----
    bad_d = key_d;
    bad_d[$urandom_range(DSW-1)] ^= 1'b1;
    fill_nvm(bad_d, key_s ^ SK'(1));
    boot();
    run_bank(500, 11, 0, div);
    if (div > 0) n_diverge++;
    check(div > 0, "wrong data-pin key leaves the reference sequence");
    cap = 16'($urandom);
    scan_unload(order, cap, got);
    if (got != cap) n_scan_bad++;
    check(got != cap, "wrong scan key corrupts the shift-out");

    $display("mechanisms: hold=%0d boot=%0d bank_ok=%0d diverge=%0d capture=%0d shift=%0d roundtrip=%0d scan_bad=%0d fsm=%0d states=%0d",
             n_hold, n_boot, n_bank_ok, n_diverge, n_capture, n_shift, n_roundtrip, n_scan_bad, n_fsm, n_selchange);
    check(n_hold > 0, "hold");         check(n_boot == 2, "boots");
    check(n_bank_ok > 0, "bank");      check(n_diverge > 0, "divergence");
    check(n_capture > 0, "capture");   check(n_shift > 0, "shift");
    check(n_roundtrip > 0, "roundtrip"); check(n_scan_bad > 0, "scan corrupted");
    check(n_fsm > 0, "fsm");           check(n_selchange > 1, "input selection");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
