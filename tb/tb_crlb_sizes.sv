// tb_crlb_sizes: the CRLB and memory sizes whose cost the paper tabulates.
//  * CRLBs of 8, 16, 32 and 64 inputs (LOG2(N, log2(N)-2, 1)) against the
//    reference model for random inputs and keys.
//  * 8 inputs, all 2^16 switch-box keys: the permutation each key realises
//    is read from the RTL (three bit-plane vectors give every input's
//    destination) and compared with the model. The number of distinct
//    permutations is counted. A plain 3-stage logarithmic network has 12
//    keys and so at most 4096 permutations; the extra stage must reach
//    more, out of 8! = 40320.
//  * memories of 2^7, 2^8 and 2^9 words of 8 bits: fill and read back.
module tb_crlb_sizes;
  import tb_scramble_pkg::*;

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // ---- CRLBs ----
  logic [7:0]  i8,  v8,  o8;   logic [15:0]  k8;
  logic [15:0] i16, v16, o16;  logic [47:0]  k16;
  logic [31:0] i32, v32, o32;  logic [127:0] k32;
  logic [63:0] i64, v64, o64;  logic [319:0] k64;

  crlb #(.N(8))  u8  (.in(i8),  .key_sw(k8),  .key_inv(v8),  .out(o8));
  crlb #(.N(16)) u16 (.in(i16), .key_sw(k16), .key_inv(v16), .out(o16));
  crlb #(.N(32)) u32 (.in(i32), .key_sw(k32), .key_inv(v32), .out(o32));
  crlb #(.N(64)) u64 (.in(i64), .key_sw(k64), .key_inv(v64), .out(o64));

  // ---- memories ----
  logic clk = 0;
  logic we7, we8, we9;
  logic [8:0] wa, ra;
  logic [7:0] wd, rd7, rd8, rd9;
  lock_sram #(.AW(7), .DW(8)) m7 (.clk(clk), .we(we7), .waddr(wa[6:0]), .wdata(wd), .raddr(ra[6:0]), .rdata(rd7));
  lock_sram #(.AW(8), .DW(8)) m8 (.clk(clk), .we(we8), .waddr(wa[7:0]), .wdata(wd), .raddr(ra[7:0]), .rdata(rd8));
  lock_sram #(.AW(9), .DW(8)) m9 (.clk(clk), .we(we9), .waddr(wa),      .wdata(wd), .raddr(ra),      .rdata(rd9));

  always #5 clk = ~clk;

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic mem_test(int aw);
    logic [7:0] ref_m [512];
    logic [7:0] rd;
    @(negedge clk);
    for (int a = 0; a < 2**aw; a++) begin
      wa = 9'(a); wd = 8'($urandom); ref_m[a] = wd;
      we7 = (aw == 7); we8 = (aw == 8); we9 = (aw == 9);
      @(negedge clk);
    end
    we7 = 0; we8 = 0; we9 = 0;
    for (int a = 0; a < 2**aw; a++) begin
      ra = 9'(a);
      #1;
      rd = (aw == 7) ? rd7 : (aw == 8) ? rd8 : rd9;
      check(rd == ref_m[a], $sformatf("2^%0d memory word %0d", aw, a));
    end
  endtask

  initial begin
    logic [MAXK-1:0] k;
    logic [MAXN-1:0] e;
    bit seen [int];
    int distinct;
    we7 = 0; we8 = 0; we9 = 0; wa = 0; wd = 0; ra = 0;

    for (int t = 0; t < 500; t++) begin
      k = rand_bits();
      i8 = 8'($urandom); v8 = 8'($urandom); k8 = k[15:0];
      i16 = 16'($urandom); v16 = 16'($urandom); k16 = k[47:0];
      i32 = $urandom; v32 = $urandom; k32 = k[127:0];
      i64 = {$urandom, $urandom}; v64 = {$urandom, $urandom}; k64 = k[319:0];
      #1;
      e = crlb_model(8,  1, MAXN'(i8),  k, MAXN'(v8));  check(o8  == e[7:0],  "N=8");
      e = crlb_model(16, 2, MAXN'(i16), k, MAXN'(v16)); check(o16 == e[15:0], "N=16");
      e = crlb_model(32, 3, MAXN'(i32), k, MAXN'(v32)); check(o32 == e[31:0], "N=32");
      e = crlb_model(64, 4, MAXN'(i64), k, MAXN'(v64)); check(o64 == e[63:0], "N=64");
    end

    // every key of the 8-input network
    v8 = '0;
    distinct = 0;
    for (int key = 0; key < 65536; key++) begin
      logic [2:0] dst [8];
      dest_t d;
      int code;
      k8 = 16'(key);
      // bit-plane b of input a is bit b of a
      for (int b = 0; b < 3; b++) begin
        for (int a = 0; a < 8; a++) i8[a] = 1'(a >> b);
        #1;
        for (int p = 0; p < 8; p++) dst[p][b] = o8[p];  // input index now at p
      end
      d = crlb_dest(8, 1, MAXK'(k8));
      code = 0;
      for (int p = 0; p < 8; p++) begin
        if (d[dst[p]] != p) begin
          failures++;
          if (failures < 10) $display("FAIL key %h: input %0d at %0d", key, dst[p], p);
        end
        code = code * 8 + int'(dst[p]);
      end
      checks++;
      if (!seen.exists(code)) begin seen[code] = 1; distinct++; end
    end
    $display("8-input CRLB: %0d distinct permutations of 40320 from 65536 keys", distinct);
    check(distinct > 4096, "extra stage reaches more permutations than a plain log2(8) network can");

    mem_test(7);
    mem_test(8);
    mem_test(9);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
