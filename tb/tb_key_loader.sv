// tb_key_loader: the boot loader at its defaults (160-bit key A, 64-bit key
// B, 256 memory words). A behavioural NVM returns the addressed byte one
// clock after each read. Checks the address sequence, both keys, every
// memory write (address and data) and that done rises exactly
// 20 + 8 + 256 + 1 clocks after reset and stays high.
module tb_key_loader;
  localparam int KA = 160, KB = 64, TOT = 20 + 8 + 256;

  logic clk = 0, rst_n = 0;
  logic nvm_rd;
  logic [8:0] nvm_addr;
  logic [7:0] nvm_rdata;
  logic [KA-1:0] key_a;
  logic [KB-1:0] key_b;
  logic mem_we, done;
  logic [7:0] mem_waddr, mem_wdata;
  logic [7:0] nvm [TOT];
  logic [7:0] got_mem [256];
  bit written [256];
  int checks = 0, failures = 0, cycles = 0, done_at = -1, expect_addr = 0;

  key_loader dut (.clk(clk), .rst_n(rst_n), .nvm_rd(nvm_rd), .nvm_addr(nvm_addr),
    .nvm_rdata(nvm_rdata), .key_a(key_a), .key_b(key_b), .mem_we(mem_we),
    .mem_waddr(mem_waddr), .mem_wdata(mem_wdata), .done(done));

  always #5 clk = ~clk;

  // behavioural NVM: one-clock read latency
  always_ff @(posedge clk) if (nvm_rd) nvm_rdata <= nvm[nvm_addr];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    cycles++;
    if (nvm_rd) begin
      check(nvm_addr == 9'(expect_addr), $sformatf("nvm_addr %0d exp %0d", nvm_addr, expect_addr));
      expect_addr++;
    end
    if (mem_we) begin
      check(!written[mem_waddr], "each memory word written once");
      written[mem_waddr] = 1;
      got_mem[mem_waddr] = mem_wdata;
    end
    if (done && done_at < 0) done_at = cycles;
  end

  initial begin
    logic [KA-1:0] exp_a;
    logic [KB-1:0] exp_b;
    for (int i = 0; i < TOT; i++) nvm[i] = 8'($urandom);
    for (int i = 0; i < 20; i++) exp_a[i*8 +: 8] = nvm[i];
    for (int i = 0; i < 8; i++)  exp_b[i*8 +: 8] = nvm[20 + i];
    repeat (3) @(negedge clk);
    check(!done, "not done in reset");
    rst_n = 1;
    repeat (TOT + 10) @(negedge clk);
    check(done, "done");
    // done rises at clock TOT + 1 and is first seen by the sampling block
    // at clock TOT + 2
    check(done_at == TOT + 2, $sformatf("done seen at clock %0d, expected %0d", done_at, TOT + 2));
    check(expect_addr == TOT, $sformatf("%0d reads", expect_addr));
    check(key_a == exp_a, "key A");
    check(key_b == exp_b, "key B");
    for (int a = 0; a < 256; a++)
      check(written[a] && got_mem[a] == nvm[28 + a], $sformatf("memory word %0d", a));
    repeat (20) @(negedge clk);
    check(done && !nvm_rd && !mem_we, "stays done and idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
