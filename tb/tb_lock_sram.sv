// tb_lock_sram: the 2^8 x 8 memory. Writes random words to every address in
// a shuffled order, reads every address back (the read is combinational),
// then overwrites a few words and checks that only those change.
module tb_lock_sram;
  logic clk = 0, we = 0;
  logic [7:0] waddr, wdata, raddr, rdata;
  logic [7:0] model [256];
  int checks = 0, failures = 0;

  lock_sram dut (.clk(clk), .we(we), .waddr(waddr), .wdata(wdata),
                 .raddr(raddr), .rdata(rdata));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic readall();
    for (int a = 0; a < 256; a++) begin
      raddr = 8'(a);
      #1;
      checks++;
      if (rdata != model[a]) begin
        failures++;
        if (failures < 10) $display("FAIL addr %0d: %h exp %h", a, rdata, model[a]);
      end
    end
  endtask

  initial begin
    @(negedge clk);
    for (int i = 0; i < 256; i++) begin
      automatic int a = (i * 77 + 13) % 256;   // 77 is odd: visits every address
      we = 1; waddr = 8'(a); wdata = 8'($urandom); model[a] = wdata;
      @(negedge clk);
    end
    we = 0;
    readall();
    @(negedge clk);   // realign to the clock after the untimed reads
    for (int i = 0; i < 20; i++) begin
      automatic int a = $urandom_range(255);
      we = 1; waddr = 8'(a); wdata = 8'($urandom); model[a] = wdata;
      @(negedge clk);
    end
    we = 0; waddr = 0; wdata = 8'hFF;
    @(negedge clk);
    readall();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
