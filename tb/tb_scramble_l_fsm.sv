// tb_scramble_l_fsm: the SCRAMBLE-L memory FSM at its defaults (8 inputs, 4
// multiplexed, 4 state bits, 4 output bits, 2^8 x 8 memory). A random
// transition table is loaded through the write port, then random inputs are
// applied; the state and outputs must follow a reference FSM that looks the
// table up at {state, selected inputs}, with the inputs selected as
// (state + 2*j) mod 8. With run low the flip-flops must hold. Counts how
// many distinct states and select patterns were exercised.
module tb_scramble_l_fsm;
  logic clk = 0, rst_n = 0, run = 0, mem_we = 0;
  logic [7:0] in, mem_waddr, mem_wdata;
  logic [3:0] state, out;
  logic [7:0] table_q [256];
  logic [3:0] ref_s, ref_o;
  bit visited [16];
  int checks = 0, failures = 0, nvisit = 0, holds = 0;

  scramble_l_fsm dut (.clk(clk), .rst_n(rst_n), .run(run), .in(in),
    .mem_we(mem_we), .mem_waddr(mem_waddr), .mem_wdata(mem_wdata),
    .state(state), .out(out));

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in = 0;
    @(negedge clk);
    checks++;
    if (state != 0 || out != 0) failures++;
    rst_n = 1;
    for (int a = 0; a < 256; a++) begin
      mem_we = 1; mem_waddr = 8'(a); mem_wdata = 8'($urandom); table_q[a] = mem_wdata;
      @(negedge clk);
    end
    mem_we = 0;
    checks++;
    if (state != 0 || out != 0) begin failures++; $display("FAIL moved while run=0"); end
    ref_s = 0; ref_o = 0;
    for (int t = 0; t < 3000; t++) begin
      logic [3:0] sel;
      logic [7:0] w;
      in  = 8'($urandom);
      run = ($urandom_range(9) != 0);
      for (int j = 0; j < 4; j++) sel[j] = in[(int'(ref_s) + 2*j) % 8];
      w = table_q[{ref_s, sel}];
      if (run) begin ref_s = w[3:0]; ref_o = w[7:4]; end
      else holds++;
      @(negedge clk);
      checks++;
      if (state != ref_s || out != ref_o) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d state=%h exp %h out=%h exp %h", t, state, ref_s, out, ref_o);
      end
      if (!visited[ref_s]) begin visited[ref_s] = 1; nvisit++; end
    end
    checks++;
    if (nvisit < 8 || holds == 0) failures++;
    $display("states visited %0d, holds %0d", nvisit, holds);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
