// tb_fsmim_mux: the state-controlled input multiplexers at their defaults
// (8 inputs, 4 selected, 4 state bits). For every state and random inputs
// the selected bit j must be input (state + 2*j) mod 8, the default map.
module tb_fsmim_mux;
  logic [7:0] in;
  logic [3:0] state;
  logic [3:0] sel_in;
  int checks = 0, failures = 0;

  fsmim_mux dut (.in(in), .state(state), .sel_in(sel_in));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < 16; s++) begin
      for (int t = 0; t < 50; t++) begin
        state = 4'(s); in = 8'($urandom);
        #1;
        for (int j = 0; j < 4; j++) begin
          checks++;
          if (sel_in[j] != in[(s + 2*j) % 8]) begin
            failures++;
            if (failures < 10) $display("FAIL s=%0d j=%0d in=%b sel=%b", s, j, in, sel_in);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
