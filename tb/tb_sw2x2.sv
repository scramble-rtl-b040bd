// tb_sw2x2: exhaustive check of the 2x2 switch box (keep with key 0, swap
// with key 1) over all eight input combinations.
module tb_sw2x2;
  logic wi, wj, k, wi_o, wj_o;
  int checks = 0, failures = 0;

  sw2x2 dut (.wi(wi), .wj(wj), .k(k), .wi_o(wi_o), .wj_o(wj_o));

  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 8; v++) begin
      {k, wi, wj} = 3'(v);
      #1;
      checks++;
      if ({wi_o, wj_o} != (k ? {wj, wi} : {wi, wj})) begin
        failures++;
        $display("FAIL k=%0b wi=%0b wj=%0b -> %0b %0b", k, wi, wj, wi_o, wj_o);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
