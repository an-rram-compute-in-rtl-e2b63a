// tb_and_unit: exhaustive check of the AND operation unit model: the cell
// carries one unit current only for input 1 and weight 1.
module tb_and_unit;
  logic x, a, z;
  int checks = 0, failures = 0;

  and_unit dut (.x, .a, .z);

  initial begin
    #1000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4; i++) begin
      {x, a} = 2'(i);
      #1;
      checks++;
      if (z !== (i == 3)) begin
        failures++;
        $display("FAIL x=%0b a=%0b z=%0b", x, a, z);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
