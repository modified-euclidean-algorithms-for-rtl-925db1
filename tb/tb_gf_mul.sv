// tb_gf_mul: exhaustive check of the GF(2^8) multiplier against the
// table-based reference product, all 65536 operand pairs.
module tb_gf_mul;
  import tb_gf_pkg::*;

  logic [7:0] a, b, p;
  int checks = 0, failures = 0;

  gf_mul dut (.a(a), .b(b), .p(p));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    init();
    for (int i = 0; i < 256; i++) begin
      for (int j = 0; j < 256; j++) begin
        a = 8'(i);
        b = 8'(j);
        #1;
        checks++;
        if (int'(p) != mul(i, j)) begin
          failures++;
          if (failures < 10) $display("FAIL %0d * %0d = %0d, expected %0d", i, j, p, mul(i, j));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
