// tb_blfa: exhaustive check of the bitwise-logic full adder against integer addition.
module tb_blfa;
  logic nor_i, and_i, cin, xor_o, sum, cout;
  int checks = 0, failures = 0;

  blfa dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 2; a++)
      for (int b = 0; b < 2; b++)
        for (int c = 0; c < 2; c++) begin
          nor_i = ~(a[0] | b[0]);
          and_i = a[0] & b[0];
          cin   = c[0];
          #1;
          checks += 3;
          if (sum !== 1'((a + b + c) % 2)) begin failures++; $display("sum a=%0d b=%0d c=%0d", a, b, c); end
          if (cout !== 1'((a + b + c) / 2)) begin failures++; $display("cout a=%0d b=%0d c=%0d", a, b, c); end
          if (xor_o !== 1'(a ^ b)) failures++;
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
