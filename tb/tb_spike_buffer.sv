// tb_spike_buffer: random SpikeCheck updates of both parities against a reference array.
module tb_spike_buffer;
  logic        clk = 0, rst_n, upd, par_even;
  logic [5:0]  spike_new;
  logic [11:0] spike, ref_s;
  int checks = 0, failures = 0;

  spike_buffer dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; upd = 0; par_even = 0; spike_new = '1;
    ref_s = '0;
    @(negedge clk);
    checks++; if (spike !== '0) failures++;
    rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      upd       = 1'($urandom);
      par_even  = 1'($urandom);
      spike_new = 6'($urandom);
      @(posedge clk);
      if (upd) for (int g = 0; g < 6; g++) ref_s[2*g + int'(par_even)] = spike_new[g];
      @(negedge clk);
      checks++;
      if (spike !== ref_s) begin
        failures++;
        $display("FAIL n=%0d got=%h exp=%h", n, spike, ref_s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
