// tb_cim_array: fills the array through the write port (random rows, random column
// enables), then checks the bitlines for random sets of enabled wordlines against the NOR
// and NAND of a shadow copy, including the RWLo / RWLe column split of weight rows.
module tb_cim_array;
  logic         clk = 0;
  logic [127:0] rwl_o, rwl_e;
  logic [31:0]  rwl_v;
  logic [159:0] wwl;
  logic [71:0]  wen, wbl, rbl, rblb;
  logic [71:0]  shadow [160];
  int checks = 0, failures = 0;

  cim_array dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_row(int r, logic [71:0] data, logic [71:0] en);
    @(negedge clk);
    rwl_o = '0; rwl_e = '0; rwl_v = '0;
    wwl = '0; wwl[r] = 1'b1; wen = en; wbl = data;
    @(posedge clk);
    for (int c = 0; c < 72; c++) if (en[c]) shadow[r][c] = data[c];
    @(negedge clk);
    wwl = '0; wen = '0;
  endtask

  initial begin
    logic [71:0] e_rbl, e_rblb;
    logic any1, any0, on;
    wwl = '0; wen = '0; wbl = '0; rwl_o = '0; rwl_e = '0; rwl_v = '0;
    for (int r = 0; r < 160; r++) write_row(r, 72'({$urandom, $urandom, $urandom}), '1);
    for (int n = 0; n < 200; n++)
      write_row($urandom_range(0, 159), 72'({$urandom, $urandom, $urandom}), 72'({$urandom, $urandom, $urandom}));
    for (int n = 0; n < 400; n++) begin
      rwl_o = '0; rwl_e = '0; rwl_v = '0;
      // one to three wordlines of any kind
      for (int k = 0; k < 1 + n % 3; k++) begin
        case ($urandom_range(0, 2))
          0: rwl_o[$urandom_range(0, 127)] = 1'b1;
          1: rwl_e[$urandom_range(0, 127)] = 1'b1;
          default: rwl_v[$urandom_range(0, 31)] = 1'b1;
        endcase
      end
      if (n < 5) begin rwl_o = '0; rwl_e = '0; rwl_v = '0; end
      #1;
      for (int c = 0; c < 72; c++) begin
        any1 = 0; any0 = 0;
        for (int r = 0; r < 160; r++) begin
          if (r < 128) on = ((c / 6) % 2 == 0) ? rwl_o[r] : rwl_e[r];
          else         on = rwl_v[r - 128];
          if (on) begin
            if (shadow[r][c]) any1 = 1; else any0 = 1;
          end
        end
        e_rbl[c]  = !any1;
        e_rblb[c] = !(any1 && !any0);
      end
      checks += 2;
      if (rbl  !== e_rbl)  begin failures++; $display("FAIL rbl n=%0d",  n); end
      if (rblb !== e_rblb) begin failures++; $display("FAIL rblb n=%0d", n); end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
