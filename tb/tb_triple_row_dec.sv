// tb_triple_row_dec: random instructions and addresses; the one-hot wordline vectors are
// compared with a reference rebuilt from the address-role table of each instruction.
module tb_triple_row_dec;
  import impulse_pkg::*;
  instr_e             instr;
  logic               par_even;
  logic [7:0]         addr1, addr2, addr3;
  logic [127:0]       rwl_o, rwl_e, eo, ee;
  logic [31:0]        rwl_v, ev;
  logic [159:0]       wwl, ew;
  int checks = 0, failures = 0;

  triple_row_dec dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void mark_rd(int a, bit odd, bit even);
    if (a < 128) begin
      if (odd)  eo[a] = 1'b1;
      if (even) ee[a] = 1'b1;
    end else if (a < 160) ev[a - 128] = 1'b1;
  endfunction

  initial begin
    int n_wv = 0;
    for (int n = 0; n < 3000; n++) begin
      instr    = instr_e'($urandom_range(0, 7));
      par_even = 1'($urandom);
      addr1    = 8'($urandom_range(0, 170));
      addr2    = 8'($urandom_range(0, 170));
      addr3    = 8'($urandom_range(0, 170));
      #1;
      eo = '0; ee = '0; ev = '0; ew = '0;
      case (instr)
        I_READ:   mark_rd(int'(addr2), 1, 1);
        I_WRITE:  if (addr3 < 160) ew[addr3] = 1'b1;
        I_ACCW2V, I_ACCV2V, I_ACCV2V_C: begin
          mark_rd(int'(addr1), !par_even, par_even);
          mark_rd(int'(addr2), !par_even, par_even);
          if (addr3 < 160) ew[addr3] = 1'b1;
        end
        I_SPIKECHK: begin
          mark_rd(int'(addr2), !par_even, par_even);
          mark_rd(int'(addr3), !par_even, par_even);
        end
        I_RESETV: begin
          mark_rd(int'(addr2), !par_even, par_even);
          if (addr3 < 160) ew[addr3] = 1'b1;
        end
        default: ;
      endcase
      if (instr == I_ACCW2V && addr1 < 128 && addr2 >= 128 && addr2 < 160) n_wv++;
      checks += 4;
      if (rwl_o !== eo) begin failures++; $display("FAIL rwl_o n=%0d instr=%0d", n, instr); end
      if (rwl_e !== ee) begin failures++; $display("FAIL rwl_e n=%0d instr=%0d", n, instr); end
      if (rwl_v !== ev) begin failures++; $display("FAIL rwl_v n=%0d instr=%0d", n, instr); end
      if (wwl   !== ew) begin failures++; $display("FAIL wwl n=%0d instr=%0d", n, instr); end
    end
    checks++;
    if (n_wv == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
