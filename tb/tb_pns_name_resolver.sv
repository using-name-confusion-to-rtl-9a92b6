// tb_pns_name_resolver -- self-checking test of the inverse name mapping.
// Random names are resolved by the default instance (delta = 4 bytes) and
// compared with PC + p*4 worked out by multiplication; a second instance with
// a 2-byte delta checks the worked example {2, 0x00BB_FFF4} and
// {0, 0x00BB_FFF8} -> 0x00BB_FFF8.
module tb_pns_name_resolver;
  import pns_pkg::*;
  int checks = 0, failures = 0;
  xpc_t n4, n2;
  va_t  v4, v2;

  pns_name_resolver dut4 (.name_i(n4), .va_o(v4));
  pns_name_resolver #(.DELTA_SHIFT(1)) dut2 (.name_i(n2), .va_o(v2));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #100000 failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      n4.p  = phantom_t'($urandom);
      n4.pc = $urandom;
      if (i < 4) n4.pc = 32'hFFFF_FFF0 + i;   // wrap-around
      #1;
      check(v4 == va_t'(longint'(n4.pc) + longint'(n4.p) * 4),
            $sformatf("resolve {%0d,%h} -> %h", n4.p, n4.pc, v4));
    end
    n2 = '{p: 8'd2, pc: 32'h00BB_FFF4}; #1;
    check(v2 == 32'h00BB_FFF8, "paper example phantom 2");
    n2 = '{p: 8'd0, pc: 32'h00BB_FFF8}; #1;
    check(v2 == 32'h00BB_FFF8, "paper example phantom 0");
    n4 = '{p: 8'd255, pc: 32'h0000_2000}; #1;
    check(v4 == 32'h0000_23FC, "largest phantom");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
