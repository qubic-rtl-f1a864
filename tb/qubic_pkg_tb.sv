// qubic_pkg_tb -- checks the command layout: field widths and bit positions
// (condition at bit 96 down to trigger time at bits 23:0), the 128-bit total
// and the saturation helper.
module qubic_pkg_tb;
  import qubic_pkg::*;
  int checks = 0, failures = 0;
  cmd_t c;
  logic [127:0] w;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    chk($bits(cmd_t) == 128, "width");
    w = '0; w[23:0] = 24'hABCDEF;      c = cmd_t'(w); chk(c.trig_t == 24'hABCDEF, "trig_t");
    w = '0; w[31:24] = 8'h5A;          c = cmd_t'(w); chk(c.element == 8'h5A, "element");
    w = '0; w[45:32] = 14'h2BCD;       c = cmd_t'(w); chk(c.phase == 14'h2BCD, "phase");
    w = '0; w[57:46] = 12'hA5C;        c = cmd_t'(w); chk(c.len == 12'hA5C, "len");
    w = '0; w[69:58] = 12'h3C9;        c = cmd_t'(w); chk(c.start == 12'h3C9, "start");
    w = '0; w[71:70] = 2'b10;          c = cmd_t'(w); chk(c.dest == 2'd2, "dest");
    w = '0; w[95:72] = 24'h876543;     c = cmd_t'(w); chk(c.freq == 24'h876543, "freq");
    w = '0; w[96] = 1'b1;              c = cmd_t'(w); chk(c.cond == 1'b1, "cond");
    chk(sat16(40'sd40000) == 16'sh7fff, "sat+");
    chk(sat16(-40'sd40000) == 16'sh8000, "sat-");
    chk(sat16(-40'sd1234) == -16'sd1234, "pass");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
