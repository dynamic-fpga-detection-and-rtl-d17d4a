// tb_crc_calc: checks the CRC with polynomial x^5 + x^2 + 1.
//
// The expected CRC is found by long division: the data word followed by five
// zero bits, divided modulo 2 by 100101b, leaves the CRC as the remainder.
// All 256 bytes are checked, plus random 16-bit words on a wider instance.
module tb_crc_calc;
  int checks = 0, failures = 0;
  logic [7:0]  d8;
  logic [4:0]  c8;
  logic [15:0] d16;
  logic [4:0]  c16;

  crc_calc #(.W(8))  dut8  (.data(d8),  .crc(c8));
  crc_calc #(.W(16)) dut16 (.data(d16), .crc(c16));

  function automatic logic [4:0] long_div(input longint unsigned data, input int w);
    longint unsigned r;
    r = data << 5;
    for (int b = w + 4; b >= 5; b--)
      if (r[b]) r = r ^ (longint'(6'b100101) << (b - 5));
    return r[4:0];
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    for (int v = 0; v < 256; v++) begin
      d8 = 8'(v); #1;
      check(c8 == long_div(v, 8), $sformatf("crc(%02h)=%02h exp %02h", d8, c8, long_div(v, 8)));
    end
    for (int n = 0; n < 2000; n++) begin
      d16 = 16'($urandom); #1;
      check(c16 == long_div(d16, 16), $sformatf("crc16(%04h)=%02h exp %02h", d16, c16, long_div(d16, 16)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
