// tb_crc_logger: checks the CRC logger.
//
// Random input/output words are sampled with 'en' toggling. The CRC pairs that
// should have been stored (worked out by long division) are kept in a model of
// the memory; after the memory has wrapped, every row is read back and
// compared, and the row count must have stopped at DEPTH.
module tb_crc_logger;
  localparam int DEPTH = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic en, sample;
  logic [7:0] ip_in, ip_out;
  logic [2:0] rd_addr, wr_ptr;
  logic [9:0] rd_data;
  logic [3:0] count;
  logic [9:0] model [DEPTH];
  int wp = 0, n = 0;

  crc_logger #(.W_IN(8), .W_OUT(8), .CW(5), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic [4:0] crc5(input logic [7:0] d);
    logic [12:0] r;
    r = {d, 5'b0};
    for (int b = 12; b >= 5; b--) if (r[b]) r = r ^ (13'b100101 << (b - 5));
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
    en = 0; sample = 0; ip_in = 0; ip_out = 0; rd_addr = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      @(negedge clk);
      check(int'(wr_ptr) == wp && int'(count) == ((n < DEPTH) ? n : DEPTH),
            $sformatf("t=%0d wr_ptr=%0d count=%0d", t, wr_ptr, count));
      en     = (t % 7) != 3;
      sample = $urandom % 2;
      ip_in  = 8'($urandom);
      ip_out = 8'($urandom);
      @(posedge clk);
      if (en && sample) begin
        model[wp] = {crc5(ip_in), crc5(ip_out)};
        wp = (wp + 1) % DEPTH;
        n++;
      end
    end
    @(negedge clk);
    en = 0;
    check(n > DEPTH, "memory wrapped");
    for (int a = 0; a < DEPTH; a++) begin
      rd_addr = 3'(a);
      @(negedge clk);
      check(rd_data == model[a], $sformatf("row %0d = %03h exp %03h", a, rd_data, model[a]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
