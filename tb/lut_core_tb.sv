// lut_core_tb: loads function words into one LUT core and checks every look-up.
//
// First a random table: all 256 operand pairs must return the stored byte,
// one cycle after the operands are loaded. Then the 4x4 multiply and 4+4 add
// tables: results are compared with x*y and x+y computed here. Operands held
// without op_load must not change the output.
module lut_core_tb;
  import pim_pkg::*;
  import pim_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  logic fw_load = 0, op_load = 0;
  fw_word_t [FW_WORDS-1:0] fw_data;
  nibble_t a_in, b_in;
  logic [7:0] result;
  int checks = 0, failures = 0;

  lut_core dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [7:0] got, input logic [7:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %02h expected %02h", what, got, exp);
    end
  endtask

  task automatic load_fw(input fw_word_t [FW_WORDS-1:0] w);
    @(negedge clk);
    fw_data = w; fw_load = 1;
    @(negedge clk);
    fw_load = 0; fw_data = '0;
  endtask

  task automatic lookup(input int x, input int y, output logic [7:0] r);
    @(negedge clk);
    a_in = 4'(x); b_in = 4'(y); op_load = 1;
    @(negedge clk);
    op_load = 0; a_in = ~a_in; b_in = ~b_in;   // changing inputs must not matter now
    #1 r = result;
  endtask

  initial begin
    fw_word_t [FW_WORDS-1:0] w;
    logic [7:0] r, exp;
    fw_data = '0; a_in = 0; b_in = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // random table
    w = make_fw(F_RAND);
    load_fw(w);
    for (int x = 0; x < 16; x++)
      for (int y = 0; y < 16; y++) begin
        lookup(x, y, r);
        for (int j = 0; j < 8; j++) exp[j] = w[j][x*16 + y];
        check(r, exp, $sformatf("rand %0d,%0d", x, y));
      end
    // multiply table
    load_fw(make_fw(F_MUL));
    for (int x = 0; x < 16; x++)
      for (int y = 0; y < 16; y++) begin
        lookup(x, y, r);
        check(r, 8'(x * y), $sformatf("mul %0d*%0d", x, y));
      end
    // add table
    load_fw(make_fw(F_ADD));
    for (int i = 0; i < 64; i++) begin
      int x, y;
      x = $urandom_range(15);
      y = $urandom_range(15);
      lookup(x, y, r);
      check(r, 8'(x + y), $sformatf("add %0d+%0d", x, y));
    end
    // result valid the cycle after op_load
    @(negedge clk); a_in = 4'd7; b_in = 4'd9; op_load = 1;
    @(posedge clk); #1 check(result, 8'd16, "latency 1 cycle");
    op_load = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
