// global_row_decoder_tb: sweeps every address of a small bank plus addresses
// beyond it and checks the one-hot subarray select, the subarray index, the
// local row and the out-of-range flag against arithmetic done here.
module global_row_decoder_tb;
  localparam int unsigned NUM_SUB = 6, ROWS = 32, ADDR_W = 10;
  logic [ADDR_W-1:0] addr;
  logic [NUM_SUB-1:0] sub_sel;
  logic [$clog2(NUM_SUB)-1:0] sub_idx;
  logic [$clog2(ROWS)-1:0] local_row;
  logic oob;
  int checks = 0, failures = 0;

  global_row_decoder #(.NUM_SUB(NUM_SUB), .ROWS(ROWS), .ADDR_W(ADDR_W)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    for (int a = 0; a < (1 << ADDR_W); a++) begin
      int s, r;
      s = a / ROWS;
      r = a % ROWS;
      addr = ADDR_W'(a);
      #1;
      check(local_row == r[$clog2(ROWS)-1:0], $sformatf("addr %0d row", a));
      if (s < NUM_SUB) begin
        check(!oob, $sformatf("addr %0d oob", a));
        check(sub_sel == NUM_SUB'(1 << s), $sformatf("addr %0d sel %b", a, sub_sel));
        check(32'(sub_idx) == s, $sformatf("addr %0d idx", a));
      end else begin
        check(oob, $sformatf("addr %0d not oob", a));
        check(sub_sel == '0, $sformatf("addr %0d sel when oob", a));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
