// dram_subarray_tb: writes random rows, activates them in random order and
// checks the row buffer one cycle later against a copy kept here. Also
// checks that an unselected subarray ignores act and we, and that a write
// leaves the written data in the row buffer.
module dram_subarray_tb;
  localparam int unsigned ROWS = 64, ROW_BITS = 256;
  logic clk = 0, rst_n = 0;
  logic sel = 0, act = 0, we = 0;
  logic [$clog2(ROWS)-1:0] row = 0;
  logic [ROW_BITS-1:0] wdata = '0, row_buf;
  logic [ROW_BITS-1:0] model [ROWS];
  int checks = 0, failures = 0;

  dram_subarray #(.ROWS(ROWS), .ROW_BITS(ROW_BITS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [ROW_BITS-1:0] rnd_row();
    logic [ROW_BITS-1:0] v;
    for (int i = 0; i < ROW_BITS / 32; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      model[r] = rnd_row();
      sel = 1; we = 1; row = r[$clog2(ROWS)-1:0]; wdata = model[r];
      @(negedge clk);
      we = 0; sel = 0;
      check(row_buf == model[r], $sformatf("write-through row %0d", r));
    end
    for (int t = 0; t < 300; t++) begin
      int r;
      bit s;
      logic [ROW_BITS-1:0] prev;
      r = $urandom_range(ROWS - 1);
      s = ($urandom_range(4) != 0);
      @(negedge clk);
      prev = row_buf;
      sel = s; act = 1; we = ($urandom_range(1) == 1) && !s; wdata = rnd_row();
      row = r[$clog2(ROWS)-1:0];
      @(negedge clk);
      sel = 0; act = 0; we = 0;
      if (s) check(row_buf == model[r], $sformatf("activate row %0d", r));
      else   check(row_buf == prev, "unselected subarray changed");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
