// pim_cluster_tb: programs a cluster's nine cores and checks its
// multiply-accumulate results and timing.
//
// Cores 0-3 get the 4x4 multiply table and cores 4-8 the 4+4 add table.
// Random rows of operand pairs are then run in 8-bit and 4-bit mode, with and
// without clearing the accumulator, and the accumulator is compared with a
// reference sum computed here. Every run is timed: busy must last exactly
// count*(1 + 2*steps) cycles (steps 8 or 5) and done must pulse once. Also
// checked: a zero-length command, a start ignored while busy and the
// accumulator value surviving between commands. Then cores 0-6 are
// reprogrammed with the comparison tables and the running-maximum (max
// pooling) program is checked the same way (4 steps per byte), and finally
// the MAC tables are restored and MACs checked again.
module pim_cluster_tb;
  import pim_pkg::*;
  import pim_tb_pkg::*;

  localparam int unsigned ROW_BITS = 2048;

  logic clk = 0, rst_n = 0;
  logic prog_load = 0;
  logic [3:0] prog_core = 0;
  fw_word_t [FW_WORDS-1:0] prog_data;
  logic start = 0;
  logic max_op = 0;
  prec_t prec;
  logic [8:0] count;
  logic clear;
  logic [ROW_BITS-1:0] operands;
  logic busy, done;
  logic [ACC_BITS-1:0] acc;
  int checks = 0, failures = 0;

  pim_cluster #(.ROW_BITS(ROW_BITS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  logic [15:0] model_acc = 0;

  task automatic run(input prec_t p, input int n, input bit clr);
    int cycles = 0, dones = 0, steps;
    steps = (p == PREC_8BIT) ? 8 : 5;
    for (int i = 0; i < ROW_BITS / 8; i++) operands[8*i +: 8] = 8'($urandom);
    if (clr) model_acc = 0;
    for (int i = 0; i < n; i++) begin
      logic [7:0] a, b;
      a = operands[16*i +: 8];
      b = operands[16*i + 8 +: 8];
      if (p == PREC_4BIT) begin a = a & 8'h0f; b = b & 8'h0f; end
      model_acc = model_acc + 16'(a * b);
    end
    @(negedge clk);
    prec = p; count = 9'(n); clear = clr; start = 1;
    @(negedge clk);
    start = 0;
    if (done) dones++;
    while (busy) begin
      cycles++;
      start = (cycles == 3);     // must be ignored while busy
      @(negedge clk);
      if (done) dones++;
    end
    start = 0;
    @(negedge clk);
    if (done) dones++;
    check(acc == model_acc, $sformatf("%s n=%0d acc %04h expected %04h",
          p == PREC_8BIT ? "8-bit" : "4-bit", n, acc, model_acc));
    check(cycles == n * (1 + 2 * steps), $sformatf("latency %0d expected %0d", cycles, n * (1 + 2 * steps)));
    check(dones == 1, $sformatf("done pulses %0d", dones));
  endtask

  task automatic program_all(input bit for_max);
    for (int k = 0; k < NUM_CORES; k++) begin
      @(negedge clk);
      prog_core = 4'(k); prog_data = make_fw(for_max ? max_fn(k) : core_fn(k)); prog_load = 1;
    end
    @(negedge clk); prog_load = 0;
  endtask

  task automatic run_max(input int n, input bit clr);
    int cycles = 0, dones = 0;
    for (int i = 0; i < ROW_BITS / 8; i++) operands[8*i +: 8] = 8'($urandom);
    if (clr) model_acc = 0;
    for (int i = 0; i < n; i++)
      if (operands[8*i +: 8] > model_acc[7:0]) model_acc[7:0] = operands[8*i +: 8];
    @(negedge clk);
    max_op = 1; count = 9'(n); clear = clr; start = 1;
    @(negedge clk);
    start = 0; max_op = 0;
    if (done) dones++;
    while (busy) begin
      cycles++;
      @(negedge clk);
      if (done) dones++;
    end
    check(acc[7:0] == model_acc[7:0], $sformatf("max n=%0d got %0d expected %0d", n, acc[7:0],
          model_acc[7:0]));
    check(cycles == n * 9, $sformatf("max latency %0d expected %0d", cycles, n * 9));
    check(dones == 1, $sformatf("max done pulses %0d", dones));
  endtask

  initial begin
    prog_data = '0; prec = PREC_8BIT; count = 0; clear = 0; operands = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < NUM_CORES; k++) begin
      @(negedge clk);
      prog_core = 4'(k); prog_data = make_fw(core_fn(k)); prog_load = 1;
    end
    @(negedge clk); prog_load = 0;
    // single MACs with extreme operands
    @(negedge clk);
    operands = '0; operands[15:0] = 16'hffff; prec = PREC_8BIT; count = 1; clear = 1; start = 1;
    @(negedge clk); start = 0;
    while (busy) @(negedge clk);
    check(acc == 16'hfe01, $sformatf("255*255 = %04h", acc));
    model_acc = acc;
    // random runs
    run(PREC_8BIT, 1, 1);
    run(PREC_8BIT, 5, 0);
    run(PREC_8BIT, 128, 0);
    run(PREC_4BIT, 7, 1);
    run(PREC_4BIT, 128, 0);
    for (int t = 0; t < 20; t++)
      run(prec_t'($urandom_range(1)), $urandom_range(1, 40), $urandom_range(1));
    // zero-length command leaves the accumulator alone
    run(PREC_8BIT, 0, 0);
    // max pooling after reprogramming the cores
    program_all(1);
    run_max(4, 1);
    run_max(4, 0);
    run_max(256, 1);
    for (int t = 0; t < 10; t++) run_max($urandom_range(1, 30), $urandom_range(1));
    // edge values: all bytes equal, then a single 255
    operands = '0;
    @(negedge clk); max_op = 1; count = 9'd16; clear = 1; start = 1;
    @(negedge clk); start = 0; max_op = 0;
    while (busy) @(negedge clk);
    check(acc[7:0] == 8'd0, "max of zeros");
    program_all(0);
    run(PREC_8BIT, 20, 1);
    run(PREC_4BIT, 20, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
