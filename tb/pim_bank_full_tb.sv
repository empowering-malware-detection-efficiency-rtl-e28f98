// pim_bank_full_tb: one complete operation on the bank at its full default
// size (16 subarrays x 16 clusters = 256 clusters, 512 rows of 2048 bits).
//
// Writes the multiply and add tables into rows of the first and last
// subarray, programs all nine cores of the first cluster of the first
// subarray and the last cluster of the last subarray, writes a random operand
// row next to each, runs a full-row (128-pair) 8-bit MAC on both clusters at
// once and checks both accumulators against sums computed here. Also checks
// the 2-cycle read latency and the MAC duration (128 * 17 cycles).
module pim_bank_full_tb;
  import pim_pkg::*;
  import pim_tb_pkg::*;

  localparam int unsigned ROWS = 512, ROW_BITS = 2048, NCL = 256;

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready;
  bank_cmd_t cmd;
  logic [ROW_BITS-1:0] wdata;
  logic rsp_valid, err;
  logic [ROW_BITS-1:0] rsp_row;
  logic [ACC_BITS-1:0] rsp_acc;
  logic [NCL-1:0] cluster_busy;
  int checks = 0, failures = 0;

  pim_bank dut (.*);

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

  task automatic send(input bank_cmd_t c, input logic [ROW_BITS-1:0] d);
    @(negedge clk);
    cmd = c; wdata = d; cmd_valid = 1;
    #1;
    while (!cmd_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    cmd_valid = 0;
  endtask

  function automatic bank_cmd_t mkcmd(input opcode_t op, input int row, input int cl,
                                      input int core);
    bank_cmd_t c;
    c = '0;
    c.op = op; c.row = 16'(row); c.cluster = 8'(cl); c.core = 4'(core);
    return c;
  endfunction

  logic [ROW_BITS-1:0] ops [2];
  logic [15:0] exp_acc [2];
  int subs [2] = '{0, 15};
  int cls  [2] = '{0, 15};

  initial begin
    int cycles;
    cmd = '0; wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int j = 0; j < 2; j++) begin
      int base;
      base = subs[j] * ROWS;
      send(mkcmd(OP_WRITE, base + 10, 0, 0), ROW_BITS'(make_fw(F_MUL)));
      send(mkcmd(OP_WRITE, base + 11, 0, 0), ROW_BITS'(make_fw(F_ADD)));
      for (int k = 0; k < NUM_CORES; k++)
        send(mkcmd(OP_PROGRAM, base + ((k < 4) ? 10 : 11), cls[j], k), '0);
      for (int i = 0; i < ROW_BITS / 32; i++) ops[j][32*i +: 32] = $urandom;
      send(mkcmd(OP_WRITE, base + 511, 0, 0), ops[j]);
      exp_acc[j] = 0;
      for (int i = 0; i < 128; i++)
        exp_acc[j] += 16'(ops[j][16*i +: 8] * ops[j][16*i + 8 +: 8]);
    end
    send(mkcmd(OP_READ, 15 * ROWS + 511, 0, 0), '0);
    @(negedge clk);
    check(rsp_valid && rsp_row == ops[1], "read back of the last row of the bank");
    for (int j = 0; j < 2; j++) begin
      bank_cmd_t c;
      c = mkcmd(OP_MAC, subs[j] * ROWS + 511, cls[j], 0);
      c.count = 128; c.clear = 1; c.prec = PREC_8BIT;
      send(c, '0);
    end
    // a cluster starts one cycle after its command is accepted
    @(negedge clk);
    cycles = 0;
    check(cluster_busy[0] && cluster_busy[255], "both clusters running");
    while (cluster_busy[255]) begin cycles++; @(negedge clk); end
    check(cycles == 128 * 17, $sformatf("MAC duration %0d expected %0d", cycles, 128 * 17));
    for (int j = 0; j < 2; j++) begin
      send(mkcmd(OP_RDACC, subs[j] * ROWS, cls[j], 0), '0);
      @(negedge clk);
      check(rsp_valid && rsp_acc == exp_acc[j], $sformatf("cluster %0d acc %04h expected %04h",
            subs[j] * 16 + cls[j], rsp_acc, exp_acc[j]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
