// pim_bank_tb: end-to-end test of the PIM bank through its command port,
// at a reduced size (2 subarrays x 2 clusters, 16 rows of 2048 bits).
//
// Flow: write the multiply and add look-up tables into DRAM rows, program
// all nine cores of every cluster from those rows, write random operand rows,
// read one back, run 8-bit and 4-bit MAC commands on several clusters at
// once, quantize a row to 4 bits and run a 4-bit MAC over the quantized
// data, and read every accumulator. Results are compared with sums computed
// here. Mechanisms counted, each of which must occur: command stall on a
// busy cluster, two or more clusters busy at once, a switch between 8-bit
// and 4-bit mode, accumulation across commands without clear, a quantize
// write-back, a rejected out-of-range command, and reprogramming a cluster's
// cores from the MAC tables to the max-pooling tables and back, with a
// max-pooling command run in between. Response latency (two
// cycles after acceptance) is checked on every read.
module pim_bank_tb;
  import pim_pkg::*;
  import pim_tb_pkg::*;

  localparam int unsigned NUM_SUB = 2, CL_PER_SUB = 2, ROWS = 16, ROW_BITS = 2048;
  localparam int unsigned NCL = NUM_SUB * CL_PER_SUB;

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready;
  bank_cmd_t cmd;
  logic [ROW_BITS-1:0] wdata;
  logic rsp_valid, err;
  logic [ROW_BITS-1:0] rsp_row;
  logic [ACC_BITS-1:0] rsp_acc;
  logic [NCL-1:0] cluster_busy;
  int checks = 0, failures = 0;
  int n_stall = 0, n_parallel = 0, n_mode_switch = 0, n_accumulate = 0, n_quant = 0, n_err = 0;
  int n_max = 0, n_reprogram = 0;

  pim_bank #(.NUM_SUB(NUM_SUB), .CL_PER_SUB(CL_PER_SUB), .ROWS(ROWS), .ROW_BITS(ROW_BITS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && $countones(cluster_busy) >= 2) n_parallel++;
  always @(negedge clk) if (err) n_err++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic [ROW_BITS-1:0] mem_model [NUM_SUB*ROWS];
  logic [15:0] acc_model [NCL];
  prec_t last_prec = PREC_8BIT;

  function automatic logic [ROW_BITS-1:0] rnd_row();
    logic [ROW_BITS-1:0] v;
    for (int i = 0; i < ROW_BITS / 32; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  // issue one command; returns after it was accepted
  task automatic send(input bank_cmd_t c, input logic [ROW_BITS-1:0] d);
    @(negedge clk);
    cmd = c; wdata = d; cmd_valid = 1;
    #1;                                   // let cmd_ready settle on the new command
    while (!cmd_ready) begin n_stall++; @(negedge clk); #1; end
    @(negedge clk);
    cmd_valid = 0;
  endtask

  function automatic bank_cmd_t mkcmd(input opcode_t op, input int row);
    bank_cmd_t c;
    c = '0;
    c.op = op;
    c.row = 16'(row);
    return c;
  endfunction

  task automatic write_row(input int row, input logic [ROW_BITS-1:0] d);
    send(mkcmd(OP_WRITE, row), d);
    mem_model[row] = d;
  endtask

  task automatic read_row(input int row);
    send(mkcmd(OP_READ, row), '0);
    @(negedge clk);
    check(rsp_valid, $sformatf("read row %0d: no response after 2 cycles", row));
    check(rsp_row == mem_model[row], $sformatf("read row %0d data", row));
  endtask

  task automatic prog_core(input int sub, input int cl, input int core, input int row);
    bank_cmd_t c;
    c = mkcmd(OP_PROGRAM, sub * ROWS + row);
    c.cluster = 8'(cl);
    c.core = 4'(core);
    send(c, '0);
  endtask

  task automatic mac(input int sub, input int cl, input int row, input int n, input prec_t p,
                     input bit clr);
    bank_cmd_t c;
    int id = sub * CL_PER_SUB + cl;
    logic [ROW_BITS-1:0] d;
    c = mkcmd(OP_MAC, sub * ROWS + row);
    c.cluster = 8'(cl); c.count = 9'(n); c.prec = p; c.clear = clr;
    if (p != last_prec) n_mode_switch++;
    last_prec = p;
    if (!clr) n_accumulate++;
    d = mem_model[sub * ROWS + row];
    if (clr) acc_model[id] = 0;
    for (int i = 0; i < n; i++) begin
      logic [7:0] a, b;
      a = d[16*i +: 8]; b = d[16*i + 8 +: 8];
      if (p == PREC_4BIT) begin a &= 8'h0f; b &= 8'h0f; end
      acc_model[id] += 16'(a * b);
    end
    send(c, '0);
  endtask

  task automatic maxp(input int sub, input int cl, input int row, input int n, input bit clr);
    bank_cmd_t c;
    int id = sub * CL_PER_SUB + cl;
    logic [ROW_BITS-1:0] d;
    c = mkcmd(OP_MAX, sub * ROWS + row);
    c.cluster = 8'(cl); c.count = 9'(n); c.clear = clr;
    d = mem_model[sub * ROWS + row];
    if (clr) acc_model[id] = 0;
    for (int i = 0; i < n; i++)
      if (d[8*i +: 8] > acc_model[id][7:0]) acc_model[id][7:0] = d[8*i +: 8];
    n_max++;
    send(c, '0);
  endtask

  task automatic rdacc(input int sub, input int cl);
    bank_cmd_t c;
    int id = sub * CL_PER_SUB + cl;
    c = mkcmd(OP_RDACC, sub * ROWS);
    c.cluster = 8'(cl);
    send(c, '0);
    @(negedge clk);
    check(rsp_valid, "rdacc: no response after 2 cycles");
    check(rsp_acc == acc_model[id], $sformatf("cluster %0d acc %04h expected %04h", id,
          rsp_acc, acc_model[id]));
  endtask

  task automatic quant(input int sub, input int src, input int dst, input int m, input int sh,
                       input int z, input prec_t p);
    bank_cmd_t c;
    logic [ROW_BITS-1:0] d;
    c = mkcmd(OP_QUANT, sub * ROWS + src);
    c.dst_row = 16'(sub * ROWS + dst);
    c.q_mult = 8'(m); c.q_shift = 4'(sh); c.q_zero = 8'(z); c.prec = p;
    send(c, '0);
    for (int i = 0; i < ROW_BITS / 8; i++)
      d[8*i +: 8] = 8'(quant_ref(int'(mem_model[sub * ROWS + src][8*i +: 8]), m, sh, z,
                                 (p == PREC_8BIT) ? 8 : 4));
    mem_model[sub * ROWS + dst] = d;
    n_quant++;
  endtask

  initial begin
    cmd = '0; wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // look-up tables into rows 0 (multiply) and 1 (add) of every subarray
    for (int s = 0; s < NUM_SUB; s++) begin
      write_row(s * ROWS + 0, ROW_BITS'(make_fw(F_MUL)));
      write_row(s * ROWS + 1, ROW_BITS'(make_fw(F_ADD)));
    end
    for (int s = 0; s < NUM_SUB; s++)
      for (int c = 0; c < CL_PER_SUB; c++)
        for (int k = 0; k < NUM_CORES; k++)
          prog_core(s, c, k, (k < 4) ? 0 : 1);
    // operand rows
    for (int s = 0; s < NUM_SUB; s++)
      for (int r = 2; r < 6; r++) write_row(s * ROWS + r, rnd_row());
    read_row(0 * ROWS + 3);
    read_row(1 * ROWS + 5);
    // all clusters at once, then a second command to a busy cluster (stall)
    mac(0, 0, 2, 30, PREC_8BIT, 1);
    mac(0, 1, 3, 40, PREC_4BIT, 1);
    mac(1, 0, 4, 25, PREC_8BIT, 1);
    mac(1, 1, 5, 128, PREC_8BIT, 1);
    mac(0, 0, 3, 10, PREC_8BIT, 0);      // stalls until cluster 0 finishes
    mac(0, 1, 2, 64, PREC_4BIT, 0);
    for (int s = 0; s < NUM_SUB; s++)
      for (int c = 0; c < CL_PER_SUB; c++) rdacc(s, c);
    // quantize a row to 4 bits, then MAC over the quantized data
    quant(1, 4, 6, 3, 5, 1, PREC_4BIT);
    read_row(1 * ROWS + 6);
    mac(1, 0, 6, 128, PREC_4BIT, 1);
    quant(0, 5, 7, 200, 8, 2, PREC_8BIT);
    read_row(0 * ROWS + 7);
    mac(0, 1, 7, 100, PREC_8BIT, 1);
    rdacc(1, 0);
    rdacc(0, 1);
    // out-of-range row and cluster are rejected and change nothing
    begin
      int e0 = n_err;
      send(mkcmd(OP_WRITE, NUM_SUB * ROWS + 1), rnd_row());
      @(negedge clk);
      begin
        bank_cmd_t c;
        c = mkcmd(OP_MAC, 2);
        c.cluster = 8'(CL_PER_SUB);
        c.count = 5;
        send(c, '0);
      end
      repeat (2) @(negedge clk);
      check(n_err == e0 + 2, $sformatf("err pulses %0d", n_err - e0));
      check(cluster_busy == '0, "rejected MAC started a cluster");
    end
    // max pooling: reprogram cluster (1,1) with the comparison tables
    for (int s = 0; s < NUM_SUB; s++) begin
      write_row(s * ROWS + 12, ROW_BITS'(make_fw(F_CMP)));
      write_row(s * ROWS + 13, ROW_BITS'(make_fw(F_MAX)));
      write_row(s * ROWS + 14, ROW_BITS'(make_fw(F_WIN)));
      write_row(s * ROWS + 15, ROW_BITS'(make_fw(F_PICKA)));
      write_row(s * ROWS + 11, ROW_BITS'(make_fw(F_PICKB)));
    end
    begin
      int tbl [7] = '{12, 12, 13, 14, 15, 11, 1};
      for (int k = 0; k < 7; k++) prog_core(1, 1, k, tbl[k]);
      n_reprogram++;
    end
    maxp(1, 1, 4, 256, 1);
    maxp(1, 1, 5, 3, 0);
    rdacc(1, 1);
    maxp(1, 1, 2, 100, 1);
    rdacc(1, 1);
    for (int k = 0; k < NUM_CORES; k++) prog_core(1, 1, k, (k < 4) ? 0 : 1);
    n_reprogram++;
    mac(1, 1, 3, 50, PREC_8BIT, 1);
    read_row(0 * ROWS + 2);
    for (int s = 0; s < NUM_SUB; s++)
      for (int c = 0; c < CL_PER_SUB; c++) rdacc(s, c);

    $display("mechanisms: stall=%0d parallel=%0d mode_switch=%0d accumulate=%0d quant=%0d err=%0d max=%0d reprogram=%0d",
             n_stall, n_parallel, n_mode_switch, n_accumulate, n_quant, n_err, n_max, n_reprogram);
    check(n_max > 0, "no max pooling");
    check(n_reprogram > 0, "no reprogramming");
    check(n_stall > 0, "no stall happened");
    check(n_parallel > 0, "clusters never ran in parallel");
    check(n_mode_switch > 0, "no precision mode switch");
    check(n_accumulate > 0, "no accumulation across commands");
    check(n_quant > 0, "no quantize");
    check(n_err > 0, "no rejected command");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
