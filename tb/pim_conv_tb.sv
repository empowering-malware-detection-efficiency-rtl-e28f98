// pim_conv_tb: runs part of the first convolution layer of a malware-image
// classifier on the PIM bank.
//
// A 32x32 grayscale image is made from pseudo-random "binary" bytes. A 3x3
// kernel is applied at a 4x4 tile of output positions (16 output pixels).
// The host lays out each output pixel as one operand row: nine pairs
// (pixel, weight), im2col style. It spreads the rows over the 8 clusters of a
// reduced bank (2 subarrays x 4 clusters) and runs one 9-pair MAC per output
// pixel, 8 clusters at a time. Results are compared with a direct convolution
// computed here. The same tile is then run again at 4-bit precision: every
// operand row is quantized in memory (OP_QUANT, scale 1/16) and the 4-bit
// MAC is compared with the convolution of the quantized values.
module pim_conv_tb;
  import pim_pkg::*;
  import pim_tb_pkg::*;

  localparam int unsigned NUM_SUB = 2, CL_PER_SUB = 4, ROWS = 32, ROW_BITS = 2048;
  localparam int unsigned NCL = NUM_SUB * CL_PER_SUB;
  localparam int IMG = 32, TILE = 4;

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready;
  bank_cmd_t cmd;
  logic [ROW_BITS-1:0] wdata;
  logic rsp_valid, err;
  logic [ROW_BITS-1:0] rsp_row;
  logic [ACC_BITS-1:0] rsp_acc;
  logic [NCL-1:0] cluster_busy;
  int checks = 0, failures = 0;

  pim_bank #(.NUM_SUB(NUM_SUB), .CL_PER_SUB(CL_PER_SUB), .ROWS(ROWS), .ROW_BITS(ROW_BITS)) dut (.*);

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

  logic [7:0] img [IMG][IMG];
  logic [7:0] ker [3][3];

  function automatic int q4(input int v);
    return quant_ref(v, 1, 4, 0, 4);         // round(v / 16), clamped to 15
  endfunction

  // one round: up to NCL output pixels, pixel p of the round on cluster p
  task automatic conv_round(input int first, input bit four_bit);
    int n;
    n = 0;
    for (int p = first; p < first + NCL && p < TILE * TILE; p++) begin
      int oy, ox, s, c, base;
      logic [ROW_BITS-1:0] row;
      oy = p / TILE; ox = p % TILE; s = (p - first) / CL_PER_SUB; c = (p - first) % CL_PER_SUB;
      base = s * ROWS;
      row = '0;
      for (int ky = 0; ky < 3; ky++)
        for (int kx = 0; kx < 3; kx++) begin
          row[16*(3*ky+kx) +: 8]     = img[oy + ky][ox + kx];
          row[16*(3*ky+kx) + 8 +: 8] = ker[ky][kx];
        end
      send(mkcmd(OP_WRITE, base + 2 + c, 0, 0), row);
      if (four_bit) begin
        bank_cmd_t qc;
        qc = mkcmd(OP_QUANT, base + 2 + c, 0, 0);
        qc.dst_row = 16'(base + 8 + c); qc.q_mult = 1; qc.q_shift = 4; qc.prec = PREC_4BIT;
        send(qc, '0);
      end
      begin
        bank_cmd_t mc;
        mc = mkcmd(OP_MAC, base + (four_bit ? 8 : 2) + c, c, 0);
        mc.count = 9; mc.clear = 1; mc.prec = four_bit ? PREC_4BIT : PREC_8BIT;
        send(mc, '0);
      end
      n++;
    end
    for (int p = first; p < first + n; p++) begin
      int oy, ox, s, c, exp_v;
      oy = p / TILE; ox = p % TILE; s = (p - first) / CL_PER_SUB; c = (p - first) % CL_PER_SUB;
      exp_v = 0;
      for (int ky = 0; ky < 3; ky++)
        for (int kx = 0; kx < 3; kx++)
          exp_v += four_bit ? q4(int'(img[oy + ky][ox + kx])) * q4(int'(ker[ky][kx]))
                            : int'(img[oy + ky][ox + kx]) * int'(ker[ky][kx]);
      send(mkcmd(OP_RDACC, s * ROWS, c, 0), '0);
      @(negedge clk);
      check(rsp_valid && rsp_acc == 16'(exp_v),
            $sformatf("%0d-bit conv out(%0d,%0d) = %0d expected %0d", four_bit ? 4 : 8, oy, ox,
                      rsp_acc, 16'(exp_v)));
    end
  endtask

  initial begin
    cmd = '0; wdata = '0;
    for (int y = 0; y < IMG; y++)
      for (int x = 0; x < IMG; x++) img[y][x] = 8'($urandom);
    for (int ky = 0; ky < 3; ky++)
      for (int kx = 0; kx < 3; kx++) ker[ky][kx] = 8'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < NUM_SUB; s++) begin
      send(mkcmd(OP_WRITE, s * ROWS + 0, 0, 0), ROW_BITS'(make_fw(F_MUL)));
      send(mkcmd(OP_WRITE, s * ROWS + 1, 0, 0), ROW_BITS'(make_fw(F_ADD)));
      for (int c = 0; c < CL_PER_SUB; c++)
        for (int k = 0; k < NUM_CORES; k++)
          send(mkcmd(OP_PROGRAM, s * ROWS + ((k < 4) ? 0 : 1), c, k), '0);
    end
    for (int r = 0; r < TILE * TILE; r += NCL) conv_round(r, 0);
    for (int r = 0; r < TILE * TILE; r += NCL) conv_round(r, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
