// precision_scaler_tb: quantizes random rows with random scale, shift and
// zero point in 8-bit and 4-bit mode and compares every byte with the
// integer formula q = min(floor((r*m + 2^(sh-1)) / 2^sh) + z, 2^N - 1)
// evaluated here. Includes the identity setting (m = 1, sh = 0, z = 0) and
// clamping cases.
module precision_scaler_tb;
  import pim_pkg::*;
  import pim_tb_pkg::*;
  localparam int unsigned ROW_BITS = 512;
  logic [ROW_BITS-1:0] din, dout;
  prec_t prec;
  logic [7:0] q_mult, q_zero;
  logic [3:0] q_shift;
  int checks = 0, failures = 0;

  precision_scaler #(.ROW_BITS(ROW_BITS)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 100; t++) begin
      for (int i = 0; i < ROW_BITS / 8; i++) din[8*i +: 8] = 8'($urandom);
      prec = prec_t'(t % 2);
      if (t < 2) begin q_mult = 1; q_shift = 0; q_zero = 0; end
      else begin
        q_mult = 8'($urandom); q_shift = 4'($urandom_range(12)); q_zero = 8'($urandom_range(20));
      end
      #1;
      for (int i = 0; i < ROW_BITS / 8; i++) begin
        int e;
        e = quant_ref(int'(din[8*i +: 8]), int'(q_mult), int'(q_shift), int'(q_zero),
                          (prec == PREC_8BIT) ? 8 : 4);
        checks++;
        if (int'(dout[8*i +: 8]) != e) begin
          failures++;
          $display("FAIL t%0d byte %0d: r=%0d m=%0d sh=%0d z=%0d got %0d exp %0d", t, i,
                   din[8*i +: 8], q_mult, q_shift, q_zero, dout[8*i +: 8], e);
        end
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
