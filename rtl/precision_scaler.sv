// precision_scaler: uniform quantization of a DRAM row, byte by byte, to
// 8-bit or 4-bit unsigned integers.
//
// Uniform quantization relates a real value r and its N-bit code q by
// r = S * (q - Z), with scale S and zero point Z. Quantizing is the inverse,
// q = round(r / S) + Z, clamped to 0 .. 2^N - 1. Here r is each stored byte
// of the row, 1/S is given in fixed point as q_mult / 2^q_shift, and the
// result is rounded half up:
//     q = clamp( ((r * q_mult + 2^(q_shift-1)) >> q_shift) + q_zero )
// (no rounding term when q_shift = 0). Each code is written back in the
// byte it came from, zero-extended, so a 4-bit code sits in the low nibble
// where the 4-bit MAC mode expects it.
//
// Interface: din (row), prec (PREC_8BIT or PREC_4BIT), q_mult, q_shift,
// q_zero; dout (quantized row). Purely combinational; all bytes in parallel.
//
// From the paper: uniform quantization r = S(q - Z) of the stored input
// data to 16-, 8- or 4-bit integers, applied on retrieval and written back to
// the dataset. The fixed-point form of 1/S, the rounding, the clamping and
// the byte-per-code layout are this design's own; the 16-bit target and the
// 32-bit floating-point source of the paper are outside this 8-bit datapath.
module precision_scaler
  import pim_pkg::*;
#(
  parameter int unsigned ROW_BITS = 2048
) (
  input  logic [ROW_BITS-1:0] din,
  input  prec_t               prec,
  input  logic [7:0]          q_mult,
  input  logic [3:0]          q_shift,
  input  logic [7:0]          q_zero,
  output logic [ROW_BITS-1:0] dout
);

  localparam int unsigned BYTES = ROW_BITS / 8;

  logic [16:0] rnd;
  logic [8:0]  qmax;

  assign rnd  = (q_shift == 0) ? 17'd0 : 17'(17'd1 << (q_shift - 4'd1));
  assign qmax = (prec == PREC_8BIT) ? 9'd255 : 9'd15;

  always_comb begin
    for (int i = 0; i < BYTES; i++) begin
      logic [16:0] prod;
      logic [16:0] q;
      prod = 17'(din[8*i +: 8]) * 17'(q_mult) + rnd;
      q    = (prod >> q_shift) + 17'(q_zero);
      dout[8*i +: 8] = (q > 17'(qmax)) ? qmax[7:0] : q[7:0];
    end
  end

endmodule
