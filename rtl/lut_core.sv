// lut_core: one look-up-table processing-in-memory core.
//
// The core computes any function of two 4-bit operands that returns 8 bits by
// looking the answer up instead of calculating it. The answers are held in
// eight 256-bit function words (latch arrays): bit j of the result for
// operands (A, B) is bit {A,B} of function word j. The two 4-bit operand
// registers A and B together form the 8-bit select of a 256:1 multiplexer,
// eight bits wide, that picks one bit from each function word.
//
// Interface
//   fw_load / fw_data : load all eight function words at once, as read from
//                       the bit lines of a DRAM row (word j = fw_data[j]).
//   op_load / a_in / b_in : capture the operands delivered by the router.
//   result            : 8-bit looked-up value of the registered A and B.
// Timing: operands are registered on the clock edge where op_load is high;
// result follows combinationally from the A/B registers, so it is valid the
// cycle after op_load. A function-word load takes one cycle.
//
// From the paper: eight 256-bit function words, an 8-bit 256:1 mux, 4-bit A
// and B registers that drive the mux select. The paper also says each LUT
// produces a "4-bit data output"; this core follows its other statement that
// the mux picks "specific 8-bit data from the eight latches". The select
// order ({A,B}, A as the high half), loading all words in one cycle and the
// reset to zero are this design's choices.
module lut_core
  import pim_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     fw_load,
  input  fw_word_t [FW_WORDS-1:0]  fw_data,
  input  logic                     op_load,
  input  nibble_t                  a_in,
  input  nibble_t                  b_in,
  output logic [7:0]               result
);

  fw_word_t fw_q [FW_WORDS];   // the eight function-word latch arrays
  nibble_t  a_q, b_q;          // operand registers
  logic [7:0] sel;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < FW_WORDS; j++) fw_q[j] <= '0;
    end else if (fw_load) begin
      for (int j = 0; j < FW_WORDS; j++) fw_q[j] <= fw_data[j];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_q <= '0;
      b_q <= '0;
    end else if (op_load) begin
      a_q <= a_in;
      b_q <= b_in;
    end
  end

  // 8-bit wide 256:1 multiplexer
  assign sel = {a_q, b_q};
  always_comb begin
    for (int j = 0; j < FW_WORDS; j++) result[j] = fw_q[j][sel];
  end

endmodule
