// pim_cluster: nine LUT cores, their router and the cluster memory, run by a
// small sequencer that turns 4-bit look-ups into 8-bit multiply-accumulate.
//
// How it works. The cluster memory is a 32-nibble register file. A MAC
// command copies a DRAM row (the operand pairs) into the cluster's operand
// buffer and then, for each pair (a_i, b_i), loads the nibbles of a_i and b_i
// into the cluster memory and runs a fixed micro-program (pim_pkg::mac_step).
// Each micro-program step takes two cycles: in the first the router delivers
// the operands of every enabled core to its A/B registers, in the second the
// router writes the cores' looked-up results back. The accumulator lives in
// cluster-memory nibbles 4..7, so it carries over from pair to pair and from
// command to command unless a command asks for it to be cleared.
//
//   8-bit mode: four 4x4 partial products on cores 0-3, then nibble-column
//               additions with ripple carries on cores 4-8: 8 steps per MAC.
//   4-bit mode: operands are the low nibbles; 1 product + 4 additions:
//               5 steps per MAC.
//   max mode:   running maximum of unsigned bytes (max pooling) into acc[7:0]:
//               compare, max, select and add look-ups, 4 steps per byte.
// A program only gives the right answer when the cores hold the tables it
// expects (MAC: cores 0-3 multiply, 4-8 add; max: see pim_pkg::max_step);
// the tables are loaded like any other function through prog_load, so
// switching between MAC and max pooling means reprogramming cores 0-5.
// Arithmetic is unsigned; the MAC accumulator wraps modulo 2^16.
//
// Interface
//   prog_load, prog_core, prog_data : load the function words of one core.
//   start, prec, count, clear, operands : begin count MACs over the pairs
//       a_i = operands[16i +: 8], b_i = operands[16i+8 +: 8]; with max_op
//       set, take the maximum of the bytes x_i = operands[8i +: 8] instead.
//   busy, done (one-cycle pulse), acc.
// Timing: with start sampled on edge e0, busy is high from e0 for
// count*(1 + 2*steps) cycles (steps = 8, 5 or 4); done pulses in the cycle that
// follows. start and prog_load are ignored while busy.
//
// From the paper: nine cores per cluster, joined by a router; the cluster
// performs the MAC operations of CNN layers and, by reprogramming its LUTs,
// comparison for max pooling; 8-bit and 4-bit precision. The
// micro-programs, register allocation, operand layout, 16-bit accumulator and
// two-cycle step are this design's own. The paper's cluster MAC delay (6.4 ns)
// is eight times its core delay (0.8 ns), which matches the eight look-up
// steps of the 8-bit program.
module pim_cluster
  import pim_pkg::*;
#(
  parameter int unsigned ROW_BITS = 2048
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // function-word programming
  input  logic                     prog_load,
  input  logic [3:0]               prog_core,
  input  fw_word_t [FW_WORDS-1:0]  prog_data,
  // MAC command
  input  logic                     start,
  input  logic                     max_op,
  input  prec_t                    prec,
  input  logic [8:0]               count,
  input  logic                     clear,
  input  logic [ROW_BITS-1:0]      operands,
  // status
  output logic                     busy,
  output logic                     done,
  output logic [ACC_BITS-1:0]      acc
);

  localparam int unsigned PAIRS = ROW_BITS / 16;

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_RD, S_WR} state_t;

  state_t               state;
  prog_t                prog_q;
  logic [8:0]           count_q;
  logic [8:0]           pair_q;
  logic [3:0]           step_q;
  logic [ROW_BITS-1:0]  opbuf;
  nibble_t              mem [NIB_REGS];

  step_t                ops;
  nibble_t              core_a   [NUM_CORES];
  nibble_t              core_b   [NUM_CORES];
  logic [7:0]           core_res [NUM_CORES];
  logic                 wr_en    [NIB_REGS];
  nibble_t              wr_data  [NIB_REGS];
  logic [7:0]           pa, pb;

  always_comb begin
    ops = '0;
    if (state == S_RD || state == S_WR) begin
      if (prog_q == PROG_MAX8) ops = max_step(32'(step_q));
      else ops = mac_step((prog_q == PROG_MAC8) ? PREC_8BIT : PREC_4BIT, 32'(step_q));
    end
  end
  // operand pair i (MAC) or element i (max)
  assign pa  = (prog_q == PROG_MAX8) ? opbuf[8*pair_q[7:0] +: 8] : opbuf[16*pair_q[7:0] +: 8];
  assign pb  = opbuf[16*pair_q[7:0] + 8 +: 8];

  pim_router u_router (
    .mem_rd  (mem),
    .ops     (ops),
    .core_res(core_res),
    .wr_phase(state == S_WR),
    .core_a  (core_a),
    .core_b  (core_b),
    .wr_en   (wr_en),
    .wr_data (wr_data)
  );

  for (genvar k = 0; k < NUM_CORES; k++) begin : g_core
    lut_core u_core (
      .clk    (clk),
      .rst_n  (rst_n),
      .fw_load(prog_load && !busy && prog_core == 4'(k)),
      .fw_data(prog_data),
      .op_load(state == S_RD && ops[k].en),
      .a_in   (core_a[k]),
      .b_in   (core_b[k]),
      .result (core_res[k])
    );
  end

  // sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      prog_q  <= PROG_MAC8;
      count_q <= '0;
      pair_q  <= '0;
      step_q  <= '0;
      opbuf   <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          prog_q  <= max_op ? PROG_MAX8 : (prec == PREC_8BIT) ? PROG_MAC8 : PROG_MAC4;
          count_q <= count;
          pair_q  <= '0;
          opbuf   <= operands;
          if (count == 0) done  <= 1'b1;
          else            state <= S_LOAD;
        end
        S_LOAD: begin
          step_q <= '0;
          state  <= S_RD;
        end
        S_RD: state <= S_WR;
        S_WR: begin
          if (32'(step_q) + 1 < prog_len(prog_q)) begin
            step_q <= step_q + 1'b1;
            state  <= S_RD;
          end else if (pair_q + 1'b1 < count_q) begin
            pair_q <= pair_q + 1'b1;
            state  <= S_LOAD;
          end else begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // cluster memory
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < NIB_REGS; r++) mem[r] <= '0;
    end else if (state == S_IDLE && start && clear) begin
      for (int r = 0; r < 4; r++) mem[32'(R_ACC0) + r] <= '0;
    end else if (state == S_LOAD) begin
      mem[R_AL] <= pa[3:0];
      mem[R_AH] <= (prog_q == PROG_MAC4) ? 4'h0 : pa[7:4];
      mem[R_BL] <= pb[3:0];
      mem[R_BH] <= (prog_q == PROG_MAC4) ? 4'h0 : pb[7:4];
    end else begin
      for (int r = 0; r < NIB_REGS; r++)
        if (wr_en[r]) mem[r] <= wr_data[r];
    end
  end

  assign busy = (state != S_IDLE);
  assign acc  = {mem[R_ACC0+3], mem[R_ACC0+2], mem[R_ACC0+1], mem[R_ACC0]};

  // a MAC command may not ask for more pairs than the operand row holds
  always_ff @(posedge clk) begin
    if (state == S_IDLE && start)
      assert (32'(count) <= (max_op ? 2 * PAIRS : PAIRS))
        else $error("pim_cluster: count %0d exceeds the operand row", count);
  end

endmodule
