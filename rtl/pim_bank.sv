// pim_bank: a DRAM bank whose subarrays carry LUT-based PIM clusters: the
// top of this design.
//
// The bank stores the input data (e.g. byte images of program binaries) and
// the function words of the look-up tables in ordinary DRAM rows. Below each
// subarray sit CL_PER_SUB clusters of nine LUT cores. A cluster takes what it
// needs straight from the subarray's row buffer: a whole row of function
// words to (re)program one of its cores, or a whole row of operand pairs to
// multiply-accumulate. Once started, clusters run on their own, so all of
// them can compute at the same time while the bank keeps serving commands.
// With the defaults (16 subarrays x 16 clusters) the bank holds 256 clusters.
//
// Commands (pim_pkg::bank_cmd_t, valid/ready handshake, one at a time):
//   OP_WRITE   row <- wdata
//   OP_READ    rsp_row <- row
//   OP_PROGRAM core `core` of cluster `cluster` under row's subarray <- row
//   OP_MAC     that cluster runs `count` MACs (prec 8- or 4-bit) over row,
//              optionally clearing its accumulator first
//   OP_MAX     that cluster takes the maximum of `count` bytes of row into
//              acc[7:0] (max pooling), optionally clearing it first
//   OP_RDACC   rsp_acc <- that cluster's accumulator
//   OP_QUANT   dst_row <- precision_scaler(row), same subarray
// Row addresses are {subarray, local row}; the global row decoder splits them.
//
// Timing: a command is accepted when cmd_valid and cmd_ready are both high.
// cmd_ready is low for the cycle after each accepted command (the row is
// activated into the row buffer, then used), and stays low while an OP_MAC,
// OP_MAX, OP_PROGRAM or OP_RDACC names a busy cluster (a stall). OP_READ and OP_RDACC
// answer with rsp_valid two cycles after acceptance. err pulses with the
// response slot of a command whose row, destination or cluster is out of
// range; such a command does nothing.
//
// From the paper: subarrays with sense amplifiers, a global row decoder,
// clusters attached to subarrays, function words read from DRAM bit lines,
// 256 clusters, quantization applied on retrieval and written back. The
// split of 256 clusters into 16 x 16, row count and width, the command set and
// all timing are this design's choices. Refresh, DRAM timing and the
// inter-subarray copy links of the bank are not modelled.
module pim_bank
  import pim_pkg::*;
#(
  parameter int unsigned NUM_SUB    = 16,
  parameter int unsigned CL_PER_SUB = 16,
  parameter int unsigned ROWS       = 512,
  parameter int unsigned ROW_BITS   = 2048
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           cmd_valid,
  output logic                           cmd_ready,
  input  bank_cmd_t                      cmd,
  input  logic [ROW_BITS-1:0]            wdata,
  output logic                           rsp_valid,
  output logic [ROW_BITS-1:0]            rsp_row,
  output logic [ACC_BITS-1:0]            rsp_acc,
  output logic                           err,
  output logic [NUM_SUB*CL_PER_SUB-1:0]  cluster_busy
);

  localparam int unsigned NCL = NUM_SUB * CL_PER_SUB;
  localparam int unsigned RW  = $clog2(ROWS);
  localparam int unsigned SW  = (NUM_SUB > 1) ? $clog2(NUM_SUB) : 1;

  if (ROW_BITS < FW_WORDS * FW_BITS) begin : g_bad_row
    $error("pim_bank: a row must hold the %0d function-word bits of a core", FW_WORDS * FW_BITS);
  end

  // ---- decode of the incoming command ------------------------------------
  logic [NUM_SUB-1:0]  dec_sel, dst_sel_unused;
  logic [$clog2(NUM_SUB)-1:0] dec_idx, dst_idx;
  logic [RW-1:0]       dec_row, dst_row;
  logic                dec_oob, dst_oob;

  global_row_decoder #(.NUM_SUB(NUM_SUB), .ROWS(ROWS), .ADDR_W(16)) u_dec (
    .addr(cmd.row), .sub_sel(dec_sel), .sub_idx(dec_idx), .local_row(dec_row), .oob(dec_oob)
  );
  global_row_decoder #(.NUM_SUB(NUM_SUB), .ROWS(ROWS), .ADDR_W(16)) u_dec_dst (
    .addr(cmd.dst_row), .sub_sel(dst_sel_unused), .sub_idx(dst_idx), .local_row(dst_row), .oob(dst_oob)
  );

  logic cmd_bad, needs_cluster, target_busy;
  int unsigned tgt;

  assign needs_cluster = (cmd.op == OP_PROGRAM) || (cmd.op == OP_MAC) || (cmd.op == OP_MAX)
                       || (cmd.op == OP_RDACC);
  assign tgt           = 32'(dec_idx) * CL_PER_SUB + 32'(cmd.cluster);
  assign cmd_bad       = dec_oob
                       || (needs_cluster && 32'(cmd.cluster) >= CL_PER_SUB)
                       || (cmd.op == OP_PROGRAM && 32'(cmd.core) >= NUM_CORES)
                       || (cmd.op == OP_QUANT && (dst_oob || dst_idx != dec_idx))
                       || (cmd.op == OP_MAC && 32'(cmd.count) > ROW_BITS / 16)
                       || (cmd.op == OP_MAX && 32'(cmd.count) > ROW_BITS / 8);
  assign target_busy   = needs_cluster && !cmd_bad && cluster_busy[tgt];

  // ---- controller ----------------------------------------------------------
  typedef enum logic {B_IDLE, B_EXEC} bstate_t;
  bstate_t    state;
  bank_cmd_t  cmd_q;
  logic       bad_q;
  logic [SW-1:0] sub_q;
  logic [RW-1:0] dst_row_q;
  int unsigned   tgt_q;

  assign cmd_ready = (state == B_IDLE) && !target_busy;

  logic accept;
  assign accept = cmd_valid && cmd_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= B_IDLE;
      cmd_q     <= '0;
      bad_q     <= 1'b0;
      sub_q     <= '0;
      dst_row_q <= '0;
      tgt_q     <= 0;
    end else begin
      unique case (state)
        B_IDLE: if (accept) begin
          state     <= B_EXEC;
          cmd_q     <= cmd;
          bad_q     <= cmd_bad;
          sub_q     <= SW'(dec_idx);
          dst_row_q <= dst_row;
          tgt_q     <= tgt;
        end
        B_EXEC: state <= B_IDLE;
        default: state <= B_IDLE;
      endcase
    end
  end

  // ---- subarrays -------------------------------------------------------------
  logic [ROW_BITS-1:0] row_buf [NUM_SUB];
  logic [ROW_BITS-1:0] cur_buf, quant_row;
  logic                quant_wr;

  assign cur_buf  = row_buf[sub_q];
  assign quant_wr = (state == B_EXEC) && (cmd_q.op == OP_QUANT) && !bad_q;

  precision_scaler #(.ROW_BITS(ROW_BITS)) u_scaler (
    .din    (cur_buf),
    .prec   (cmd_q.prec),
    .q_mult (cmd_q.q_mult),
    .q_shift(cmd_q.q_shift),
    .q_zero (cmd_q.q_zero),
    .dout   (quant_row)
  );

  for (genvar s = 0; s < NUM_SUB; s++) begin : g_sub
    logic sa_sel, sa_act, sa_we;
    logic [RW-1:0] sa_row;
    logic [ROW_BITS-1:0] sa_wdata;

    always_comb begin
      sa_sel   = 1'b0;
      sa_act   = 1'b0;
      sa_we    = 1'b0;
      sa_row   = dec_row;
      sa_wdata = wdata;
      if (accept && !cmd_bad && dec_sel[s]) begin
        sa_sel = 1'b1;
        sa_we  = (cmd.op == OP_WRITE);
        sa_act = (cmd.op == OP_READ) || (cmd.op == OP_PROGRAM)
              || (cmd.op == OP_MAC)  || (cmd.op == OP_MAX) || (cmd.op == OP_QUANT);
      end else if (quant_wr && 32'(sub_q) == s) begin
        sa_sel   = 1'b1;
        sa_we    = 1'b1;
        sa_row   = dst_row_q;
        sa_wdata = quant_row;
      end
    end

    dram_subarray #(.ROWS(ROWS), .ROW_BITS(ROW_BITS)) u_sa (
      .clk    (clk),
      .rst_n  (rst_n),
      .sel    (sa_sel),
      .act    (sa_act),
      .we     (sa_we),
      .row    (sa_row),
      .wdata  (sa_wdata),
      .row_buf(row_buf[s])
    );

    // clusters under this subarray read its row buffer
    for (genvar c = 0; c < CL_PER_SUB; c++) begin : g_cl
      localparam int unsigned ID = s * CL_PER_SUB + c;
      logic hit;
      logic [ACC_BITS-1:0] acc;
      assign hit = (state == B_EXEC) && !bad_q && (tgt_q == ID);

      pim_cluster #(.ROW_BITS(ROW_BITS)) u_cl (
        .clk      (clk),
        .rst_n    (rst_n),
        .prog_load(hit && cmd_q.op == OP_PROGRAM),
        .prog_core(cmd_q.core),
        .prog_data(row_buf[s][FW_WORDS*FW_BITS-1:0]),
        .start    (hit && (cmd_q.op == OP_MAC || cmd_q.op == OP_MAX)),
        .max_op   (cmd_q.op == OP_MAX),
        .prec     (cmd_q.prec),
        .count    (cmd_q.count),
        .clear    (cmd_q.clear),
        .operands (row_buf[s]),
        .busy     (cluster_busy[ID]),
        .done     (),
        .acc      (acc)
      );
    end
  end

  // ---- responses ---------------------------------------------------------
  logic [ACC_BITS-1:0] acc_all [NCL];
  for (genvar s = 0; s < NUM_SUB; s++) begin : g_acc_s
    for (genvar c = 0; c < CL_PER_SUB; c++) begin : g_acc_c
      assign acc_all[s*CL_PER_SUB + c] = g_sub[s].g_cl[c].acc;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsp_valid <= 1'b0;
      rsp_row   <= '0;
      rsp_acc   <= '0;
      err       <= 1'b0;
    end else begin
      rsp_valid <= (state == B_EXEC) && (cmd_q.op == OP_READ || cmd_q.op == OP_RDACC);
      err       <= (state == B_EXEC) && bad_q;
      if (state == B_EXEC && cmd_q.op == OP_READ)
        rsp_row <= bad_q ? '0 : cur_buf;
      if (state == B_EXEC && cmd_q.op == OP_RDACC)
        rsp_acc <= bad_q ? '0 : acc_all[tgt_q];
    end
  end

endmodule
