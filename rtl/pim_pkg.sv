// pim_pkg: types and constants shared by the LUT-based processing-in-memory
// (PIM) datapath.
//
// A LUT core looks up one 8-bit result for a pair of 4-bit operands. A cluster
// of nine cores performs wider arithmetic by running a short micro-program:
// each step, the router hands every enabled core two nibbles from the cluster
// memory (a small nibble register file) and writes the low and high nibble of
// the core's 8-bit result back into it. This package holds the micro-op
// format, the bank command format and the three micro-programs (8-bit and
// 4-bit multiply-accumulate, 8-bit running maximum for max pooling).
//
// Taken from the paper: nine cores per cluster, 256-entry 8-bit look-up
// tables held as eight 256-bit function words, 4-bit A/B operands, 8-bit and
// 4-bit precision modes. Everything else here (micro-op encoding, register
// allocation, the MAC and max schedules, the 16-bit accumulator, the command set) is
// this design's own choice.
package pim_pkg;

  // ---- core / cluster geometry ------------------------------------------
  localparam int unsigned NUM_CORES   = 9;    // cores per cluster
  localparam int unsigned FW_WORDS    = 8;    // function words per core
  localparam int unsigned FW_BITS     = 256;  // bits per function word
  localparam int unsigned NIB_REGS    = 32;   // nibbles of cluster memory
  localparam int unsigned ACC_BITS    = 16;   // accumulator width

  typedef logic [3:0]           nibble_t;
  typedef logic [4:0]           reg_idx_t;
  typedef logic [FW_BITS-1:0]   fw_word_t;

  // Precision mode of a multiply-accumulate.
  typedef enum logic {
    PREC_8BIT = 1'b0,
    PREC_4BIT = 1'b1
  } prec_t;

  // One core's work in one micro-program step.
  typedef struct packed {
    logic     en;    // core is used in this step
    reg_idx_t a;     // cluster-memory nibble routed to register A
    reg_idx_t b;     // cluster-memory nibble routed to register B
    logic     wlo;   // write result[3:0] back
    reg_idx_t lo;    //   ... into this nibble
    logic     whi;   // write result[7:4] back
    reg_idx_t hi;    //   ... into this nibble
  } core_op_t;

  typedef core_op_t [NUM_CORES-1:0] step_t;

  // Fixed cluster-memory allocation used by the MAC programs.
  localparam reg_idx_t R_AL   = 5'd0;  // operand a, bits 3:0
  localparam reg_idx_t R_AH   = 5'd1;  // operand a, bits 7:4
  localparam reg_idx_t R_BL   = 5'd2;  // operand b, bits 3:0
  localparam reg_idx_t R_BH   = 5'd3;  // operand b, bits 7:4
  localparam reg_idx_t R_ACC0 = 5'd4;  // accumulator nibbles 4..7

  // Function placement the MAC programs expect: cores 0-3 hold a 4x4
  // multiply table, cores 4-8 hold a 4+4 add table.

  function automatic core_op_t mk(input int a, input int b, input int lo,
                                  input int hi);
    core_op_t o;
    o.en  = 1'b1;
    o.a   = reg_idx_t'(a);
    o.b   = reg_idx_t'(b);
    o.wlo = (lo >= 0);
    o.lo  = (lo >= 0) ? reg_idx_t'(lo) : '0;
    o.whi = (hi >= 0);
    o.hi  = (hi >= 0) ? reg_idx_t'(hi) : '0;
    return o;
  endfunction

  // Micro-programs a cluster can run.
  typedef enum logic [1:0] {
    PROG_MAC8 = 2'd0,   // acc += a*b, 8-bit operands
    PROG_MAC4 = 2'd1,   // acc += a*b, 4-bit operands
    PROG_MAX8 = 2'd2    // acc[7:0] = max(acc[7:0], x), 8-bit elements
  } prog_t;

  // Number of steps of each program.
  function automatic int unsigned prog_len(input prog_t p);
    case (p)
      PROG_MAC8: return 8;
      PROG_MAC4: return 5;
      default:   return 4;
    endcase
  endfunction

  // Function placement the max program expects: cores 0-1 compare
  // (0: x<y, 1: x==y, 2: x>y), core 2 max(x,y), core 3 "a wins"
  // (x==2 || (x==1 && y!=0)), core 4 (x[0] ? y : 0), core 5 (x[0] ? 0 : y),
  // core 6 x+y.
  //
  // Micro-program: running maximum of unsigned bytes x (in nibbles 0,1) into
  // the low accumulator byte (nibbles 4,5); four steps.
  function automatic step_t max_step(input int unsigned s);
    step_t st;
    st = '0;
    case (s)
      0: begin
        st[0] = mk(1, 5, 8, -1);         // cmp(xH, accH) -> cH
        st[1] = mk(0, 4, 9, -1);         // cmp(xL, accL) -> cL
        st[2] = mk(1, 5, 5, -1);         // max(xH, accH) -> new accH
      end
      1: st[3] = mk(8, 9, 11, -1);       // x wins? -> w
      2: begin
        st[4] = mk(11, 0, 12, -1);       // w ? xL : 0
        st[5] = mk(11, 4, 13, -1);       // w ? 0 : accL
      end
      3: st[6] = mk(12, 13, 4, -1);      // sum of the two picks -> new accL
      default: ;
    endcase
    return st;
  endfunction

  // Micro-program: acc[15:0] += a * b (unsigned, modulo 2^16).
  // 8-bit: four 4x4 partial products, then nibble-column additions with the
  // carries rippling into the next column; eight steps in all.
  // 4-bit: one product, then four column additions; five steps.
  function automatic step_t mac_step(input prec_t p, input int unsigned s);
    step_t st;
    st = '0;
    if (p == PREC_8BIT) begin
      case (s)
        0: begin                         // partial products
          st[0] = mk(0, 2, 8, 9);        // aL*bL -> p0
          st[1] = mk(0, 3, 10, 11);      // aL*bH -> p1
          st[2] = mk(1, 2, 12, 13);      // aH*bL -> p2
          st[3] = mk(1, 3, 14, 15);      // aH*bH -> p3
        end
        1: begin
          st[4] = mk(4, 8, 4, 16);       // col0: acc0+p0l -> n0, k0
          st[5] = mk(5, 9, 17, 18);      // col1: acc1+p0h -> t1, k1a
          st[6] = mk(10, 12, 19, 20);    // col1: p1l+p2l  -> u1, k1b
          st[7] = mk(6, 11, 21, 22);     // col2: acc2+p1h -> t2, k2a
          st[8] = mk(13, 14, 23, 24);    // col2: p2h+p3l  -> u2, k2b
        end
        2: begin
          st[4] = mk(17, 19, 25, 26);    // col1: t1+u1  -> v1, k1c
          st[5] = mk(21, 23, 27, 28);    // col2: t2+u2  -> v2, k2c
          st[6] = mk(18, 20, 29, -1);    // col2: k1a+k1b -> w2
          st[7] = mk(7, 15, 30, -1);     // col3: acc3+p3h -> v3
          st[8] = mk(22, 24, 31, -1);    // col3: k2a+k2b -> w3
        end
        3: begin
          st[4] = mk(25, 16, 5, 0);      // col1: v1+k0 -> n1, k1d
          st[5] = mk(27, 29, 1, 2);      // col2: v2+w2 -> x2, k2d
          st[6] = mk(30, 31, 3, -1);     // col3: v3+w3 -> x3
        end
        4: begin
          st[4] = mk(1, 26, 8, 9);       // col2: x2+k1c -> y2, k2e
          st[5] = mk(3, 28, 10, -1);     // col3: x3+k2c -> y3
        end
        5: begin
          st[4] = mk(8, 0, 6, 11);       // col2: y2+k1d -> n2, k2f
          st[5] = mk(10, 2, 12, -1);     // col3: y3+k2d -> z3
        end
        6: st[4] = mk(12, 9, 13, -1);    // col3: z3+k2e -> q3
        7: st[4] = mk(13, 11, 7, -1);    // col3: q3+k2f -> n3
        default: ;
      endcase
    end else begin
      case (s)
        0: st[0] = mk(0, 2, 8, 9);       // aL*bL -> p
        1: begin
          st[4] = mk(4, 8, 4, 16);       // col0: acc0+pl -> n0, k0
          st[5] = mk(5, 9, 17, 18);      // col1: acc1+ph -> t1, k1a
        end
        2: begin
          st[4] = mk(17, 16, 5, 20);     // col1: t1+k0   -> n1, k1b
          st[5] = mk(6, 18, 21, 22);     // col2: acc2+k1a -> t2, k2a
        end
        3: begin
          st[4] = mk(21, 20, 6, 24);     // col2: t2+k1b  -> n2, k2b
          st[5] = mk(7, 22, 25, -1);     // col3: acc3+k2a -> t3
        end
        4: st[4] = mk(25, 24, 7, -1);    // col3: t3+k2b  -> n3
        default: ;
      endcase
    end
    return st;
  endfunction

  // ---- bank command interface -------------------------------------------
  typedef enum logic [2:0] {
    OP_WRITE   = 3'd0,  // host writes a full row
    OP_READ    = 3'd1,  // host reads a full row
    OP_PROGRAM = 3'd2,  // one core's function words <- a row
    OP_MAC     = 3'd3,  // cluster runs MACs over the operand pairs of a row
    OP_RDACC   = 3'd4,  // read a cluster's accumulator
    OP_QUANT   = 3'd5,  // quantize a row byte-wise into another row
    OP_MAX     = 3'd6   // cluster takes the running maximum of a row's bytes
  } opcode_t;

  typedef struct packed {
    opcode_t     op;
    logic [15:0] row;       // bank row address (subarray, local row)
    logic [15:0] dst_row;   // OP_QUANT destination, same subarray
    logic [7:0]  cluster;   // cluster index within the subarray
    logic [3:0]  core;      // OP_PROGRAM core index
    logic [8:0]  count;     // OP_MAC pairs / OP_MAX bytes (0 = none)
    prec_t       prec;      // OP_MAC / OP_QUANT precision
    logic        clear;     // OP_MAC/OP_MAX: clear accumulator first
    logic [7:0]  q_mult;    // OP_QUANT 1/S as mult / 2^shift
    logic [3:0]  q_shift;
    logic [7:0]  q_zero;    // OP_QUANT zero point Z
  } bank_cmd_t;

endpackage
