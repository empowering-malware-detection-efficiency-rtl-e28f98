// pim_tb_pkg: helpers shared by the testbenches: the function-word images of
// the look-up tables the MAC and max-pooling programs need, and reference
// models.
//
// A table for f(x, y) with 4-bit x and y and an 8-bit result is stored as
// eight 256-bit words; bit {x,y} of word j is bit j of f(x, y). The tables are
// computed here from their formulas (x*y, x+y, comparisons), not read from
// a file.
package pim_tb_pkg;
  import pim_pkg::*;

  typedef enum int {F_MUL, F_ADD, F_RAND, F_CMP, F_MAX, F_WIN, F_PICKA, F_PICKB} fn_t;

  function automatic fw_word_t [FW_WORDS-1:0] make_fw(input fn_t f);
    fw_word_t [FW_WORDS-1:0] w;
    w = '0;
    for (int x = 0; x < 16; x++)
      for (int y = 0; y < 16; y++) begin
        logic [7:0] v;
        case (f)
          F_MUL:   v = 8'(x * y);
          F_ADD:   v = 8'(x + y);
          F_CMP:   v = (x < y) ? 8'd0 : (x == y) ? 8'd1 : 8'd2;
          F_MAX:   v = 8'((x > y) ? x : y);
          F_WIN:   v = 8'((x == 2 || (x == 1 && y != 0)) ? 1 : 0);
          F_PICKA: v = 8'((x % 2 == 1) ? y : 0);
          F_PICKB: v = 8'((x % 2 == 1) ? 0 : y);
          default: v = 8'($urandom);
        endcase
        for (int j = 0; j < FW_WORDS; j++) w[j][x*16 + y] = v[j];
      end
    return w;
  endfunction

  // table a MAC program expects on core k
  function automatic fn_t core_fn(input int k);
    return (k < 4) ? F_MUL : F_ADD;
  endfunction

  // table the max-pooling program expects on core k
  function automatic fn_t max_fn(input int k);
    case (k)
      0, 1:    return F_CMP;
      2:       return F_MAX;
      3:       return F_WIN;
      4:       return F_PICKA;
      5:       return F_PICKB;
      default: return F_ADD;
    endcase
  endfunction

  // reference quantizer (same formula as the scaler, written independently)
  function automatic int quant_ref(input int r, input int m, input int sh,
                                   input int z, input int bits);
    int q;
    int maxq;
    maxq = (1 << bits) - 1;
    q = (r * m + ((sh > 0) ? (1 << (sh - 1)) : 0)) / (1 << sh) + z;
    return (q > maxq) ? maxq : q;
  endfunction
endpackage
