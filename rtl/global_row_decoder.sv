// global_row_decoder: splits a bank row address into a one-hot subarray
// select and the row within that subarray.
//
// The upper address bits choose the subarray (one-hot, so each subarray's
// local decoder sees only its own enable); the lower bits are the local row.
// An address beyond the last subarray selects nothing and raises oob.
// Purely combinational.
//
// From the paper: a global row decoder drives the subarrays of the bank. The
// address split (subarray in the high bits) is this design's choice.
module global_row_decoder #(
  parameter int unsigned NUM_SUB  = 16,
  parameter int unsigned ROWS     = 512,
  parameter int unsigned ADDR_W   = 16
) (
  input  logic [ADDR_W-1:0]        addr,
  output logic [NUM_SUB-1:0]       sub_sel,
  output logic [$clog2(NUM_SUB)-1:0] sub_idx,
  output logic [$clog2(ROWS)-1:0]  local_row,
  output logic                     oob
);

  localparam int unsigned RW = $clog2(ROWS);

  logic [ADDR_W-1:0] upper;

  assign local_row = addr[RW-1:0];
  assign upper     = addr >> RW;
  assign sub_idx   = upper[$clog2(NUM_SUB)-1:0];
  assign oob       = (32'(upper) >= NUM_SUB);

  always_comb begin
    sub_sel = '0;
    if (!oob) sub_sel[sub_idx] = 1'b1;
  end

endmodule
