// dram_subarray: one DRAM subarray with its row buffer (the sense amplifiers
// that the clusters beneath it read from).
//
// Activating a row copies it into the row buffer, where it stays until the
// next activation; clusters attached to the subarray read function words and
// operands from the row buffer, which models their connection to the bit
// lines. A write stores a full row and leaves the written data in the row
// buffer, as a DRAM write through the sense amplifiers does.
//
// Interface: sel (this subarray is addressed; from the global row decoder),
// act (activate row), we with wdata (write row), row_buf (sense-amplifier
// contents). Timing: one operation per cycle; row_buf holds the activated or
// written row from the cycle after the command.
//
// From the paper: the bank is built of subarrays, each with sense-amplifier
// / decoder logic and clusters attached to it. The row count and row width,
// full-row access and the absence of refresh and DRAM timing are this
// design's choices; the storage is written as a plain array, not a DRAM cell
// model.
module dram_subarray #(
  parameter int unsigned ROWS     = 512,
  parameter int unsigned ROW_BITS = 2048
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    sel,
  input  logic                    act,
  input  logic                    we,
  input  logic [$clog2(ROWS)-1:0] row,
  input  logic [ROW_BITS-1:0]     wdata,
  output logic [ROW_BITS-1:0]     row_buf
);

  logic [ROW_BITS-1:0] cells [ROWS];

  always_ff @(posedge clk) begin
    if (sel && we) cells[row] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)             row_buf <= '0;
    else if (sel && we)     row_buf <= wdata;
    else if (sel && act)    row_buf <= cells[row];
  end

endmodule
