// bwt_mem: block RAM that holds the BWT, segmented into words of K characters.
//
// Each word is one segment of K two-bit characters (character j of the
// segment in bits [2j+1:2j]). One synchronous read port and one write port
// (simple dual port), read-first when both name the same word, one cycle of
// read latency. The contents are not reset: the controller only counts
// characters it has written. Storing a whole segment per word follows the
// paper's segmented BRAM storage; the word width and the port arrangement
// are this design's choice.
module bwt_mem #(
  parameter int unsigned K      = 2048,
  parameter int unsigned BLOCKS = 64,
  localparam int unsigned AW    = (BLOCKS > 1) ? $clog2(BLOCKS) : 1,
  localparam int unsigned DW    = 2 * K
) (
  input  logic          clk,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic [DW-1:0] rd_data,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [DW-1:0] wr_data
);

  logic [DW-1:0] mem [BLOCKS];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
