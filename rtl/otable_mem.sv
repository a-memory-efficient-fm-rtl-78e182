// otable_mem: block RAM that holds the incomplete O table.
//
// Entry b holds, for each base A/C/G/T, how many times it occurs in
// BWT[0 .. b*K-1], i.e. before segment b starts (the $ is never counted).
// Entry b is packed as {T, G, C, A}, CW bits each. Same port arrangement as
// bwt_mem: one synchronous read port, one write port, read-first, one cycle
// of read latency, no reset. Sampling every K characters is the paper's;
// storing the count before the segment (exclusive) and CW = 17 bits are
// this design's choices (64 x 4 x 17 bits plus the 262,144-bit BWT give the
// 266,496 BRAM bits reported for the FPGA build).
module otable_mem #(
  parameter int unsigned BLOCKS = 64,
  parameter int unsigned CW     = 17,
  localparam int unsigned AW    = (BLOCKS > 1) ? $clog2(BLOCKS) : 1
) (
  input  logic                clk,
  input  logic                rd_en,
  input  logic [AW-1:0]       rd_addr,
  output logic [3:0][CW-1:0]  rd_data,
  input  logic                wr_en,
  input  logic [AW-1:0]       wr_addr,
  input  logic [3:0][CW-1:0]  wr_data
);

  logic [3:0][CW-1:0] mem [BLOCKS];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
