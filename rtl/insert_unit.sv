// insert_unit: rewrites one BWT segment and its O-table entry for one insertion.
//
// Inserting a character at position p of the BWT moves every later
// character one place up. The segment holding p (first = 1) keeps
// positions below off, takes the new character at off and moves the rest
// up by one. Every later segment takes carry_in (the old last character of
// the segment before it) at position 0 and moves its own characters up.
// In both cases the old last character leaves as carry_out.
// The O-table entry of a segment counts what lies before it, so the first
// segment's entry is unchanged and a later one gains the inserted
// character (if it counts: the $ does not) and loses carry_in, which has
// moved into the segment: O_new(a) = O_old(a) + [a = ins] - [a = carry_in].
// Purely combinational; the controller feeds one segment per cycle.
// The segment-by-segment refresh is what the paper describes for the
// Update & Insert state; the carry formulation is this design's.
module insert_unit
  import saii_pkg::*;
#(
  parameter int unsigned K  = 2048,
  parameter int unsigned CW = 17,
  localparam int unsigned OW = $clog2(K)
) (
  input  logic                first,
  input  logic [OW-1:0]       off,
  input  base_t               ins_base,
  input  logic                ins_count,
  input  base_t               carry_in,
  input  logic [2*K-1:0]      old_block,
  input  logic [3:0][CW-1:0]  old_occ,
  output logic [2*K-1:0]      new_block,
  output logic [3:0][CW-1:0]  new_occ,
  output base_t               carry_out
);

  always_comb begin
    for (int j = 0; j < int'(K); j++) begin
      if (first) begin
        if (j < int'(off))       new_block[2*j +: 2] = old_block[2*j +: 2];
        else if (j == int'(off)) new_block[2*j +: 2] = ins_base;
        else                     new_block[2*j +: 2] = old_block[2*(j-1) +: 2];
      end else begin
        if (j == 0)              new_block[2*j +: 2] = carry_in;
        else                     new_block[2*j +: 2] = old_block[2*(j-1) +: 2];
      end
    end
    carry_out = base_t'(old_block[2*K-1 -: 2]);
  end

  always_comb begin
    for (int a = 0; a < 4; a++) begin
      new_occ[a] = old_occ[a];
      if (!first) begin
        if (ins_count && (a == int'(ins_base))) new_occ[a] = new_occ[a] + 1'b1;
        if (a == int'(carry_in))                new_occ[a] = new_occ[a] - 1'b1;
      end
    end
  end

endmodule
