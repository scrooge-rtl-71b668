// scrooge_dc_pe: one GenASM-DC processing element.
//
// Applies the update rule of the GenASM-DC algorithm to one entry
// R[i][d] of the DP table (bit j of an entry is pattern position j, MSB
// first):
//   I = R[i][d-1]   << 1          insertion    (north neighbour)
//   D = R[i+1][d-1]               deletion     (north-east neighbour)
//   S = R[i+1][d-1] << 1          substitution (north-east neighbour)
//   M = (R[i+1][d] << 1) | PM     match        (east neighbour)
//   R[i][d] = I & D & S & M, and R[i][0] = M for the exact-match row.
//
// The same element serves two places. In the DC array it computes the
// entries. In the traceback unit it regenerates the four edges of one
// entry from the stored neighbour entries; that is the SENE scheme, which
// stores entries rather than edges. The edges are therefore outputs too.
// WIDTH is the bitvector width: W in the DC array, W-O+1 in traceback,
// where only the DENT-trimmed leading bits are stored. Because shifts move
// bits only towards the MSB, the trimmed result is exactly the leading
// part of the full one.
//
// The insertion, deletion and substitution edges are wiring only: a
// neighbour entry shifted by one or passed as is, with no gate. They stay
// outputs on purpose, so that traceback reads every edge from the same
// element that defines them, and no second copy of the rule can drift.
//
// Purely combinational.
module scrooge_dc_pe #(
  parameter int unsigned WIDTH = 64
) (
  input  logic             first_row, // d == 0: exact-match row
  input  logic [WIDTH-1:0] r_n,       // R[i][d-1]
  input  logic [WIDTH-1:0] r_ne,      // R[i+1][d-1]
  input  logic [WIDTH-1:0] r_e,       // R[i+1][d]
  input  logic [WIDTH-1:0] cur_pm,    // pattern mask of text[i]
  output logic [WIDTH-1:0] r,         // R[i][d]
  output logic [WIDTH-1:0] e_ins,
  output logic [WIDTH-1:0] e_del,
  output logic [WIDTH-1:0] e_sub,
  output logic [WIDTH-1:0] e_mat
);

  always_comb begin
    e_ins = r_n << 1;
    e_del = r_ne;
    e_sub = r_ne << 1;
    e_mat = (r_e << 1) | cur_pm;
    r     = first_row ? e_mat : (e_ins & e_del & e_sub & e_mat);
  end

endmodule
