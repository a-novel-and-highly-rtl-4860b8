// iso_rom: the stored table of ISO_SETS = 32 composite-field parameter sets.
//
// Entry s holds {phi, lambda, delta, delta^-1}: phi = s[4] ? 3 : 2, lambda = 8 + s[3:1], and
// delta the isomorphism that maps the AES generator 8'h02 to the s[0]-th smallest root of the
// AES polynomial in the tower field (see gf_pkg). The contents are computed at elaboration by
// gf_pkg::f_iso_set, one entry at a time, so the table is a constant ROM; NREAD independent combinational read
// ports let the working set and the decoy matrices be read in the same cycle.
module iso_rom
  import gf_pkg::*;
#(
  parameter int unsigned NREAD = 3
) (
  input  logic [ISO_IDX_W-1:0] idx [NREAD],
  output iso_set_t             set [NREAD]
);
  iso_table_t table_bits;

  // One constant per entry keeps each elaboration-time evaluation small.
  for (genvar s = 0; s < int'(ISO_SETS); s++) begin : g_entry
    localparam iso_set_t ENTRY = f_iso_set(s);
    assign table_bits[s] = ENTRY;
  end

  for (genvar p = 0; p < int'(NREAD); p++) begin : g_port
    assign set[p] = table_bits[idx[p]];
  end
endmodule
