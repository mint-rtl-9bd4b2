// victim_gen -- victim-row addresses for one mitigation.
//
// A mitigation of aggressor row R refreshes BLAST_RADIUS rows on each side of
// it. A transitive mitigation (level 1) refreshes the next BLAST_RADIUS rows
// further out, the victims of those victims, to stop attacks that use the
// mitigative refreshes themselves as hammers (Half-Double). In general level
// L covers distances L*BR+1 .. (L+1)*BR. Output slot 2k is R-d and slot 2k+1
// is R+d for d = L*BR+k+1; a slot whose row would fall outside 0..NUM_ROWS-1
// is marked invalid. Purely combinational.
//
// The refresh of BLAST_RADIUS rows each side and the victim-of-victim rule
// follow the paper; the default radius of 1 is what its figures draw, and
// the dropping of out-of-bank rows is this design's choice.
module victim_gen #(
  parameter int unsigned BLAST_RADIUS = mint_pkg::BLAST_RADIUS,
  parameter int unsigned NUM_ROWS     = mint_pkg::NUM_ROWS
) (
  input  mint_pkg::mit_req_t  req,
  output logic                vict_valid [2*BLAST_RADIUS],
  output mint_pkg::row_t      vict_row   [2*BLAST_RADIUS]
);
  import mint_pkg::*;

  always_comb begin
    for (int k = 0; k < int'(BLAST_RADIUS); k++) begin
      automatic int unsigned d  = 32'(req.lvl) * BLAST_RADIUS + 32'(k) + 1;
      automatic int unsigned r  = 32'(req.row);
      vict_valid[2*k]   = req.valid && (r >= d);
      vict_row[2*k]     = row_t'(r - d);
      vict_valid[2*k+1] = req.valid && (r + d < NUM_ROWS);
      vict_row[2*k+1]   = row_t'(r + d);
    end
  end

endmodule
