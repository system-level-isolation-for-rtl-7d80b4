// wc_slot_analyzer - one analyzer of the M-WC checker: evaluates one slot.
//
// The checker holds one analyzer per slot and runs them all in parallel, so a
// transaction is judged in a single clock cycle whatever the slot count.
// An analyzer receives the transaction's first and last byte address, its
// WID, and the slot in decoded start/end form (decoding happens when the slot
// is written, not here). It reports:
//   hit   - the transaction's first byte lies in the slot's region,
//   match - the whole transaction lies in the region [start, stop),
//   r_ok  - match, and the slot grants read to this WID (a perm entry with
//           this wid and r=1, or the slot's general-read bit GR),
//   w_ok  - match, and a perm entry with this wid has w=1.
// Following the paper, the WID is compared against every perm entry in
// parallel instead of indexing a per-world bitmap. Requiring the whole burst
// to lie inside one region, and reporting "hit" for error-type selection, are
// this design's choices. Purely combinational.
// The slot's error-response bits (er, ew) arrive with the slot but are not
// used here (lint lists them as unused): the checker reads them directly.
module wc_slot_analyzer
  import wc_pkg::*;
#(
  parameter int unsigned NUM_PERMS = 4
) (
  input  bnd_t                      first_i,  // first byte of the access
  input  bnd_t                      last_i,   // last byte of the access (inclusive)
  input  wid_t                      wid_i,
  input  slot_dec_t                 slot_i,
  input  perm_t [NUM_PERMS-1:0]     perm_i,
  output logic                      hit_o,
  output logic                      match_o,
  output logic                      r_ok_o,
  output logic                      w_ok_o
);

  logic [NUM_PERMS-1:0] wid_eq;

  always_comb begin
    for (int unsigned k = 0; k < NUM_PERMS; k++) begin
      wid_eq[k] = (perm_i[k].wid == wid_i);
    end
    hit_o   = slot_i.en && (first_i >= slot_i.start) && (first_i < slot_i.stop);
    match_o = hit_o && (last_i < slot_i.stop);
    r_ok_o  = 1'b0;
    w_ok_o  = 1'b0;
    for (int unsigned k = 0; k < NUM_PERMS; k++) begin
      r_ok_o |= wid_eq[k] && perm_i[k].r;
      w_ok_o |= wid_eq[k] && perm_i[k].w;
    end
    r_ok_o = match_o && (r_ok_o || slot_i.gr);
    w_ok_o = match_o && w_ok_o;
  end

endmodule
