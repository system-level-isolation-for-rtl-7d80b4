// wc_checker - the modified Worlds Checker (M-WC) decision logic.
//
// Fully combinational, as in the paper: the slot table has a flat structure
// with independent slots and no priority, so all NUM_SLOTS analyzers run in
// parallel and their results are simply ORed (regions overlay accretively:
// any slot that fully contains the access and grants the right permits it).
//
// Interface: a transaction (address, AXI len/size/burst, WID, read or write)
// comes from the arbiter; the checker returns
//   allow_o   - the access is permitted,
//   buserr_o  - for a denied access: answer with an AXI DECERR (1) or with
//               poisoned data (0). It is the OR of the ER (read) or EW (write)
//               bits of the slots the access starts in; an access that starts
//               in no slot gets a bus error.
// The byte range covered by a burst is computed here: INCR covers
// (len+1)<<size bytes from addr, FIXED covers one beat, WRAP covers the
// aligned wrap window. The error-type rule and the burst range are this
// design's choices; the paper only says that the per-rule control bits decide
// between a bus error and poisoned data.
module wc_checker
  import wc_pkg::*;
#(
  parameter int unsigned NUM_SLOTS = 16,
  parameter int unsigned NUM_PERMS = 4
) (
  input  addr_t                                 addr_i,
  input  logic [7:0]                            len_i,
  input  logic [2:0]                            size_i,
  input  logic [1:0]                            burst_i,
  input  wid_t                                  wid_i,
  input  logic                                  write_i,
  input  slot_dec_t [NUM_SLOTS-1:0]             slot_i,
  input  perm_t     [NUM_SLOTS-1:0][NUM_PERMS-1:0] perm_i,
  output logic                                  allow_o,
  output logic                                  buserr_o
);

  bnd_t first, last;
  bnd_t nbytes;
  logic [NUM_SLOTS-1:0] hit, match, r_ok, w_ok;

  // Byte range of the burst
  always_comb begin
    nbytes = (bnd_t'(len_i) + bnd_t'(1)) << size_i;
    unique case (burst_i)
      BURST_FIXED: begin
        first = bnd_t'(addr_i);
        last  = bnd_t'(addr_i) + (bnd_t'(1) << size_i) - bnd_t'(1);
      end
      BURST_WRAP: begin
        first = bnd_t'(addr_i) & ~(nbytes - bnd_t'(1));
        last  = first + nbytes - bnd_t'(1);
      end
      default: begin  // INCR (and the reserved encoding)
        first = bnd_t'(addr_i);
        last  = bnd_t'(addr_i) + nbytes - bnd_t'(1);
      end
    endcase
  end

  for (genvar s = 0; s < NUM_SLOTS; s++) begin : g_slot
    wc_slot_analyzer #(.NUM_PERMS(NUM_PERMS)) u_analyzer (
      .first_i (first),
      .last_i  (last),
      .wid_i   (wid_i),
      .slot_i  (slot_i[s]),
      .perm_i  (perm_i[s]),
      .hit_o   (hit[s]),
      .match_o (match[s]),
      .r_ok_o  (r_ok[s]),
      .w_ok_o  (w_ok[s])
    );
  end

  always_comb begin
    allow_o  = write_i ? (|w_ok) : (|r_ok);
    buserr_o = ~(|hit);
    for (int unsigned s = 0; s < NUM_SLOTS; s++) begin
      if (hit[s]) buserr_o |= write_i ? slot_i[s].ew : slot_i[s].er;
    end
  end

  // match is folded into r_ok/w_ok; kept visible for debug
  logic unused_match;
  assign unused_match = ^match;

endmodule
