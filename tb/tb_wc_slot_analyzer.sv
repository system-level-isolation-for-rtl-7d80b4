// tb_wc_slot_analyzer - self-checking test of one slot analyzer.
//
// Drives random regions, access ranges, WIDs and perm entries (with WIDs
// drawn from a small set so that matches are frequent) and compares hit,
// match, r_ok and w_ok with a reference computed here from the definitions:
// the whole access must lie in [start, stop), read is granted by a perm entry
// of the same WID with r=1 or by GR, write by an entry with w=1.
module tb_wc_slot_analyzer;
  import wc_pkg::*;
  localparam int unsigned NP = 4;

  bnd_t first, last;
  wid_t wid;
  slot_dec_t slot;
  perm_t [NP-1:0] perm;
  logic hit, match, r_ok, w_ok;
  int checks = 0, failures = 0;
  logic clk = 0;

  wc_slot_analyzer #(.NUM_PERMS(NP)) dut (
    .first_i(first), .last_i(last), .wid_i(wid), .slot_i(slot), .perm_i(perm),
    .hit_o(hit), .match_o(match), .r_ok_o(r_ok), .w_ok_o(w_ok));

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input logic got, input logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0b exp %0b (first=%h last=%h start=%h stop=%h wid=%0d)",
               what, got, exp, first, last, slot.start, slot.stop, wid);
    end
  endtask

  initial begin
    logic e_hit, e_match, e_r, e_w;
    for (int t = 0; t < 4000; t++) begin
      slot.en    = ($urandom_range(0, 7) != 0);
      slot.start = bnd_t'($urandom_range(0, 4096));
      slot.stop  = slot.start + bnd_t'($urandom_range(0, 2048));
      slot.gr    = ($urandom_range(0, 3) == 0);
      slot.er    = $urandom_range(0, 1);
      slot.ew    = $urandom_range(0, 1);
      first      = bnd_t'($urandom_range(0, 6000));
      last       = first + bnd_t'($urandom_range(0, 300));
      wid        = wid_t'($urandom_range(0, 5));
      for (int k = 0; k < NP; k++) begin
        perm[k].wid = wid_t'($urandom_range(0, 5));
        perm[k].r   = $urandom_range(0, 1);
        perm[k].w   = $urandom_range(0, 1);
      end
      if (t == 0) begin  // a large address near the top of the space
        slot.en = 1; slot.start = bnd_t'(64'hFFFF_FFFF_FFFF_0000); slot.stop = bnd_t'(1) << ADDR_W;
        first = bnd_t'(64'hFFFF_FFFF_FFFF_FFF8); last = bnd_t'(64'hFFFF_FFFF_FFFF_FFFF);
      end
      #1;
      e_hit   = slot.en && first >= slot.start && first < slot.stop;
      e_match = e_hit && last < slot.stop;
      e_r = 0; e_w = 0;
      for (int k = 0; k < NP; k++) begin
        if (perm[k].wid == wid && perm[k].r) e_r = 1;
        if (perm[k].wid == wid && perm[k].w) e_w = 1;
      end
      e_r = e_match && (e_r || slot.gr);
      e_w = e_match && e_w;
      check("hit", hit, e_hit);
      check("match", match, e_match);
      check("r_ok", r_ok, e_r);
      check("w_ok", w_ok, e_w);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
