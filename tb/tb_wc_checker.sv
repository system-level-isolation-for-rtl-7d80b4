// tb_wc_checker - self-checking test of the combinational M-WC checker.
//
// Part 1 runs directed cases on a small hand-built table: two overlapping
// regions (accretive permissions), a general-read region, WID entries in
// different perm positions, FIXED/INCR/WRAP bursts, a burst that runs past a
// region's end, and an access outside every region (bus error).
// Part 2 compares allow/buserr with a reference model for random tables and
// random transactions. The reference computes the burst's byte range and
// walks the slots itself.
module tb_wc_checker;
  import wc_pkg::*;
  localparam int unsigned NS = 8;
  localparam int unsigned NP = 4;

  addr_t addr; logic [7:0] len; logic [2:0] size; logic [1:0] burst;
  wid_t wid; logic write;
  slot_dec_t [NS-1:0] slot;
  perm_t [NS-1:0][NP-1:0] perm;
  logic allow, buserr;
  int checks = 0, failures = 0;
  logic clk = 0;

  wc_checker #(.NUM_SLOTS(NS), .NUM_PERMS(NP)) dut (
    .addr_i(addr), .len_i(len), .size_i(size), .burst_i(burst), .wid_i(wid),
    .write_i(write), .slot_i(slot), .perm_i(perm), .allow_o(allow), .buserr_o(buserr));

  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect2(input string what, input logic e_allow, input logic e_buserr);
    #1;
    checks++;
    if (allow !== e_allow || (!e_allow && buserr !== e_buserr)) begin
      failures++;
      $display("FAIL %s: allow=%0b/%0b buserr=%0b/%0b addr=%h len=%0d size=%0d burst=%0d wid=%0d wr=%0b",
               what, allow, e_allow, buserr, e_buserr, addr, len, size, burst, wid, write);
    end
  endtask

  task automatic acc(input addr_t a, input int l, input int sz, input logic [1:0] b,
                     input int w, input logic wr);
    addr = a; len = 8'(l); size = 3'(sz); burst = b; wid = wid_t'(w); write = wr;
  endtask

  // reference model
  function automatic void ref_check(output logic e_allow, output logic e_buserr);
    logic [127:0] first, last, n;
    logic any_hit;
    n = 128'(len + 1) << size;
    if (burst == BURST_FIXED) begin first = 128'(addr); last = first + (128'(1) << size) - 1; end
    else if (burst == BURST_WRAP) begin first = 128'(addr) / n * n; last = first + n - 1; end
    else begin first = 128'(addr); last = first + n - 1; end
    e_allow = 0; e_buserr = 0; any_hit = 0;
    for (int s = 0; s < NS; s++) begin
      if (slot[s].en && first >= 128'(slot[s].start) && first < 128'(slot[s].stop)) begin
        any_hit = 1;
        e_buserr |= write ? slot[s].ew : slot[s].er;
        if (last < 128'(slot[s].stop)) begin
          if (!write && slot[s].gr) e_allow = 1;
          for (int k = 0; k < NP; k++)
            if (perm[s][k].wid == wid && (write ? perm[s][k].w : perm[s][k].r)) e_allow = 1;
        end
      end
    end
    if (!any_hit) e_buserr = 1;
  endfunction

  initial begin
    logic ea, eb;
    // ---------------- directed table
    slot = '0;
    perm = '0;
    // slot 1: [0x1000, 0x2000) wid 3 rw, wid 5 r only (entry 2), ER=0 EW=1
    slot[1] = '{en:1, start:'h1000, stop:'h2000, gr:0, er:0, ew:1};
    perm[1][0] = '{r:1, w:1, wid:3};
    perm[1][2] = '{r:1, w:0, wid:5};
    // slot 2: [0x1800, 0x1900) overlays slot 1: wid 5 write (entry 3)
    slot[2] = '{en:1, start:'h1800, stop:'h1900, gr:0, er:1, ew:1};
    perm[2][3] = '{r:0, w:1, wid:5};
    // slot 3: [0x4000, 0x4100) general read, no entries for anyone
    slot[3] = '{en:1, start:'h4000, stop:'h4100, gr:1, er:1, ew:0};
    // slot 4: disabled, would allow everything
    slot[4] = '{en:0, start:'h0, stop:'h10000, gr:1, er:0, ew:0};
    perm[4][0] = '{r:1, w:1, wid:5};

    acc('h1000, 0, 3, BURST_INCR, 3, 0); expect2("wid3 read", 1, 0);
    acc('h1ff8, 0, 3, BURST_INCR, 3, 1); expect2("wid3 write at end", 1, 0);
    acc('h1ff8, 1, 3, BURST_INCR, 3, 1); expect2("wid3 burst past end", 0, 1);
    acc('h1200, 0, 2, BURST_INCR, 5, 0); expect2("wid5 read", 1, 0);
    acc('h1200, 0, 2, BURST_INCR, 5, 1); expect2("wid5 write outside overlay -> poison", 0, 1);
    acc('h1200, 0, 2, BURST_INCR, 4, 0); expect2("wid4 read denied, ER=0 -> poison", 0, 0);
    acc('h1810, 3, 3, BURST_INCR, 5, 1); expect2("wid5 write in overlay", 1, 0);
    acc('h1810, 3, 3, BURST_INCR, 5, 0); expect2("wid5 read in overlay via slot 1", 1, 0);
    acc('h4010, 0, 2, BURST_INCR, 9, 0); expect2("general read", 1, 0);
    acc('h4010, 0, 2, BURST_INCR, 9, 1); expect2("general read is not write, EW=0", 0, 0);
    acc('h8000, 0, 2, BURST_INCR, 5, 0); expect2("no region -> bus error", 0, 1);
    acc('h40F8, 7, 3, BURST_FIXED, 1, 0); expect2("FIXED burst stays in one beat", 1, 0);
    acc('h40F8, 1, 3, BURST_INCR, 1, 0); expect2("INCR burst crosses end", 0, 1);
    acc('h40F8, 3, 3, BURST_WRAP, 1, 0); expect2("WRAP window inside", 1, 0);

    // ---------------- random tables
    for (int t = 0; t < 3000; t++) begin
      for (int s = 0; s < NS; s++) begin
        slot[s].en    = ($urandom_range(0, 3) != 0);
        slot[s].start = bnd_t'($urandom_range(0, 'h3000));
        slot[s].stop  = slot[s].start + bnd_t'($urandom_range(0, 'h1000));
        slot[s].gr    = ($urandom_range(0, 5) == 0);
        slot[s].er    = $urandom_range(0, 1);
        slot[s].ew    = $urandom_range(0, 1);
        for (int k = 0; k < NP; k++)
          perm[s][k] = '{r:1'($urandom_range(0, 1)), w:1'($urandom_range(0, 1)),
                         wid:wid_t'($urandom_range(0, 7))};
      end
      acc(addr_t'($urandom_range(0, 'h4000)), $urandom_range(0, 15), $urandom_range(0, 3),
          2'($urandom_range(0, 2)), $urandom_range(0, 7), 1'($urandom_range(0, 1)));
      if (burst == BURST_WRAP) len = 8'((1 << $urandom_range(1, 4)) - 1);
      #1;
      ref_check(ea, eb);
      expect2("random", ea, eb);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
