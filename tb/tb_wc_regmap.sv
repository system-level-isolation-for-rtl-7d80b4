// tb_wc_regmap - self-checking test of the M-WC register map.
//
// Programs slots through the configuration port and checks the decoded table
// one cycle after each write: TOR (lower bound from the slot below), NA4,
// NAPOT of several sizes, start-end (SE), OFF. Also checks the reset values
// (perm entries reset to wid 0 with r=w=1), read-back of every register,
// that slot 0 is read-only and the last slot stays TOR at the top bound,
// cfg.L locking (including the slot below a locked TOR slot), the error
// record (first violation kept, cleared by a write) and unmapped addresses.
// A random phase then programs slots with random modes, addresses (some
// beyond the address space, where they saturate) and control bits, and
// compares each decoded slot with a reference decoder.
module tb_wc_regmap;
  import wc_pkg::*;
  localparam int unsigned NS = 8;
  localparam int unsigned NP = 4;

  logic clk = 0, rst_n = 0;
  logic req = 0, we = 0; logic [15:0] addr = 0; logic [31:0] wdata = 0, rdata; logic err;
  slot_dec_t [NS-1:0] slot;
  perm_t [NS-1:0][NP-1:0] perm;
  logic viol = 0; wid_t vwid = 0; logic vwr = 0; addr_t vaddr = 0;
  int checks = 0, failures = 0;

  wc_regmap #(.NUM_SLOTS(NS), .NUM_PERMS(NP)) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_i(req), .we_i(we), .addr_i(addr), .wdata_i(wdata),
    .rdata_o(rdata), .err_o(err), .slot_o(slot), .perm_o(perm),
    .viol_i(viol), .viol_wid_i(vwid), .viol_write_i(vwr), .viol_addr_i(vaddr));

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input string what, input logic [159:0] got, input logic [159:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h exp %h", what, got, exp); end
  endtask

  function automatic logic [15:0] sa(input int s, input int off);
    return 16'(SLOT_BASE + s * SLOT_STRIDE + off);
  endfunction

  task automatic wr(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk); req = 1; we = 1; addr = a; wdata = d;
    @(negedge clk); req = 0; we = 0;
  endtask
  task automatic rd(input logic [15:0] a, output logic [31:0] d);
    @(negedge clk); req = 1; we = 0; addr = a; #1 d = rdata;
    @(negedge clk); req = 0;
  endtask
  task automatic wr64(input int s, input int off, input logic [63:0] v);
    wr(sa(s, off), v[31:0]); wr(sa(s, off + 4), v[63:32]);
  endtask

  // reference decoder, written independently of the RTL function: encoded
  // values are byte address >> 2, saturating at 2^64; NAPOT size is found by
  // counting trailing ones
  logic [63:0] sh_addr [NS];
  function automatic logic [64:0] byte_of(input logic [63:0] enc);
    logic [65:0] b;
    b = {enc, 2'b00};
    return (b >= (66'd1 << 64)) ? (65'd1 << 64) : 65'(b);
  endfunction
  task automatic check_slot(input string what, input int s, input logic [63:0] a, input logic [63:0] e,
                            input logic [63:0] prev, input logic [31:0] c);
    logic en; logic [64:0] st, sp; logic [65:0] big; int t;
    en = 1; st = 0; sp = 0;
    case (c[2:0])
      3'd1: begin st = byte_of(prev); sp = byte_of(a); end
      3'd2: begin st = byte_of(a); sp = byte_of(a) + 65'd4; end
      3'd3: begin
        t = 0;
        while (t < 64 && a[t]) t++;
        big = {a, 2'b00};
        for (int k = 0; k <= t + 2 && k < 66; k++) big[k] = 1'b0;
        st = (big >= (66'd1 << 64)) ? (65'd1 << 64) : 65'(big);
        big = big + (66'd1 << (t + 3));
        sp = (big >= (66'd1 << 64) || t >= 62) ? (65'd1 << 64) : 65'(big);
      end
      3'd4: begin st = byte_of(a); sp = byte_of(e); end
      default: en = 0;
    endcase
    if (en)
      chk({what, " decode"}, {slot[s].en, slot[s].start, slot[s].stop, slot[s].gr, slot[s].er, slot[s].ew},
          {1'b1, st, sp, c[CFG_GR], c[CFG_ER], c[CFG_EW]});
    else
      chk({what, " off"}, slot[s].en, 0);
  endtask

  initial begin
    logic [31:0] d;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // ---- reset state
    rd(16'(REG_NSLOTS), d); chk("nslots", d, NS);
    rd(16'(REG_NPERMS), d); chk("nperms", d, NP);
    rd(sa(3, SLOT_PERM0 + 8), d); chk("perm reset", d, 32'hC000_0000);
    rd(sa(NS-1, SLOT_CFG), d); chk("last slot cfg reset TOR", d, 32'(A_TOR));
    rd(sa(NS-1, SLOT_ADDR_HI), d); chk("last slot top", d, 32'h4000_0000);
    chk("slot 0 off", slot[0].en, 0);
    chk("perm decode reset", perm[5][1], {1'b1, 1'b1, 7'd0});
    // ---- NA4 in slot 1
    wr64(1, SLOT_ADDR_LO, 64'h1000 >> 2);
    wr(sa(1, SLOT_CFG), 32'(A_NA4) | (1 << CFG_ER));
    @(negedge clk);
    chk("na4", {slot[1].en, slot[1].start, slot[1].stop, slot[1].er, slot[1].ew},
        {1'b1, 65'h1000, 65'h1004, 1'b1, 1'b0});
    // ---- TOR in slot 2 (lower bound is slot 1's address)
    wr64(2, SLOT_ADDR_LO, 64'h3000 >> 2);
    wr(sa(2, SLOT_CFG), 32'(A_TOR) | (1 << CFG_GR));
    @(negedge clk);
    chk("tor", {slot[2].en, slot[2].start, slot[2].stop, slot[2].gr}, {1'b1, 65'h1000, 65'h3000, 1'b1});
    // ---- NAPOT sizes in slot 3: 8 bytes, 4 KiB, 1 MiB at 0x8010_0000
    wr64(3, SLOT_ADDR_LO, (64'h2000 >> 2) | 64'h0);  // k=0 -> 8 bytes
    wr(sa(3, SLOT_CFG), 32'(A_NAPOT));
    @(negedge clk);
    chk("napot8", {slot[3].start, slot[3].stop}, {65'h2000, 65'h2008});
    wr64(3, SLOT_ADDR_LO, (64'h5000 >> 2) | 64'h1FF);  // 9 ones -> 4 KiB
    @(negedge clk);
    chk("napot4k", {slot[3].start, slot[3].stop}, {65'h5000, 65'h6000});
    wr64(3, SLOT_ADDR_LO, (64'h8010_0000 >> 2) | 64'h1FFFF);  // 17 ones -> 1 MiB
    @(negedge clk);
    chk("napot1m", {slot[3].start, slot[3].stop}, {65'h8010_0000, 65'h8020_0000});
    // ---- SE in slot 4, 64-bit addresses
    wr64(4, SLOT_ADDR_LO, 64'h0000_0012_3450_0000 >> 2);
    wr64(4, SLOT_EADDR_LO, 64'h0000_0012_3460_0040 >> 2);
    wr(sa(4, SLOT_CFG), 32'(A_SE));
    @(negedge clk);
    chk("se", {slot[4].en, slot[4].start, slot[4].stop}, {1'b1, 65'h12_3450_0000, 65'h12_3460_0040});
    rd(sa(4, SLOT_EADDR_HI), d); chk("eaddr hi readback", d, 32'h4);
    // ---- OFF
    wr(sa(4, SLOT_CFG), 32'(A_OFF));
    @(negedge clk);
    chk("off", slot[4].en, 0);
    // ---- perm entries, reserved bits read as zero
    wr(sa(2, SLOT_PERM0 + 4), 32'h8000_0055 | 32'h0ABC_DE00);
    rd(sa(2, SLOT_PERM0 + 4), d); chk("perm readback", d, 32'h8000_0055);
    chk("perm decode", perm[2][1], {1'b1, 1'b0, 7'h55});
    // ---- slot 0 read-only, last slot keeps address and TOR
    wr(sa(0, SLOT_ADDR_LO), 32'h1234);
    wr(sa(0, SLOT_CFG), 32'(A_NA4));
    rd(sa(0, SLOT_ADDR_LO), d); chk("slot0 addr ro", d, 0);
    @(negedge clk); chk("slot0 stays off", slot[0].en, 0);
    wr(sa(NS-1, SLOT_ADDR_LO), 32'h1234);
    wr(sa(NS-1, SLOT_CFG), 32'(A_NAPOT) | (1 << CFG_EW));
    rd(sa(NS-1, SLOT_CFG), d); chk("last slot TOR kept", d, 32'(A_TOR) | (1 << CFG_EW));
    wr64(NS-2, SLOT_ADDR_LO, 64'h9000 >> 2);
    @(negedge clk);
    chk("last slot range", {slot[NS-1].en, slot[NS-1].start, slot[NS-1].stop},
        {1'b1, 65'h9000, 65'h1_0000_0000_0000_0000});
    // ---- random slot programming against a reference decoder
    for (int s = 0; s < int'(NS); s++) begin
      logic [31:0] lo, hi;
      rd(sa(s, SLOT_ADDR_LO), lo); rd(sa(s, SLOT_ADDR_HI), hi); sh_addr[s] = {hi, lo};
    end
    for (int it = 0; it < 400; it++) begin
      int s, t;
      logic [63:0] a, e;
      logic [31:0] c;
      s = $urandom_range(1, NS - 2);
      t = $urandom_range(0, 30);
      a = {$urandom, $urandom} >> $urandom_range(2, 40);
      if ($urandom_range(0, 9) == 0) a = {$urandom, $urandom};  // beyond 2^64 once shifted
      if ($urandom_range(0, 1) == 1) a = (a >> (t + 1) << (t + 1)) | ((64'd1 << t) - 64'd1);
      e = a + 64'($urandom_range(0, 4096)) - 64'd16;
      c = 32'($urandom_range(0, 7)) | (32'($urandom_range(0, 1)) << CFG_GR) |
          (32'($urandom_range(0, 1)) << CFG_ER) | (32'($urandom_range(0, 1)) << CFG_EW);
      wr64(s, SLOT_ADDR_LO, a);
      wr64(s, SLOT_EADDR_LO, e);
      wr(sa(s, SLOT_CFG), c);
      sh_addr[s] = a;
      @(negedge clk);
      check_slot("random", s, a, e, sh_addr[s - 1], c);
      // the last slot's lower bound follows the slot below it
      check_slot("random last", NS - 1, sh_addr[NS - 1], 0, sh_addr[NS - 2], 32'(A_TOR) | (1 << CFG_EW));
      rd(sa(s, SLOT_CFG), d); chk("random cfg readback", d, c);
    end
    // restore the fixed layout the lock test below expects
    wr64(1, SLOT_ADDR_LO, 64'h1000 >> 2);
    wr64(2, SLOT_ADDR_LO, 64'h3000 >> 2);
    wr(sa(2, SLOT_CFG), 32'(A_TOR) | (1 << CFG_GR));
    // ---- lock: slot 2 locked TOR also freezes slot 1's address
    wr(sa(2, SLOT_CFG), 32'(A_TOR) | (1 << CFG_L));
    wr(sa(2, SLOT_CFG), 32'(A_OFF));
    wr64(2, SLOT_ADDR_LO, 64'h0);
    wr64(1, SLOT_ADDR_LO, 64'h7777);
    wr(sa(2, SLOT_PERM0), 32'h4000_0001);
    rd(sa(2, SLOT_CFG), d); chk("locked cfg", d, 32'(A_TOR) | (1 << CFG_L));
    rd(sa(2, SLOT_ADDR_LO), d); chk("locked addr", d, 32'h3000 >> 2);
    rd(sa(1, SLOT_ADDR_LO), d); chk("tor lower bound locked", d, 32'h1000 >> 2);
    rd(sa(2, SLOT_PERM0), d); chk("locked perm", d, 32'hC000_0000);
    wr(sa(1, SLOT_CFG), 32'(A_NAPOT));  // slot 1 cfg itself stays writable
    rd(sa(1, SLOT_CFG), d); chk("slot below cfg writable", d, 32'(A_NAPOT));
    // ---- error record
    @(negedge clk); viol = 1; vwid = 7'd42; vwr = 1; vaddr = 64'hDEAD_BEEF_0000_1234;
    @(negedge clk); vwid = 7'd9; vwr = 0; vaddr = 64'h1;
    @(negedge clk); viol = 0;
    rd(16'(REG_ERRCAUSE), d); chk("errcause", d, 32'h8000_0000 | (1 << ERR_W_BIT) | 42);
    rd(16'(REG_ERRADDR_LO), d); chk("erraddr lo", d, 32'h0000_1234);
    rd(16'(REG_ERRADDR_HI), d); chk("erraddr hi", d, 32'hDEAD_BEEF);
    wr(16'(REG_ERRCAUSE), 0);
    rd(16'(REG_ERRCAUSE), d); chk("errcause cleared", d, 0);
    @(negedge clk); viol = 1; vwid = 7'd9; vwr = 0; vaddr = 64'h40;
    @(negedge clk); viol = 0;
    rd(16'(REG_ERRCAUSE), d); chk("errcause read", d, 32'h8000_0000 | (1 << ERR_R_BIT) | 9);
    // ---- unmapped address
    @(negedge clk); req = 1; we = 0; addr = 16'h0020; #1 chk("unmapped err", err, 1);
    addr = 16'(REG_ERRCAUSE); #1 chk("mapped no err", err, 0);
    @(negedge clk); req = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
