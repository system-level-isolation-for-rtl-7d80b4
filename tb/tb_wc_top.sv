// tb_wc_top - end-to-end test of the M-WC at its default parameters.
//
// A behavioural memory sits on the target port; the test drives the
// initiator and configuration ports. It programs a rule table that uses
// every address mode (NA4, NAPOT, TOR, start-end), a general-read region,
// an overlaid region with extra permissions, a locked slot, and both error
// responses, then:
//   * runs directed accesses for each rule and checks the outcome (data from
//     the target, AXI DECERR, or poisoned OKAY with zero data / dropped write);
//   * measures the overhead: an AR/AW (and its single W beat) reaches the
//     target exactly two cycles after the initiator offers it;
//   * issues a read and a write in the same cycle so the arbiter has to
//     choose, and a permitted then a denied read back to back so the demux
//     has to hold the second until the first has completed;
//   * checks the error record (first violation's WID, direction, address);
//   * runs random accesses against a reference model of the rule table.
// Each mechanism is counted; a mechanism that never happened is a failure.
module tb_wc_top;
  import wc_pkg::*;

  logic clk = 0, rst_n = 0;
  axi_req_t slv_req, mst_req;
  axi_rsp_t slv_rsp, mst_rsp;
  logic cfg_req = 0, cfg_we = 0; logic [15:0] cfg_addr = 0; logic [31:0] cfg_wdata = 0, cfg_rdata;
  logic cfg_err;
  int checks = 0, failures = 0;
  longint unsigned cyc = 0;
  int acc_size = 3;  // AXI size of the accesses issued

  wc_top dut (
    .clk_i(clk), .rst_ni(rst_n),
    .slv_req_i(slv_req), .slv_rsp_o(slv_rsp),
    .mst_req_o(mst_req), .mst_rsp_i(mst_rsp),
    .cfg_req_i(cfg_req), .cfg_we_i(cfg_we), .cfg_addr_i(cfg_addr), .cfg_wdata_i(cfg_wdata),
    .cfg_rdata_o(cfg_rdata), .cfg_err_o(cfg_err));

  tb_axi_mem #(.TAG(8'hA0), .STALL(1'b0)) u_mem (.clk_i(clk), .rst_ni(rst_n), .req_i(mst_req), .rsp_o(mst_rsp));

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // ---------------------------------------------------------------- counters
  int n_allow_rd = 0, n_allow_wr = 0, n_decerr_rd = 0, n_decerr_wr = 0;
  int n_poison_rd = 0, n_poison_wr = 0, n_contention = 0, n_switch_stall = 0;
  int n_lat2 = 0, n_gr = 0, n_overlay = 0, n_lock = 0, n_errrec = 0;
  int n_napot = 0, n_na4 = 0, n_tor = 0, n_se = 0;

  always @(posedge clk) if (rst_n) begin
    if (dut.h_chk_req == 2'b11) n_contention++;
    if (dut.h_valid[0] && !dut.h_ready[0] && dut.u_demux.ar_cnt_q != 0 &&
        (dut.h_sel[0] != ROUTE_TARGET) != dut.u_demux.ar_dst_q) n_switch_stall++;
  end

  // ------------------------------------------------------ configuration port
  function automatic logic [15:0] sa(input int s, input int off);
    return 16'(SLOT_BASE + s * SLOT_STRIDE + off);
  endfunction
  task automatic cw(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk); cfg_req = 1; cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_req = 0; cfg_we = 0;
  endtask
  task automatic cr(input logic [15:0] a, output logic [31:0] d);
    @(negedge clk); cfg_req = 1; cfg_we = 0; cfg_addr = a; #1 d = cfg_rdata;
    @(negedge clk); cfg_req = 0;
  endtask
  task automatic cw64(input int s, input int off, input logic [63:0] v);
    cw(sa(s, off), v[31:0]); cw(sa(s, off + 4), v[63:32]);
  endtask
  task automatic perm(input int s, input int k, input int wid, input logic r, input logic w);
    cw(sa(s, SLOT_PERM0 + 4 * k), (32'(r) << PERM_R_BIT) | (32'(w) << PERM_W_BIT) | 32'(wid));
  endtask
  // all perm entries of a slot start as wid 0 rw; give them an unused WID
  task automatic clear_perms(input int s);
    for (int k = 0; k < 4; k++) perm(s, k, 127, 0, 0);
  endtask

  // --------------------------------------------------------- reference model
  typedef struct {
    longint unsigned start, stop;
    logic gr, er, ew;
    int wid[4]; logic r[4]; logic w[4];
  } rule_t;
  rule_t rules[$];
  logic [DATA_W-1:0] shadow [addr_t];

  // outcome: 0 allowed, 1 bus error, 2 poison
  function automatic int expect_outcome(input addr_t a, input int len, input int wid, input logic wr);
    longint unsigned first, last;
    logic ok, hit, be;
    first = a; last = a + longint'((len + 1) << acc_size) - 1;
    ok = 0; hit = 0; be = 0;
    foreach (rules[i]) begin
      if (first >= rules[i].start && first < rules[i].stop) begin
        hit = 1;
        be |= wr ? rules[i].ew : rules[i].er;
        if (last < rules[i].stop) begin
          if (!wr && rules[i].gr) ok = 1;
          for (int k = 0; k < 4; k++)
            if (rules[i].wid[k] == wid && (wr ? rules[i].w[k] : rules[i].r[k])) ok = 1;
        end
      end
    end
    if (ok) return 0;
    return (!hit || be) ? 1 : 2;
  endfunction

  // ------------------------------------------------------- initiator driver
  task automatic axi_read(input addr_t a, input int len, input int wid, output logic [1:0] resp,
                          output logic [DATA_W-1:0] data0, output longint unsigned c_hs);
    @(negedge clk);
    slv_req.ar = '0; slv_req.ar.addr = a; slv_req.ar.len = 8'(len); slv_req.ar.size = 3'(acc_size);
    slv_req.ar.burst = BURST_INCR; slv_req.ar.user = wid_t'(wid); slv_req.ar.id = id_t'($urandom);
    slv_req.ar_valid = 1;
    @(posedge clk); while (!slv_rsp.ar_ready) @(posedge clk);
    c_hs = cyc;
    @(negedge clk); slv_req.ar_valid = 0; slv_req.r_ready = 1;
    resp = RESP_OKAY;
    for (int k = 0; k <= len; k++) begin
      @(posedge clk); while (!slv_rsp.r_valid) @(posedge clk);
      chk("r last", slv_rsp.r.last == (k == len));
      chk("r id", slv_rsp.r.id == slv_req.ar.id);
      if (k == 0) begin data0 = slv_rsp.r.data; resp = slv_rsp.r.resp; end
    end
    @(negedge clk); slv_req.r_ready = 0;
  endtask

  task automatic axi_write(input addr_t a, input int len, input int wid, input logic [DATA_W-1:0] d,
                           output logic [1:0] resp, output longint unsigned c_hs);
    @(negedge clk);
    slv_req.aw = '0; slv_req.aw.addr = a; slv_req.aw.len = 8'(len); slv_req.aw.size = 3'(acc_size);
    slv_req.aw.burst = BURST_INCR; slv_req.aw.user = wid_t'(wid); slv_req.aw.id = id_t'($urandom);
    slv_req.aw_valid = 1;
    slv_req.w.data = d; slv_req.w.strb = '1; slv_req.w.last = (len == 0); slv_req.w_valid = 1;
    @(posedge clk); while (!slv_rsp.aw_ready) @(posedge clk);
    c_hs = cyc;
    @(negedge clk); slv_req.aw_valid = 0;
    for (int k = 0; k <= len; k++) begin
      slv_req.w.data = d + DATA_W'(k); slv_req.w.last = (k == len); slv_req.w_valid = 1;
      @(posedge clk); while (!slv_rsp.w_ready) @(posedge clk);
      @(negedge clk);
    end
    slv_req.w_valid = 0; slv_req.b_ready = 1;
    @(posedge clk); while (!slv_rsp.b_valid) @(posedge clk);
    resp = slv_rsp.b.resp;
    chk("b id", slv_rsp.b.id == slv_req.aw.id);
    @(negedge clk); slv_req.b_ready = 0;
  endtask

  // one access, checked against the reference model
  task automatic access(input string what, input addr_t a, input int len, input int wid,
                        input logic wr, input int exp);
    logic [1:0] resp; logic [DATA_W-1:0] d, e; longint unsigned c;
    int got;
    chk({what, ": model agrees"}, expect_outcome(a, len, wid, wr) == exp);
    if (wr) begin
      int unsigned nw0;
      nw0 = u_mem.n_w;
      d = {$urandom, $urandom};
      axi_write(a, len, wid, d, resp, c);
      repeat (2) @(posedge clk);
      if (exp == 0) begin
        chk({what, ": write okay"}, resp == RESP_OKAY);
        chk({what, ": write reached target"}, u_mem.n_w == nw0 + unsigned'(len + 1));
        for (int k = 0; k <= len; k++) shadow[a + addr_t'(8 * k)] = d + DATA_W'(k);
        n_allow_wr++;
      end else if (exp == 1) begin
        chk({what, ": write DECERR"}, resp == RESP_DECERR);
        chk({what, ": write blocked"}, u_mem.n_w == nw0);
        n_decerr_wr++;
      end else begin
        chk({what, ": poisoned write okay"}, resp == RESP_OKAY);
        chk({what, ": poisoned write dropped"}, u_mem.n_w == nw0);
        n_poison_wr++;
      end
    end else begin
      axi_read(a, len, wid, resp, d, c);
      e = shadow.exists(a) ? shadow[a] : {8'hA0, a[DATA_W-9:0]};
      if (exp == 0) begin
        chk({what, ": read okay"}, resp == RESP_OKAY && d == e);
        n_allow_rd++;
      end else if (exp == 1) begin
        chk({what, ": read DECERR"}, resp == RESP_DECERR);
        n_decerr_rd++;
      end else begin
        chk({what, ": poisoned read"}, resp == RESP_OKAY && d == '0);
        n_poison_rd++;
      end
    end
  endtask

  // --------------------------------------------------------------- the test
  initial begin
    logic [31:0] v;
    logic [1:0] resp; logic [DATA_W-1:0] d; longint unsigned c0;
    slv_req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    cr(16'(REG_NSLOTS), v); chk("16 slots", v == 16);

    // slot 1: NAPOT 64 KiB at 0x1000_0000, wid 1 rw, wid 2 r, bus errors
    cw64(1, SLOT_ADDR_LO, (64'h1000_0000 >> 2) | 64'h1FFF);
    clear_perms(1); perm(1, 0, 1, 1, 1); perm(1, 3, 2, 1, 0);
    cw(sa(1, SLOT_CFG), 32'(A_NAPOT) | (1 << CFG_ER) | (1 << CFG_EW));
    rules.push_back('{'h1000_0000, 'h1001_0000, 0, 1, 1, '{1, 127, 127, 2}, '{1, 0, 0, 1}, '{1, 0, 0, 0}});
    // slot 2: NA4 at 0x2000_0000, wid 3 rw, poison on violation
    cw64(2, SLOT_ADDR_LO, 64'h2000_0000 >> 2);
    clear_perms(2); perm(2, 1, 3, 1, 1);
    cw(sa(2, SLOT_CFG), 32'(A_NA4));
    rules.push_back('{'h2000_0000, 'h2000_0004, 0, 0, 0, '{127, 3, 127, 127}, '{0, 1, 0, 0}, '{0, 1, 0, 0}});
    // slot 3: TOR [0x2000_0000, 0x2001_0000), wid 4 rw, poison
    cw64(3, SLOT_ADDR_LO, 64'h2001_0000 >> 2);
    clear_perms(3); perm(3, 2, 4, 1, 1);
    cw(sa(3, SLOT_CFG), 32'(A_TOR));
    rules.push_back('{'h2000_0000, 'h2001_0000, 0, 0, 0, '{127, 127, 4, 127}, '{0, 0, 1, 0}, '{0, 0, 1, 0}});
    // slot 4: SE [0x3000_0100, 0x3000_0300), wid 5 write only, general read
    cw64(4, SLOT_ADDR_LO, 64'h3000_0100 >> 2);
    cw64(4, SLOT_EADDR_LO, 64'h3000_0300 >> 2);
    clear_perms(4); perm(4, 0, 5, 0, 1);
    cw(sa(4, SLOT_CFG), 32'(A_SE) | (1 << CFG_GR) | (1 << CFG_ER) | (1 << CFG_EW));
    rules.push_back('{'h3000_0100, 'h3000_0300, 1, 1, 1, '{5, 127, 127, 127}, '{0, 0, 0, 0}, '{1, 0, 0, 0}});
    // slot 5: SE overlay [0x3000_0200, 0x3000_0280), wid 6 rw
    cw64(5, SLOT_ADDR_LO, 64'h3000_0200 >> 2);
    cw64(5, SLOT_EADDR_LO, 64'h3000_0280 >> 2);
    clear_perms(5); perm(5, 1, 6, 1, 1);
    cw(sa(5, SLOT_CFG), 32'(A_SE) | (1 << CFG_ER) | (1 << CFG_EW));
    rules.push_back('{'h3000_0200, 'h3000_0280, 0, 1, 1, '{127, 6, 127, 127}, '{0, 1, 0, 0}, '{0, 1, 0, 0}});
    // slot 6: SE [0x4000_0000, 0x4000_1000), wid 7 rw, locked
    cw64(6, SLOT_ADDR_LO, 64'h4000_0000 >> 2);
    cw64(6, SLOT_EADDR_LO, 64'h4000_1000 >> 2);
    clear_perms(6); perm(6, 0, 7, 1, 1);
    cw(sa(6, SLOT_CFG), 32'(A_SE) | (1 << CFG_ER) | (1 << CFG_EW) | (1 << CFG_L));
    rules.push_back('{'h4000_0000, 'h4000_1000, 0, 1, 1, '{7, 127, 127, 127}, '{1, 0, 0, 0}, '{1, 0, 0, 0}});
    // attempt to re-point the locked slot to wid 8: must be ignored
    perm(6, 0, 8, 1, 1);
    cr(sa(6, SLOT_PERM0), v); chk("locked perm kept", v[6:0] == 7);
    // the last slot is TOR from slot 14's address (slot 14 itself OFF) to the
    // top: [0x6000_0000, top), no permissions, bus errors
    cw64(14, SLOT_ADDR_LO, 64'h6000_0000 >> 2);
    clear_perms(15);
    cw(sa(15, SLOT_CFG), (1 << CFG_ER) | (1 << CFG_EW));
    rules.push_back('{'h6000_0000, 64'hFFFF_FFFF_FFFF_FFFF, 0, 1, 1, '{127, 127, 127, 127}, '{0, 0, 0, 0}, '{0, 0, 0, 0}});
    @(negedge clk);

    // ---- latency: two cycles from initiator handshake to target handshake
    axi_read('h1000_0040, 0, 1, resp, d, c0);
    chk("read latency 2", u_mem.last_ar_cyc - c0 == 2);
    if (u_mem.last_ar_cyc - c0 == 2) n_lat2++;
    axi_write('h1000_0048, 0, 1, 64'h1234, resp, c0);
    chk("write latency 2 (AW)", u_mem.last_aw_cyc - c0 == 2);
    chk("write latency 2 (W)", u_mem.last_w_cyc - c0 == 2);
    if (u_mem.last_aw_cyc - c0 == 2 && u_mem.last_w_cyc - c0 == 2) n_lat2++;
    shadow['h1000_0048] = 64'h1234;

    // ---- directed rules
    access("napot wid1 read", 'h1000_0100, 3, 1, 0, 0); n_napot++;
    access("napot wid1 write", 'h1000_0200, 1, 1, 1, 0);
    access("napot wid2 read", 'h1000_0200, 0, 2, 0, 0);
    access("napot wid2 write denied", 'h1000_0200, 0, 2, 1, 1);
    access("napot wid9 read denied", 'h1000_0200, 0, 9, 0, 1);
    // error record: the first violation since reset is wid 2's write
    cr(16'(REG_ERRCAUSE), v);
    chk("errcause", v == (32'h8000_0000 | (1 << ERR_W_BIT) | 2));
    cr(16'(REG_ERRADDR_LO), v); chk("erraddr", v == 32'h1000_0200);
    if (v == 32'h1000_0200) n_errrec++;
    cw(16'(REG_ERRCAUSE), 0);
    access("napot burst past end", 'h1000_FFF8, 1, 1, 0, 1);
    acc_size = 2;
    access("na4 wid3 read 4B", 'h2000_0000, 0, 3, 0, 0); n_na4++;
    acc_size = 3;
    access("na4 8B read outside tor perms: poisoned", 'h2000_0000, 0, 3, 0, 2);
    access("tor wid4 write", 'h2000_8000, 0, 4, 1, 0); n_tor++;
    access("tor wid4 read", 'h2000_8000, 0, 4, 0, 0);
    access("tor wid3 write poisoned", 'h2000_8000, 0, 3, 1, 2);
    access("tor wid3 read poisoned", 'h2000_8000, 0, 3, 0, 2);
    access("se wid5 write", 'h3000_0100, 0, 5, 1, 0); n_se++;
    access("se general read wid 11", 'h3000_0100, 0, 11, 0, 0); n_gr++;
    access("se wid11 write denied", 'h3000_0108, 0, 11, 1, 1);
    access("overlay wid6 write", 'h3000_0200, 0, 6, 1, 0); n_overlay++;
    access("overlay wid6 write outside", 'h3000_0180, 0, 6, 1, 1);
    access("locked slot wid7", 'h4000_0800, 0, 7, 1, 0);
    access("locked slot wid8 denied", 'h4000_0800, 0, 8, 1, 1); n_lock++;
    access("no rule", 'h5000_0000, 0, 1, 0, 1);
    access("top TOR slot, no permission", 'h7000_0000, 0, 1, 1, 1);

    // ---- contention: read and write offered in the same cycle
    fork
      axi_read('h1000_0300, 0, 1, resp, d, c0);
      begin
        logic [1:0] r2; longint unsigned c2;
        axi_write('h1000_0308, 0, 1, 64'h77, r2, c2);
        chk("contention write ok", r2 == RESP_OKAY);
      end
    join
    shadow['h1000_0308] = 64'h77;
    chk("contention read ok", resp == RESP_OKAY);

    // ---- demux switch: allowed long read, then a denied read right behind it
    fork
      begin
        @(negedge clk);
        slv_req.ar = '0; slv_req.ar.addr = 'h1000_0400; slv_req.ar.len = 15; slv_req.ar.size = 3;
        slv_req.ar.burst = BURST_INCR; slv_req.ar.user = 1; slv_req.ar_valid = 1;
        @(posedge clk); while (!slv_rsp.ar_ready) @(posedge clk);
        @(negedge clk);
        slv_req.ar.addr = 'h5000_0000; slv_req.ar.len = 0;
        @(posedge clk); while (!slv_rsp.ar_ready) @(posedge clk);
        @(negedge clk); slv_req.ar_valid = 0;
      end
      begin
        int beats; logic saw_err;
        beats = 0; saw_err = 0;
        repeat (6) @(negedge clk);  // let the second request queue up
        slv_req.r_ready = 1;
        while (beats < 17) begin
          @(posedge clk);
          if (slv_rsp.r_valid) begin
            beats++;
            if (beats <= 16) chk("first burst okay", slv_rsp.r.resp == RESP_OKAY);
            else saw_err = (slv_rsp.r.resp == RESP_DECERR);
          end
        end
        chk("second answered with DECERR after the first", saw_err);
        @(negedge clk); slv_req.r_ready = 0;
      end
    join

    // ---- random traffic against the reference model
    for (int n = 0; n < 600; n++) begin
      addr_t a; int wid, len; logic wr;
      int sel;
      sel = $urandom_range(0, 5);
      case (sel)
        0: a = 'h1000_0000 + addr_t'($urandom_range(0, 'h2000) * 8);
        1: a = 'h2000_0000 + addr_t'($urandom_range(0, 'h20) * 8);
        2: a = 'h3000_00C0 + addr_t'($urandom_range(0, 'h50) * 8);
        3: a = 'h4000_0FC0 + addr_t'($urandom_range(0, 'h10) * 8);
        4: a = 'h1000_FF80 + addr_t'($urandom_range(0, 'h20) * 8);
        default: a = addr_t'($urandom) << 3;
      endcase
      wid = $urandom_range(0, 9);
      len = $urandom_range(0, 3);
      wr  = $urandom_range(0, 1);
      access("random", a, len, wid, wr, expect_outcome(a, len, wid, wr));
    end

    $display("allowed rd/wr %0d/%0d, DECERR rd/wr %0d/%0d, poisoned rd/wr %0d/%0d",
             n_allow_rd, n_allow_wr, n_decerr_rd, n_decerr_wr, n_poison_rd, n_poison_wr);
    $display("contention %0d, demux switch stalls %0d, 2-cycle latency %0d, error record %0d",
             n_contention, n_switch_stall, n_lat2, n_errrec);
    $display("modes napot %0d na4 %0d tor %0d se %0d, general read %0d, overlay %0d, lock %0d",
             n_napot, n_na4, n_tor, n_se, n_gr, n_overlay, n_lock);
    chk("allowed read seen", n_allow_rd > 0);
    chk("allowed write seen", n_allow_wr > 0);
    chk("DECERR read seen", n_decerr_rd > 0);
    chk("DECERR write seen", n_decerr_wr > 0);
    chk("poisoned read seen", n_poison_rd > 0);
    chk("poisoned write seen", n_poison_wr > 0);
    chk("arbiter contention seen", n_contention > 0);
    chk("demux switch stall seen", n_switch_stall > 0);
    chk("latency measured", n_lat2 == 2);
    chk("error record seen", n_errrec > 0);
    chk("all modes seen", n_napot > 0 && n_na4 > 0 && n_tor > 0 && n_se > 0);
    chk("general read / overlay / lock seen", n_gr > 0 && n_overlay > 0 && n_lock > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
