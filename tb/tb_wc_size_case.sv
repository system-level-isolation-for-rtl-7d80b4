// tb_wc_size_case - one M-WC instance at a given slot count with its own
// stimulus and memory; tb_wc_sizes runs several of them on one clock.
//
// Programs every free slot (1 .. NS-2) as a 4 KiB NAPOT region at
// 0x1000_0000 + s*0x1000 with NP perm entries: WID a = 2s mod 128 with
// read/write, WID b = 2s+65 mod 128 read-only (WIDs up to 127 are used), and
// entry k >= 2 giving WID 2s+10+k read/write. The
// last slot is TOR from the slot below it up to the top of the address space
// with no permissions and bus errors on. With NS = 2 only the two fixed slots
// exist: slot 0 (OFF, base 0) and the last slot, TOR over the whole space;
// its perm entries are then opened for WID 3.
// For each region it checks: a read and a write by WID a reach the target
// two cycles after the initiator handshake, WID b reads but its write is
// poisoned, WID a+1 is poisoned, the WID of the last perm entry can write,
// and the last slot's region answers DECERR.
// Reports checks/failures and completion through its outputs.
module tb_wc_size_case
  import wc_pkg::*;
#(
  parameter int unsigned NS = 2,
  parameter int unsigned NP = 4
) (
  input  logic clk_i,
  output int   checks_o,
  output int   failures_o,
  output logic done_o
);
  logic rst_n = 0;
  axi_req_t slv_req = '0, mst_req;
  axi_rsp_t slv_rsp, mst_rsp;
  logic cfg_req = 0, cfg_we = 0; logic [15:0] cfg_addr = 0; logic [31:0] cfg_wdata = 0, cfg_rdata;
  logic cfg_err;
  int checks = 0, failures = 0;
  logic done = 0;
  assign checks_o = checks;
  assign failures_o = failures;
  assign done_o = done;

  wc_top #(.NUM_SLOTS(NS), .NUM_PERMS(NP)) dut (
    .clk_i, .rst_ni(rst_n),
    .slv_req_i(slv_req), .slv_rsp_o(slv_rsp),
    .mst_req_o(mst_req), .mst_rsp_i(mst_rsp),
    .cfg_req_i(cfg_req), .cfg_we_i(cfg_we), .cfg_addr_i(cfg_addr), .cfg_wdata_i(cfg_wdata),
    .cfg_rdata_o(cfg_rdata), .cfg_err_o(cfg_err));

  tb_axi_mem #(.TAG(8'hB0), .STALL(1'b0)) u_mem (.clk_i, .rst_ni(rst_n), .req_i(mst_req), .rsp_o(mst_rsp));

  longint unsigned cyc = 0;
  always @(posedge clk_i) cyc <= cyc + 1;

  task automatic chk(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL [NS=%0d] %s at %0t", NS, what, $time); end
  endtask

  function automatic logic [15:0] sa(input int s, input int off);
    return 16'(SLOT_BASE + s * SLOT_STRIDE + off);
  endfunction
  task automatic cw(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk_i); cfg_req = 1; cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk_i); cfg_req = 0; cfg_we = 0;
  endtask
  task automatic cr(input logic [15:0] a, output logic [31:0] d);
    @(negedge clk_i); cfg_req = 1; cfg_we = 0; cfg_addr = a; #1 d = cfg_rdata;
    @(negedge clk_i); cfg_req = 0;
  endtask
  function automatic logic [31:0] pv(input int wid, input logic r, input logic w);
    return (32'(r) << PERM_R_BIT) | (32'(w) << PERM_W_BIT) | 32'(wid);
  endfunction

  // single-beat 8-byte read; returns response, data and handshake cycle
  task automatic rd(input addr_t a, input int wid, output logic [1:0] resp,
                    output logic [DATA_W-1:0] d, output longint unsigned c_hs);
    @(negedge clk_i);
    slv_req.ar = '0; slv_req.ar.addr = a; slv_req.ar.size = 3'd3; slv_req.ar.burst = BURST_INCR;
    slv_req.ar.user = wid_t'(wid); slv_req.ar_valid = 1;
    @(posedge clk_i); while (!slv_rsp.ar_ready) @(posedge clk_i);
    c_hs = cyc;
    @(negedge clk_i); slv_req.ar_valid = 0; slv_req.r_ready = 1;
    @(posedge clk_i); while (!slv_rsp.r_valid) @(posedge clk_i);
    resp = slv_rsp.r.resp; d = slv_rsp.r.data;
    chk("r last", slv_rsp.r.last);
    @(negedge clk_i); slv_req.r_ready = 0;
  endtask

  task automatic wr(input addr_t a, input int wid, input logic [DATA_W-1:0] d,
                    output logic [1:0] resp, output longint unsigned c_hs);
    @(negedge clk_i);
    slv_req.aw = '0; slv_req.aw.addr = a; slv_req.aw.size = 3'd3; slv_req.aw.burst = BURST_INCR;
    slv_req.aw.user = wid_t'(wid); slv_req.aw_valid = 1;
    slv_req.w.data = d; slv_req.w.strb = '1; slv_req.w.last = 1; slv_req.w_valid = 1;
    @(posedge clk_i); while (!slv_rsp.aw_ready) @(posedge clk_i);
    c_hs = cyc;
    @(negedge clk_i); slv_req.aw_valid = 0;
    while (!slv_rsp.w_ready) begin @(posedge clk_i); @(negedge clk_i); end
    @(posedge clk_i); @(negedge clk_i);
    slv_req.w_valid = 0; slv_req.b_ready = 1;
    @(posedge clk_i); while (!slv_rsp.b_valid) @(posedge clk_i);
    resp = slv_rsp.b.resp;
    @(negedge clk_i); slv_req.b_ready = 0;
  endtask

  initial begin
    logic [31:0] v; logic [1:0] resp; logic [DATA_W-1:0] d; longint unsigned c;
    int unsigned nw0;
    repeat (3) @(negedge clk_i);
    rst_n = 1;
    cr(16'(REG_NSLOTS), v); chk("NSLOTS", v == NS);
    if (NS == 2) begin
      // the last slot is TOR over [0, 2^64); open it for WID 3 only
      cw(sa(1, SLOT_PERM0), pv(3, 1, 1));
      for (int k = 1; k < int'(NP); k++) cw(sa(1, SLOT_PERM0 + 4 * k), pv(0, 0, 0));
      cw(sa(1, SLOT_CFG), 32'(A_TOR) | (1 << CFG_EW));
      @(negedge clk_i);
      wr(64'h8000_0000, 3, 64'h55, resp, c);
      chk("wid3 write okay", resp == RESP_OKAY);
      chk("write latency", u_mem.last_aw_cyc - c == 2 && u_mem.last_w_cyc - c == 2);
      rd(64'h8000_0000, 3, resp, d, c);
      chk("wid3 read back", resp == RESP_OKAY && d == 64'h55);
      chk("read latency", u_mem.last_ar_cyc - c == 2);
      rd(64'hFFFF_FFFF_FFFF_FFF8, 4, resp, d, c);
      chk("wid4 read poisoned", resp == RESP_OKAY && d == '0);
      nw0 = u_mem.n_w;
      wr(64'h10, 4, 64'h66, resp, c);
      chk("wid4 write DECERR", resp == RESP_DECERR && u_mem.n_w == nw0);
    end else begin
      for (int s = 1; s <= int'(NS) - 2; s++) begin
        logic [63:0] base;
        base = 64'h1000_0000 + 64'(s) * 64'h1000;
        cw(sa(s, SLOT_ADDR_LO), 32'((base >> 2) | 64'h1FF));  // NAPOT 4 KiB
        cw(sa(s, SLOT_ADDR_HI), 32'(((base >> 2) | 64'h1FF) >> 32));
        cw(sa(s, SLOT_PERM0), pv((2 * s) % 128, 1, 1));
        cw(sa(s, SLOT_PERM0 + 4), pv((2 * s + 65) % 128, 1, 0));
        // further entries: WID a+10+k with read/write
        for (int k = 2; k < int'(NP); k++) cw(sa(s, SLOT_PERM0 + 4 * k), pv((2 * s + 10 + k) % 128, 1, 1));
        cw(sa(s, SLOT_CFG), 32'(A_NAPOT));
      end
      for (int k = 0; k < int'(NP); k++) cw(sa(NS - 1, SLOT_PERM0 + 4 * k), pv(0, 0, 0));
      cw(sa(NS - 1, SLOT_CFG), 32'(A_TOR) | (1 << CFG_ER) | (1 << CFG_EW));
      @(negedge clk_i);
      for (int s = 1; s <= int'(NS) - 2; s++) begin
        logic [63:0] base;
        int a, b;
        base = 64'h1000_0000 + 64'(s) * 64'h1000;
        a = (2 * s) % 128; b = (2 * s + 65) % 128;
        wr(base + 64'h10, a, base, resp, c);
        chk("owner write okay", resp == RESP_OKAY);
        chk("write latency 2", u_mem.last_aw_cyc - c == 2 && u_mem.last_w_cyc - c == 2);
        rd(base + 64'h10, a, resp, d, c);
        chk("owner read back", resp == RESP_OKAY && d == base);
        chk("read latency 2", u_mem.last_ar_cyc - c == 2);
        rd(base + 64'h10, b, resp, d, c);
        chk("reader read okay", resp == RESP_OKAY && d == base);
        nw0 = u_mem.n_w;
        wr(base + 64'h18, b, 64'h77, resp, c);
        chk("reader write poisoned", resp == RESP_OKAY && u_mem.n_w == nw0);
        rd(base + 64'h10, (a + 1) % 128, resp, d, c);
        chk("other wid read poisoned", resp == RESP_OKAY && d == '0);
        if (NP > 2) begin
          // the last perm entry grants its WID write access
          wr(base + 64'h20, (2 * s + 10 + int'(NP) - 1) % 128, base + 1, resp, c);
          chk("last entry write okay", resp == RESP_OKAY);
          rd(base + 64'h20, a, resp, d, c);
          chk("last entry write landed", resp == RESP_OKAY && d == base + 1);
        end
      end
      rd(64'h9000_0000, 0, resp, d, c);
      chk("last slot read DECERR", resp == RESP_DECERR);
      rd(64'h0000_1000, 0, resp, d, c);
      chk("below all regions DECERR", resp == RESP_DECERR);
    end
    done = 1;
  end
endmodule
