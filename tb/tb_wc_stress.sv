// tb_wc_stress - concurrent, pipelined traffic through the M-WC at its
// default parameters, with a target that stalls at random.
//
// Rule table: slot 1 is a 64 KiB NAPOT region at 0x1000_0000 where WID 1 may
// read and write and WID 2 may only read (violations poisoned); the last slot
// covers everything from 0x1001_0000 up with bus errors on. Independent
// processes then drive the AR, AW, W, R and B channels at the same time:
// requests are issued back to back with random gaps, mixing allowed,
// poisoned and bus-error outcomes and burst lengths 1-4, and the R and B
// ready signals are throttled at random. Each accepted request pushes its
// expected response onto a queue; every response must match the head of the
// queue (all requests use one AXI ID, so responses must stay in order).
// Reads only touch the lower half of the region, which is never written, so
// their data is known ({tag, address}); writes go to the upper half, and the
// number of W beats that reach the target must equal the allowed beats.
// Counted: allowed / poisoned / bus-error reads and writes, cycles in which
// the demux held a request back to keep order, and cycles in which the
// target stalled a request; each must occur at least once.
module tb_wc_stress;
  import wc_pkg::*;

  localparam int unsigned NREQ = 300;  // requests per direction

  logic clk = 0, rst_n = 0;
  axi_req_t slv_req, mst_req;
  axi_rsp_t slv_rsp, mst_rsp;
  logic cfg_req = 0, cfg_we = 0; logic [15:0] cfg_addr = 0; logic [31:0] cfg_wdata = 0;
  int checks = 0, failures = 0;

  wc_top dut (
    .clk_i(clk), .rst_ni(rst_n),
    .slv_req_i(slv_req), .slv_rsp_o(slv_rsp),
    .mst_req_o(mst_req), .mst_rsp_i(mst_rsp),
    .cfg_req_i(cfg_req), .cfg_we_i(cfg_we), .cfg_addr_i(cfg_addr), .cfg_wdata_i(cfg_wdata),
    .cfg_rdata_o(), .cfg_err_o());

  tb_axi_mem #(.TAG(8'hC0), .STALL(1'b1)) u_mem (.clk_i(clk), .rst_ni(rst_n), .req_i(mst_req), .rsp_o(mst_rsp));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // ------------------------------------------------------------ bookkeeping
  typedef struct { int outcome; addr_t addr; int len; } exp_t;  // 0 ok, 1 DECERR, 2 poison
  exp_t r_exp[$], b_exp[$];
  int   w_len[$];                       // bursts whose W beats are still to be sent
  int   n_out[2][3];                    // [write][outcome]
  int   n_hold = 0, n_tgt_stall = 0;
  int   r_done = 0, b_done = 0;
  int unsigned allowed_beats = 0;

  always @(posedge clk) if (rst_n) begin
    if ((dut.h_valid[0] && !dut.h_ready[0]) || (dut.h_valid[1] && !dut.h_ready[1])) begin
      if ((dut.h_valid[0] && (dut.h_sel[0] != ROUTE_TARGET) != dut.u_demux.ar_dst_q &&
           dut.u_demux.ar_cnt_q != 0) ||
          (dut.h_valid[1] && (dut.h_sel[1] != ROUTE_TARGET) != dut.u_demux.aw_dst_q &&
           dut.u_demux.aw_cnt_q != 0)) n_hold++;
    end
    if ((mst_req.ar_valid && !mst_rsp.ar_ready) || (mst_req.aw_valid && !mst_rsp.aw_ready)) n_tgt_stall++;
  end

  // random request: 0 allowed, 1 bus error (outside), 2 poisoned
  function automatic void pick(input logic wr, output addr_t a, output int wid, output int len,
                               output int outcome);
    outcome = $urandom_range(0, 2);
    len = $urandom_range(0, 3);
    a = (wr ? 64'h1000_8000 : 64'h1000_0000) + 64'($urandom_range(0, 'h7F0) << 3) & ~64'h7;
    wid = 1;
    if (outcome == 1) a = 64'h2000_0000 + 64'($urandom_range(0, 255) << 3);
    if (outcome == 2) wid = wr ? 2 : 3;
  endfunction

  // ------------------------------------------------------- configuration
  task automatic cw(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk); cfg_req = 1; cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_req = 0; cfg_we = 0;
  endtask
  function automatic logic [15:0] sa(input int s, input int off);
    return 16'(SLOT_BASE + s * SLOT_STRIDE + off);
  endfunction

  initial begin
    slv_req = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    cw(sa(1, SLOT_ADDR_LO), 32'((64'h1000_0000 >> 2) | 64'h1FFF));  // NAPOT 64 KiB
    cw(sa(1, SLOT_PERM0),     32'h8000_0000 | 32'h4000_0000 | 1);   // WID 1 rw
    cw(sa(1, SLOT_PERM0 + 4), 32'h8000_0000 | 2);                   // WID 2 r
    cw(sa(1, SLOT_PERM0 + 8), 32'h0);
    cw(sa(1, SLOT_PERM0 + 12), 32'h0);
    cw(sa(1, SLOT_CFG), 32'(A_NAPOT));
    cw(sa(14, SLOT_ADDR_LO), 32'(64'h1001_0000 >> 2));  // last slot: [0x1001_0000, top)
    for (int k = 0; k < 4; k++) cw(sa(15, SLOT_PERM0 + 4 * k), 32'h0);
    cw(sa(15, SLOT_CFG), 32'(A_TOR) | (1 << CFG_ER) | (1 << CFG_EW));
    @(negedge clk);
    fork
      // ---- AR issue
      for (int i = 0; i < NREQ; i++) begin
        addr_t a; int wid, len, oc;
        pick(1'b0, a, wid, len, oc);
        repeat ($urandom_range(0, 2)) @(negedge clk);
        slv_req.ar = '0; slv_req.ar.addr = a; slv_req.ar.len = 8'(len); slv_req.ar.size = 3'd3;
        slv_req.ar.burst = BURST_INCR; slv_req.ar.user = wid_t'(wid); slv_req.ar_valid = 1;
        @(posedge clk); while (!slv_rsp.ar_ready) @(posedge clk);
        r_exp.push_back('{oc, a, len});
        n_out[0][oc]++;
        @(negedge clk); slv_req.ar_valid = 0;
      end
      // ---- AW issue
      for (int i = 0; i < NREQ; i++) begin
        addr_t a; int wid, len, oc;
        pick(1'b1, a, wid, len, oc);
        repeat ($urandom_range(0, 2)) @(negedge clk);
        slv_req.aw = '0; slv_req.aw.addr = a; slv_req.aw.len = 8'(len); slv_req.aw.size = 3'd3;
        slv_req.aw.burst = BURST_INCR; slv_req.aw.user = wid_t'(wid); slv_req.aw_valid = 1;
        @(posedge clk); while (!slv_rsp.aw_ready) @(posedge clk);
        b_exp.push_back('{oc, a, len});
        w_len.push_back(len);
        if (oc == 0) allowed_beats += unsigned'(len + 1);
        n_out[1][oc]++;
        @(negedge clk); slv_req.aw_valid = 0;
      end
      // ---- W data, for bursts whose AW has been accepted
      for (int i = 0; i < NREQ; i++) begin
        int len;
        wait (w_len.size() != 0);
        len = w_len.pop_front();
        for (int k = 0; k <= len; k++) begin
          @(negedge clk);
          slv_req.w.data = {$urandom, $urandom}; slv_req.w.strb = '1;
          slv_req.w.last = (k == len); slv_req.w_valid = 1;
          @(posedge clk); while (!slv_rsp.w_ready) @(posedge clk);
          @(negedge clk); slv_req.w_valid = 0;
        end
      end
      // ---- R responses, in order
      while (r_done < int'(NREQ)) begin
        @(negedge clk); slv_req.r_ready = ($urandom_range(0, 3) != 0);
        @(posedge clk);
        if (slv_req.r_ready && slv_rsp.r_valid) begin
          exp_t e;
          static int beat = 0;
          chk("r without request", r_exp.size() != 0);
          if (r_exp.size() != 0) begin
            e = r_exp[0];
            case (e.outcome)
              0: chk("read data", slv_rsp.r.resp == RESP_OKAY &&
                     slv_rsp.r.data == {8'hC0, 56'(e.addr + addr_t'(8 * beat))});
              1: chk("read DECERR", slv_rsp.r.resp == RESP_DECERR);
              default: chk("read poisoned", slv_rsp.r.resp == RESP_OKAY && slv_rsp.r.data == '0);
            endcase
            chk("r last", slv_rsp.r.last == (beat == e.len));
            if (slv_rsp.r.last) begin void'(r_exp.pop_front()); beat = 0; r_done++; end
            else beat++;
          end
        end
      end
      // ---- B responses, in order
      while (b_done < int'(NREQ)) begin
        @(negedge clk); slv_req.b_ready = ($urandom_range(0, 3) != 0);
        @(posedge clk);
        if (slv_req.b_ready && slv_rsp.b_valid) begin
          chk("b without request", b_exp.size() != 0);
          if (b_exp.size() != 0) begin
            exp_t e;
            e = b_exp.pop_front();
            chk("write response", slv_rsp.b.resp == ((e.outcome == 1) ? RESP_DECERR : RESP_OKAY));
            b_done++;
          end
        end
      end
    join
    repeat (5) @(posedge clk);
    chk("allowed W beats reached the target", u_mem.n_w == allowed_beats);
    chk("only allowed AWs reached the target", u_mem.n_aw == unsigned'(n_out[1][0]));
    $display("reads ok/decerr/poison %0d/%0d/%0d, writes ok/decerr/poison %0d/%0d/%0d",
             n_out[0][0], n_out[0][1], n_out[0][2], n_out[1][0], n_out[1][1], n_out[1][2]);
    $display("demux order holds %0d, target stalls %0d", n_hold, n_tgt_stall);
    for (int w = 0; w < 2; w++)
      for (int o = 0; o < 3; o++) chk("outcome exercised", n_out[w][o] > 0);
    chk("demux held a request for ordering", n_hold > 0);
    chk("target stalled", n_tgt_stall > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
