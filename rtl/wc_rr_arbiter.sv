// wc_rr_arbiter - round-robin arbiter in front of the shared checker.
//
// The read and write Ax handlers each present a check request; the checker
// can judge one per cycle, so this arbiter grants one requester per cycle.
// The paper names a round-robin arbiter at this point; its insides are this
// design's own: a one-hot grant, combinational from the requests, and a
// pointer that moves past the granted requester on every grant so that a
// requester that keeps requesting cannot starve the others. With N requesters
// a request waits at most N-1 cycles; with the default N=2 a lone request is
// granted in the cycle it is raised.
// The assertion below is disabled during reset; lint therefore sees rst_ni
// used both as an asynchronous reset and synchronously (SYNCASYNCNET). The
// synchronous use exists only in the assertion, not in the circuit.
module wc_rr_arbiter #(
  parameter int unsigned N = 2
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic [N-1:0] req_i,
  output logic [N-1:0] gnt_o,
  output logic [$clog2(N > 1 ? N : 2)-1:0] idx_o
);

  localparam int unsigned IW = $clog2(N > 1 ? N : 2);
  logic [IW-1:0] ptr_q;  // highest priority requester

  always_comb begin
    gnt_o = '0;
    idx_o = '0;
    for (int unsigned k = 0; k < N; k++) begin
      logic [IW-1:0] c;
      c = IW'((32'(ptr_q) + k) % N);
      if (req_i[c] && gnt_o == '0) begin
        gnt_o[c] = 1'b1;
        idx_o    = IW'(c);
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) ptr_q <= '0;
    else if (|req_i) ptr_q <= (idx_o == IW'(N - 1)) ? '0 : idx_o + IW'(1);
  end

  // at most one grant, and only to a requester
  assert property (@(posedge clk_i) disable iff (!rst_ni) $onehot0(gnt_o) && ((gnt_o & ~req_i) == '0));

endmodule
