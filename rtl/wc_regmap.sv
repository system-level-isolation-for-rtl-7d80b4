// wc_regmap - configuration registers of the M-WC and their decoded form.
//
// Holds NUM_SLOTS slots in the layout of the proposed 64-byte slot
// (addr at 0x00, eaddr at 0x08, cfg at 0x10, perm0..perm[NUM_PERMS-1] at
// 0x20 + 4k, the rest reserved), plus a small global block: the slot and perm
// counts and an error record (errcause, erraddr) that the checker fills on the
// first violation and that software clears by writing errcause.
//
// Rule update: the encoded addresses are decoded once, when written, into a
// start/end pair per slot held in registers (slot_o), so the analyzers only
// compare bounds. The decoded table follows the registers one clock after a
// write; the paper notes this configuration latency, and that the stall of
// transactions during reconfiguration is not implemented, and neither is it
// here.
//
// Fixed slots (as the Worlds Checker specification does, per the paper):
// slot 0 holds the lower bound of the protected space and is always OFF;
// the last slot's address is the upper bound and its mode is always TOR.
// A slot whose cfg.L bit is set ignores further writes until reset; the lock
// also freezes the address of the slot below when the locked slot is TOR.
//
// Configuration port: a single-cycle 32-bit register bus. A request with
// req_i=1 is accepted in the cycle it is presented; rdata_o is valid in the
// same cycle, and err_o flags an unmapped address. The bus, the offsets of
// the global registers and the cfg bit positions other than A and GR are this
// design's choices.
module wc_regmap
  import wc_pkg::*;
#(
  parameter int unsigned NUM_SLOTS  = 16,
  parameter int unsigned NUM_PERMS  = 4,
  parameter int unsigned CFG_AW     = 16,
  parameter logic [63:0] BASE_ENC   = 64'h0,                    // lower bound >> 2
  parameter logic [63:0] TOP_ENC    = 64'h4000_0000_0000_0000   // upper bound (2^64) >> 2
) (
  input  logic                                   clk_i,
  input  logic                                   rst_ni,
  // configuration port
  input  logic                                   req_i,
  input  logic                                   we_i,
  input  logic [CFG_AW-1:0]                      addr_i,
  input  logic [31:0]                            wdata_i,
  output logic [31:0]                            rdata_o,
  output logic                                   err_o,
  // decoded rule table, to the checker
  output slot_dec_t [NUM_SLOTS-1:0]              slot_o,
  output perm_t     [NUM_SLOTS-1:0][NUM_PERMS-1:0] perm_o,
  // violation report, from the checker path
  input  logic                                   viol_i,
  input  wid_t                                   viol_wid_i,
  input  logic                                   viol_write_i,
  input  addr_t                                  viol_addr_i
);

  localparam int unsigned SIW = $clog2(NUM_SLOTS);

  logic [NUM_SLOTS-1:0][63:0] addr_q, eaddr_q;
  logic [NUM_SLOTS-1:0][31:0] cfg_q;
  perm_t [NUM_SLOTS-1:0][NUM_PERMS-1:0] perm_q;
  slot_dec_t [NUM_SLOTS-1:0] dec_q;
  logic [31:0] errcause_q;
  addr_t       erraddr_q;

  // ---------------------------------------------------------- address decode
  logic                 in_slots;
  logic [SIW-1:0]       sidx;
  logic [5:0]           soff;
  logic [CFG_AW-1:0]    rel;
  logic [NUM_SLOTS-1:0] locked;  // writes to slot s are ignored
  logic [NUM_SLOTS-1:0] alocked; // writes to slot s's address are ignored
  logic [5:0]           pofs;
  logic [3:0]           pidx;    // perm entry addressed
  logic                 is_perm;

  always_comb begin
    rel      = addr_i - CFG_AW'(SLOT_BASE);
    in_slots = (addr_i >= CFG_AW'(SLOT_BASE)) &&
               (32'(rel >> 6) < NUM_SLOTS);
    sidx     = SIW'(rel >> 6);
    soff     = rel[5:0];
    pofs     = soff - 6'(SLOT_PERM0);
    pidx     = pofs[5:2];
    is_perm  = (soff >= 6'(SLOT_PERM0)) && (pofs[1:0] == 2'b00) && (32'(pidx) < NUM_PERMS);
    for (int unsigned s = 0; s < NUM_SLOTS; s++) begin
      locked[s]  = cfg_q[s][CFG_L];
      alocked[s] = cfg_q[s][CFG_L];
      if (s + 1 < NUM_SLOTS)
        if (cfg_q[s+1][CFG_L] && cfg_q[s+1][CFG_A_LSB +: 3] == A_TOR) alocked[s] = 1'b1;
    end
  end

  // ------------------------------------------------------------------- read
  always_comb begin
    rdata_o = '0;
    err_o   = 1'b0;
    if (in_slots) begin
      if (soff == 6'(SLOT_ADDR_LO))       rdata_o = addr_q[sidx][31:0];
      else if (soff == 6'(SLOT_ADDR_HI))  rdata_o = addr_q[sidx][63:32];
      else if (soff == 6'(SLOT_EADDR_LO)) rdata_o = eaddr_q[sidx][31:0];
      else if (soff == 6'(SLOT_EADDR_HI)) rdata_o = eaddr_q[sidx][63:32];
      else if (soff == 6'(SLOT_CFG))      rdata_o = cfg_q[sidx];
      else if (is_perm) begin
        rdata_o[PERM_R_BIT]  = perm_q[sidx][pidx].r;
        rdata_o[PERM_W_BIT]  = perm_q[sidx][pidx].w;
        rdata_o[WID_W-1:0]   = perm_q[sidx][pidx].wid;
      end
      // other offsets of a slot are reserved and read as zero
    end else begin
      unique case (32'(addr_i))
        REG_NSLOTS:     rdata_o = 32'(NUM_SLOTS);
        REG_NPERMS:     rdata_o = 32'(NUM_PERMS);
        REG_ERRCAUSE:   rdata_o = errcause_q;
        REG_ERRADDR_LO: rdata_o = erraddr_q[31:0];
        REG_ERRADDR_HI: rdata_o = 32'(erraddr_q >> 32);
        default:        err_o   = req_i;
      endcase
    end
  end

  // ------------------------------------------------------------------ write
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int unsigned s = 0; s < NUM_SLOTS; s++) begin
        addr_q[s]  <= (s == 0) ? BASE_ENC : (s == NUM_SLOTS - 1) ? TOP_ENC : '0;
        eaddr_q[s] <= '0;
        cfg_q[s]   <= (s == NUM_SLOTS - 1) ? 32'(A_TOR) : '0;
        for (int unsigned k = 0; k < NUM_PERMS; k++) begin
          perm_q[s][k] <= perm_t'({PERM_RESET[PERM_R_BIT], PERM_RESET[PERM_W_BIT], wid_t'(0)});
        end
      end
      errcause_q <= '0;
      erraddr_q  <= '0;
    end else begin
      // violation record: keep the first one until software clears it
      if (viol_i && !errcause_q[ERR_V_BIT]) begin
        errcause_q                <= '0;
        errcause_q[WID_W-1:0]     <= viol_wid_i;
        errcause_q[ERR_R_BIT]     <= !viol_write_i;
        errcause_q[ERR_W_BIT]     <= viol_write_i;
        errcause_q[ERR_V_BIT]     <= 1'b1;
        erraddr_q                 <= viol_addr_i;
      end
      if (req_i && we_i) begin
        if (in_slots) begin
          // slot 0 is read-only; the last slot keeps its address and mode
          if (sidx != '0 && !locked[sidx]) begin
            if (sidx != SIW'(NUM_SLOTS - 1) && !alocked[sidx]) begin
              if (soff == 6'(SLOT_ADDR_LO)) addr_q[sidx][31:0]  <= wdata_i;
              if (soff == 6'(SLOT_ADDR_HI)) addr_q[sidx][63:32] <= wdata_i;
            end
            if (soff == 6'(SLOT_EADDR_LO)) eaddr_q[sidx][31:0]  <= wdata_i;
            if (soff == 6'(SLOT_EADDR_HI)) eaddr_q[sidx][63:32] <= wdata_i;
            if (soff == 6'(SLOT_CFG)) begin
              cfg_q[sidx] <= '0;
              cfg_q[sidx][CFG_A_LSB +: 3] <= (sidx == SIW'(NUM_SLOTS - 1)) ? 3'(A_TOR)
                                                                           : wdata_i[CFG_A_LSB +: 3];
              cfg_q[sidx][CFG_ER] <= wdata_i[CFG_ER];
              cfg_q[sidx][CFG_EW] <= wdata_i[CFG_EW];
              cfg_q[sidx][CFG_GR] <= wdata_i[CFG_GR];
              cfg_q[sidx][CFG_L]  <= wdata_i[CFG_L];
            end
            if (is_perm) begin
              perm_q[sidx][pidx] <=
                perm_t'({wdata_i[PERM_R_BIT], wdata_i[PERM_W_BIT], wdata_i[WID_W-1:0]});
            end
          end
        end else if (32'(addr_i) == REG_ERRCAUSE) begin
          errcause_q <= '0;  // acknowledge
        end
      end
    end
  end

  // ---------------------------------------------- configuration-time decode
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int unsigned s = 0; s < NUM_SLOTS; s++) dec_q[s] <= '0;
    end else begin
      for (int unsigned s = 0; s < NUM_SLOTS; s++) begin
        dec_q[s] <= decode_slot(addr_q[s], eaddr_q[s], (s == 0) ? 64'h0 : addr_q[(s == 0) ? 0 : s-1],
                                cfg_q[s]);
      end
      dec_q[0].en <= 1'b0;  // slot 0 can never be enabled
    end
  end

  assign slot_o = dec_q;
  assign perm_o = perm_q;

endmodule
