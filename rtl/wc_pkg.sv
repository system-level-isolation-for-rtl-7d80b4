// wc_pkg - shared types and constants of the modified Worlds Checker (M-WC).
//
// The M-WC is a target-side access checker for RISC-V Worlds. Every AXI
// transaction carries a World Identifier (WID); the checker holds a table of
// slots, each describing one physical address region and up to NUM_PERMS
// explicit (WID, read, write) permission entries. This package defines:
//   * the AXI4 channel structs used on the initiator and target ports
//     (the WID travels in the AR/AW user field),
//   * the slot register fields (cfg, perm) and their bit positions,
//   * the address-mode encodings and the configuration-time decoder that turns
//     an encoded slot address into start/end form.
// Taken from the paper: 64-bit addr/eaddr registers, 64-byte slot stride,
// cfg.A in bits 2:0 with a new start-end (SE) mode, cfg.GR in bit 24, and the
// perm layout (wid 6:0, w 30, r 31, r/w reset to 1). This design's own
// choices: the mode numbers (PMP numbering plus SE = 4), PMP-style (>>2)
// address encoding for all modes, the cfg bits ER/EW/L, the AXI widths and
// the global register offsets.
package wc_pkg;

  // ---------------------------------------------------------------- AXI sizes
  parameter int unsigned ADDR_W = 64;  // physical address width
  parameter int unsigned DATA_W = 64;  // AXI data width
  parameter int unsigned ID_W   = 4;   // AXI transaction ID width
  parameter int unsigned WID_W  = 7;   // World ID width (perm.wid is bits 6:0 -> 128 worlds)
  parameter int unsigned STRB_W = DATA_W / 8;

  // Decoded region bounds carry one extra bit so that an exclusive end of
  // 2^ADDR_W can be represented.
  parameter int unsigned BND_W  = ADDR_W + 1;

  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [BND_W-1:0]  bnd_t;
  typedef logic [WID_W-1:0]  wid_t;
  typedef logic [ID_W-1:0]   id_t;

  // AXI burst types and responses
  localparam logic [1:0] BURST_FIXED = 2'b00;
  localparam logic [1:0] BURST_INCR  = 2'b01;
  localparam logic [1:0] BURST_WRAP  = 2'b10;
  localparam logic [1:0] RESP_OKAY   = 2'b00;
  localparam logic [1:0] RESP_DECERR = 2'b11;

  // AR / AW channel payload. user carries the WID of the issuing world.
  typedef struct packed {
    id_t        id;
    addr_t      addr;
    logic [7:0] len;
    logic [2:0] size;
    logic [1:0] burst;
    logic       lock;
    logic [3:0] cache;
    logic [2:0] prot;
    logic [3:0] qos;
    logic [3:0] region;
    wid_t       user;
  } ax_chan_t;

  typedef struct packed {
    logic [DATA_W-1:0] data;
    logic [STRB_W-1:0] strb;
    logic              last;
  } w_chan_t;

  typedef struct packed {
    id_t        id;
    logic [1:0] resp;
  } b_chan_t;

  typedef struct packed {
    id_t               id;
    logic [DATA_W-1:0] data;
    logic [1:0]        resp;
    logic              last;
  } r_chan_t;

  // Full AXI request (initiator -> target) and response (target -> initiator)
  typedef struct packed {
    ax_chan_t aw;
    logic     aw_valid;
    w_chan_t  w;
    logic     w_valid;
    logic     b_ready;
    ax_chan_t ar;
    logic     ar_valid;
    logic     r_ready;
  } axi_req_t;

  typedef struct packed {
    logic     aw_ready;
    logic     w_ready;
    b_chan_t  b;
    logic     b_valid;
    logic     ar_ready;
    r_chan_t  r;
    logic     r_valid;
  } axi_rsp_t;

  // Where a checked request is sent: the target port, or the error handler
  // with a bus error or with poisoned data as the answer.
  typedef enum logic [1:0] {
    ROUTE_TARGET     = 2'd0,
    ROUTE_ERR_BUS    = 2'd1,
    ROUTE_ERR_POISON = 2'd2
  } route_e;

  // ------------------------------------------------------- slot register file
  // cfg.A address modes (3 bits: PMP modes extended by one bit for SE)
  typedef enum logic [2:0] {
    A_OFF   = 3'd0,
    A_TOR   = 3'd1,
    A_NA4   = 3'd2,
    A_NAPOT = 3'd3,
    A_SE    = 3'd4
  } amode_e;

  // cfg bit positions
  localparam int unsigned CFG_A_LSB = 0;   // A, bits 2:0 (paper, Table 5)
  localparam int unsigned CFG_ER    = 8;   // report read violations as bus error
  localparam int unsigned CFG_EW    = 9;   // report write violations as bus error
  localparam int unsigned CFG_GR    = 24;  // general read (paper, Table 5)
  localparam int unsigned CFG_L     = 31;  // lock the slot until reset

  // perm bit positions (paper, Table 4)
  localparam int unsigned PERM_W_BIT = 30;
  localparam int unsigned PERM_R_BIT = 31;
  localparam logic [31:0] PERM_RESET = 32'hC000_0000;  // wid=0, w=1, r=1

  typedef struct packed {
    logic r;
    logic w;
    wid_t wid;
  } perm_t;

  // Decoded slot, as stored at configuration time and read by the analyzers
  typedef struct packed {
    logic en;     // slot is active (A != OFF)
    bnd_t start;  // inclusive start byte address
    bnd_t stop;   // exclusive end byte address
    logic gr;     // general read
    logic er;     // bus error on read violation
    logic ew;     // bus error on write violation
  } slot_dec_t;

  // Register map (byte offsets on the configuration port, 32-bit registers)
  localparam int unsigned REG_NSLOTS     = 'h00;  // RO: number of slots
  localparam int unsigned REG_NPERMS     = 'h04;  // RO: perm entries per slot
  localparam int unsigned REG_ERRCAUSE   = 'h08;  // error cause; any write clears it
  localparam int unsigned REG_ERRADDR_LO = 'h10;
  localparam int unsigned REG_ERRADDR_HI = 'h14;
  localparam int unsigned SLOT_BASE      = 'h40;  // slot i at SLOT_BASE + i*SLOT_STRIDE
  localparam int unsigned SLOT_STRIDE    = 'h40;  // 64-byte slots (paper, Sec. IV)
  localparam int unsigned SLOT_ADDR_LO   = 'h00;  // Table 3 offsets
  localparam int unsigned SLOT_ADDR_HI   = 'h04;
  localparam int unsigned SLOT_EADDR_LO  = 'h08;
  localparam int unsigned SLOT_EADDR_HI  = 'h0C;
  localparam int unsigned SLOT_CFG       = 'h10;
  localparam int unsigned SLOT_PERM0     = 'h20;  // perm k at 0x20 + 4*k

  // errcause layout: wid in 6:0, read in 8, write in 9, valid in 31
  localparam int unsigned ERR_R_BIT = 8;
  localparam int unsigned ERR_W_BIT = 9;
  localparam int unsigned ERR_V_BIT = 31;

  // ------------------------------------------------- configuration-time decode
  // Slot address registers hold byte address bits [65:2], as PMP does; only
  // the bits that fit the physical address space are kept.
  function automatic bnd_t enc2byte(input logic [63:0] enc);
    logic [65:0] b;
    b = {enc, 2'b00};
    if (|b[65:ADDR_W]) return bnd_t'(1) << ADDR_W;  // beyond the space: saturate
    return bnd_t'(b[ADDR_W-1:0]);
  endfunction

  // Decode one slot into start/end form. prev_addr is the address register
  // of the slot below (lower bound of a TOR region).
  function automatic slot_dec_t decode_slot(input logic [63:0] addr,
                                            input logic [63:0] eaddr,
                                            input logic [63:0] prev_addr,
                                            input logic [31:0] cfg);
    slot_dec_t d;
    logic [63:0] mask;
    logic [63:0] ones;
    logic [67:0] top;
    d.gr = cfg[CFG_GR];
    d.er = cfg[CFG_ER];
    d.ew = cfg[CFG_EW];
    d.en = 1'b1;
    d.start = '0;
    d.stop  = '0;
    // NAPOT: trailing ones of addr select the size, 2^(k+3) bytes
    ones = addr ^ (addr + 64'd1);      // ones at the trailing-one run plus one bit
    mask = ~ones;                      // clears the run and the next bit
    unique case (amode_e'(cfg[CFG_A_LSB +: 3]))
      A_TOR: begin
        d.start = enc2byte(prev_addr);
        d.stop  = enc2byte(addr);
      end
      A_NA4: begin
        d.start = enc2byte(addr);
        d.stop  = enc2byte(addr) + bnd_t'(4);
      end
      A_NAPOT: begin
        d.start = enc2byte(addr & mask);
        // size = 4 * (ones + 1) bytes, summed wide and saturated to 2^ADDR_W
        top = {2'b00, addr & mask, 2'b00} + {2'b00, ones, 2'b00} + 68'd4;
        if (top > (68'd1 << ADDR_W)) d.stop = bnd_t'(1) << ADDR_W;
        else                         d.stop = bnd_t'(top);
      end
      A_SE: begin
        d.start = enc2byte(addr);
        d.stop  = enc2byte(eaddr);
      end
      default: d.en = 1'b0;  // OFF and the reserved encodings 5..7
    endcase
    return d;
  endfunction

endpackage
