// sifo_pkg: widths, types and helper functions shared by the garbling overlay.
//
// A wire of the garbled circuit carries an 80-bit key (label). The host
// names each wire by a 21-bit address: bit 0 is the memory flag (1 = on-chip
// BRAM, 0 = off-chip DDR) and bits 20:1 are the wire index. Three such
// addresses (two operands, one result) are packed into two 32-bit host
// registers. The key width, the 21-bit address, the flag meaning and the
// packing follow the paper; the flag taken as the lowest bit, the command
// and table records and the register map are this design's choices. The
// last bit of the second register is unused (it draws an unused-bit lint
// warning in unpack_addrs). Each module uses only some of the constants
// below, so lint reports the rest as unused parameters per module.
package sifo_pkg;

  localparam int KEY_W      = 80;   // garbled value width
  localparam int WIDX_W     = 20;   // wire index width
  localparam int WADDR_W    = 21;   // flag + index
  localparam int REG_W      = 32;   // host register width
  localparam int GID_W      = 32;   // gate identifier hashed by gAND
  localparam int BRAM_W     = 108;  // BRAM word width, 80 bits used
  localparam int DDR_W      = 512;  // DDR data word
  localparam int DDR_SLOTS  = 4;    // garbled values per DDR word
  localparam int DDR_SLOT_W = DDR_W / DDR_SLOTS;
  localparam int DDR_BE_W   = DDR_W / 8;
  localparam int DDR_AW     = WIDX_W - 2;  // DDR word address
  localparam int REG_AW     = 10;   // host register address width

  typedef logic [KEY_W-1:0] key_t;

  // One wire address as the host sends it. Packed so that bram is bit 0.
  typedef struct packed {
    logic [WIDX_W-1:0] idx;
    logic              bram;
  } waddr_t;

  typedef enum logic {GATE_AND = 1'b0, GATE_XOR = 1'b1} gate_kind_e;

  // One gate command: which overlay cell, operands and result.
  typedef struct packed {
    gate_kind_e kind;
    logic [4:0] unit;   // index within the gAND or gXOR array
    waddr_t     a;      // ADD1
    waddr_t     b;      // ADD2
    waddr_t     c;      // ADD3
  } gate_cmd_t;

  // Garbled table of one AND gate as returned to the host. Row 0 is the
  // all-zero row removed by row reduction and is not sent.
  typedef struct packed {
    logic [GID_W-1:0] gid;
    key_t             t3;
    key_t             t2;
    key_t             t1;
  } gtable_t;

  // DDR port request and response. A request is held until complete.
  typedef struct packed {
    logic                req;
    logic                we;
    logic [DDR_AW-1:0]   addr;
    logic [DDR_W-1:0]    wdata;
    logic [DDR_BE_W-1:0] be;
  } ddr_req_t;

  typedef struct packed {
    logic [DDR_W-1:0] rdata;
    logic             complete;
  } ddr_rsp_t;

  // Register map (word addresses).
  localparam logic [REG_AW-1:0] REG_CTRL   = 10'h000; // W: bit0 swap BRAM halves, bit1 clear gate counter
  localparam logic [REG_AW-1:0] REG_R0     = 10'h001; // R[31:0]
  localparam logic [REG_AW-1:0] REG_R1     = 10'h002; // R[63:32]
  localparam logic [REG_AW-1:0] REG_R2     = 10'h003; // R[79:64]
  localparam logic [REG_AW-1:0] REG_STATUS = 10'h004; // R: bit0 idle, bit1 overflow, bit2 read half, [15:8] queue level
  localparam logic [REG_AW-1:0] REG_DONE   = 10'h005; // R: gates completed
  localparam logic [REG_AW-1:0] REG_CELL0  = 10'h100; // cell registers: 2 per cell, AND cells then XOR cells

  // Three 21-bit addresses from two 32-bit registers:
  // ADD1 = r0[31:11], ADD2 = {r0[10:0], r1[31:22]}, ADD3 = r1[21:1].
  function automatic void unpack_addrs(input logic [REG_W-1:0] r0, input logic [REG_W-1:0] r1,
                                       output waddr_t a, output waddr_t b, output waddr_t c);
    logic [2*REG_W-1:0] w;
    w = {r0, r1};
    a = waddr_t'(w[2*REG_W-1             -: WADDR_W]);
    b = waddr_t'(w[2*REG_W-1 -   WADDR_W -: WADDR_W]);
    c = waddr_t'(w[2*REG_W-1 - 2*WADDR_W -: WADDR_W]);
  endfunction

  // Inverse, used by host models.
  function automatic logic [2*REG_W-1:0] pack_addrs(input waddr_t a, input waddr_t b, input waddr_t c);
    return {a, b, c, 1'b0};
  endfunction

  // SHA-1 message block for one garbled-table row: {ka, kb, g}, then the
  // standard padding: a single 1 bit, zeros, and the 64-bit length 192.
  function automatic logic [511:0] sha_block(input key_t ka, input key_t kb, input logic [GID_W-1:0] g);
    return {ka, kb, g, 1'b1, 255'd0, 64'd192};
  endfunction

endpackage
