// axi_pkg: shared AXI4 types and constants of the memory system.
//
// Every AXI link in the design is carried as a pair of packed structs: req_t
// (master to slave: AW, W, AR payloads with their valids, and the B/R readies)
// and rsp_t (slave to master: AW/W/AR readies, B and R payloads with their
// valids). All links are 64-bit data, as printed for the "64b AXI" buses of
// the SoC block diagram. Address width 64, ID width 8 and an 8-bit user field
// (used to carry the device identifier into the IOMMU) are this design's own
// choices. Only INCR bursts of full 64-bit beats are used by the blocks here;
// cache, prot, qos, lock and region signals are left out.
package axi_pkg;

  parameter int unsigned ADDR_W = 64;
  parameter int unsigned DATA_W = 64;
  parameter int unsigned STRB_W = DATA_W / 8;
  parameter int unsigned ID_W   = 8;
  parameter int unsigned USER_W = 8;

  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [DATA_W-1:0] data_t;
  typedef logic [STRB_W-1:0] strb_t;
  typedef logic [ID_W-1:0]   id_t;
  typedef logic [USER_W-1:0] user_t;

  typedef enum logic [1:0] {
    RESP_OKAY   = 2'b00,
    RESP_EXOKAY = 2'b01,
    RESP_SLVERR = 2'b10,
    RESP_DECERR = 2'b11
  } resp_e;

  localparam logic [1:0] BURST_FIXED = 2'b00;
  localparam logic [1:0] BURST_INCR  = 2'b01;

  // AW and AR share one payload layout.
  typedef struct packed {
    id_t        id;
    addr_t      addr;
    logic [7:0] len;
    logic [2:0] size;
    logic [1:0] burst;
    user_t      user;
  } ax_t;

  typedef struct packed {
    data_t data;
    strb_t strb;
    logic  last;
  } w_t;

  typedef struct packed {
    id_t   id;
    resp_e resp;
  } b_t;

  typedef struct packed {
    id_t   id;
    data_t data;
    resp_e resp;
    logic  last;
  } r_t;

  typedef struct packed {
    ax_t  aw;
    logic aw_valid;
    w_t   w;
    logic w_valid;
    logic b_ready;
    ax_t  ar;
    logic ar_valid;
    logic r_ready;
  } req_t;

  typedef struct packed {
    logic aw_ready;
    logic w_ready;
    b_t   b;
    logic b_valid;
    logic ar_ready;
    r_t   r;
    logic r_valid;
  } rsp_t;

  // Address rule of the crossbar: [base, base+size) is routed to slave idx.
  typedef struct packed {
    addr_t       base;
    addr_t       size;
    logic [3:0]  idx;
  } rule_t;

endpackage
