// iommu_pkg: constants and types shared by the IOMMU blocks.
//
// Field positions follow the RISC-V IOMMU specification v1.0 and the Sv39
// page-table format: a base-format device context (DC) of four doublewords
// (tc, iohgatp, ta, fsc), the fsc/iosatp MODE field in bits 63:60, and Sv39
// page-table entries with V/R/W/X in bits 3:0 and the PPN in bits 53:10.
// The cause codes are the ones the specification assigns. These are taken
// from the specification the paper builds on, not from the paper itself.
package iommu_pkg;

  typedef enum logic [1:0] {
    DDTP_OFF  = 2'd0,   // all inbound transactions disallowed
    DDTP_BARE = 2'd1,   // no translation (the "IOMMU disabled" baseline)
    DDTP_1LVL = 2'd2    // one-level device directory table
  } ddtp_mode_e;

  typedef logic [43:0] ppn_t;
  typedef logic [26:0] vpn_t;    // Sv39 VPN[2:0]
  typedef logic [1:0]  lvl_t;    // 0: 4 KiB, 1: 2 MiB, 2: 1 GiB leaf

  localparam logic [3:0] IOSATP_BARE = 4'd0;
  localparam logic [3:0] IOSATP_SV39 = 4'd8;

  localparam int unsigned DC_BYTES   = 32;   // base-format device context
  localparam int unsigned DC_TC_OFF  = 0;
  localparam int unsigned DC_FSC_OFF = 24;

  // Fault cause codes.
  localparam logic [11:0] CAUSE_LD_ACCESS   = 12'd5;
  localparam logic [11:0] CAUSE_ST_ACCESS   = 12'd7;
  localparam logic [11:0] CAUSE_LD_PAGE     = 12'd13;
  localparam logic [11:0] CAUSE_ST_PAGE     = 12'd15;
  localparam logic [11:0] CAUSE_ALL_OFF     = 12'd256;
  localparam logic [11:0] CAUSE_DDT_ACCESS  = 12'd257;
  localparam logic [11:0] CAUSE_DDT_INVALID = 12'd258;
  localparam logic [11:0] CAUSE_DDT_MISCONF = 12'd259;

endpackage
