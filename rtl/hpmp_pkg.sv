// hpmp_pkg -- types and constants shared by the hPMP-with-offsets blocks.
//
// The design is a hypervisor-level physical memory protection unit (hPMP)
// for RV32 whose region pairs (an OFF entry holding the region start and a
// TOR entry holding its end) can also relocate guest accesses by a per-region
// offset. Addresses are 34 bits wide (the RV32 physical address space);
// the hpmpaddr and hpmpoffset registers hold address bits 33:2 in 32 bits.
//
// The cfg byte layout (R bit 0, W bit 1, X bit 2, A bits 4:3, S bit 7) is the
// RISC-V PMP/SPMP layout; the paper names these fields but prints no bit
// positions. Only the OFF and TOR matching modes are supported, as the paper
// proposes.
package hpmp_pkg;

  localparam int unsigned XLEN        = 32;  // register width (RV32)
  localparam int unsigned PA_BITS     = 34;  // physical address width
  localparam int unsigned N_ENTRIES   = 64;  // hpmp entries x = 0..63

  // Matching mode field A of a cfg entry.
  typedef enum logic [1:0] {
    A_OFF   = 2'b00,
    A_TOR   = 2'b01,
    A_NA4   = 2'b10,   // not supported: written as OFF
    A_NAPOT = 2'b11    // not supported: written as OFF
  } amode_e;

  // One hpmpcfg entry.
  typedef struct packed {
    logic       s;     // 1: rule for the hypervisor (V=0), 0: rule for guests (V=1)
    logic [1:0] rsvd;  // reads as zero
    amode_e     a;
    logic       x;
    logic       w;
    logic       r;
  } hpmpcfg_t;

  // Access type of a request.
  typedef enum logic [1:0] {
    ACC_READ  = 2'b00,
    ACC_WRITE = 2'b01,
    ACC_EXEC  = 2'b10
  } access_e;

  // Privilege level of a request (RISC-V encoding).
  typedef enum logic [1:0] {
    PRIV_U = 2'b00,
    PRIV_S = 2'b01,
    PRIV_M = 2'b11
  } priv_e;

  // Register class selected by the CSR access port.
  typedef enum logic [1:0] {
    CSR_CFG    = 2'b00,  // hpmpcfg<idx>, one 8-bit entry per access
    CSR_ADDR   = 2'b01,  // hpmpaddr<idx>, address bits 33:2
    CSR_SWITCH = 2'b10,  // hpmpswitch word <idx> (entries 32*idx .. 32*idx+31)
    CSR_OFFSET = 2'b11   // hpmpoffset<idx>, offset bits 33:2 (even idx read 0)
  } csr_kind_e;

endpackage
