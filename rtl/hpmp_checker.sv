// hpmp_checker -- region match and permission decision of the hPMP.
//
// Entries are used in OFF-TOR pairs: region k is formed by entry 2k (A=OFF,
// its hpmpaddr is the region start) and entry 2k+1 (A=TOR, its hpmpaddr is the
// region end, its cfg carries S and R/W/X). Region k matches when entry 2k+1
// is TOR, its hpmpswitch bit is set, and
//     hpmpaddr[2k] <= gpa[33:2] < hpmpaddr[2k+1]
// (RISC-V TOR rule, exclusive top). Of all matching regions the lowest
// numbered one wins; its number k is reported for the offset translation.
//
// Permission rule (S bit as in the paper's permission model):
//   * M-mode: hPMP does not apply, the access is allowed.
//   * V=1 (guest VS/VU): allowed only on a hit in an S=0 rule that grants the
//     access type; an S=1 (hypervisor) rule or no hit denies it.
//   * V=0 (HS and host U): a hit in an S=1 rule is checked against R/W/X, a
//     hit in an S=0 (guest) rule denies, no hit allows.
// The paper fixes the OFF-TOR pairing, the S=0/S=1 split between guests and
// hypervisor and the use of hpmpswitch; lowest-number priority, the no-hit
// rules, the M-mode bypass and word-granular matching (accesses of at most 4
// naturally aligned bytes) are this design's choices following RISC-V PMP and
// SPMP conventions.
//
// Purely combinational: the verdict is available in the cycle of the access,
// with a fixed delay that does not depend on earlier accesses.
module hpmp_checker
  import hpmp_pkg::*;
#(
  parameter int unsigned NUM_ENTRIES = hpmp_pkg::N_ENTRIES,
  parameter int unsigned PLEN        = hpmp_pkg::PA_BITS
) (
  input  hpmpcfg_t                          cfg_i    [NUM_ENTRIES],
  input  logic [XLEN-1:0]                   addr_i   [NUM_ENTRIES],
  input  logic [NUM_ENTRIES-1:0]            switch_i,
  input  logic                              virt_i,
  input  priv_e                             priv_i,
  input  access_e                           acc_i,
  input  logic [PLEN-1:0]                   gpa_i,
  output logic                              hit_o,
  output logic [$clog2(NUM_ENTRIES/2)-1:0]  region_o,
  output logic                              allow_o
);

  localparam int unsigned NUM_REGIONS = NUM_ENTRIES / 2;

  logic [PLEN-3:0]        word;
  logic [NUM_REGIONS-1:0] match;
  hpmpcfg_t               hcfg;
  logic                   perm;

  assign word = gpa_i[PLEN-1:2];

  // Per-region TOR comparison.
  for (genvar k = 0; k < NUM_REGIONS; k++) begin : g_region
    assign match[k] = switch_i[2*k+1] && (cfg_i[2*k+1].a == A_TOR)
                   && (word >= (PLEN-2)'(addr_i[2*k]))
                   && (word <  (PLEN-2)'(addr_i[2*k+1]));
  end

  // Lowest-numbered match wins.
  always_comb begin
    hit_o    = 1'b0;
    region_o = '0;
    for (int k = NUM_REGIONS - 1; k >= 0; k--) begin
      if (match[k]) begin
        hit_o    = 1'b1;
        region_o = ($clog2(NUM_REGIONS))'(k);
      end
    end
  end

  assign hcfg = cfg_i[{region_o, 1'b1}];

  always_comb begin
    unique case (acc_i)
      ACC_READ:  perm = hcfg.r;
      ACC_WRITE: perm = hcfg.w;
      ACC_EXEC:  perm = hcfg.x;
      default:   perm = 1'b0;
    endcase
  end

  always_comb begin
    if (priv_i == PRIV_M)  allow_o = 1'b1;
    else if (virt_i)       allow_o = hit_o && !hcfg.s && perm;
    else if (hit_o)        allow_o = hcfg.s && perm;
    else                   allow_o = 1'b1;
  end

endmodule
