// hpmp_top -- hypervisor PMP with per-region address offsets (RV32).
//
// The second stage of a two-level PMP: guest accesses (V=1) have passed the
// guest-controlled vSPMP, whose verdict enters as vspmp_allow_i; host accesses
// (HS/U) enter directly; M-mode accesses are not checked here. The block
// holds the hypervisor's hPMP registers (hpmp_csr_file), matches the access
// against the enabled OFF-TOR region pairs (hpmp_checker) and, for guest
// accesses, relocates the guest physical address by the offset of the hit
// region (hpmp_translate). The verdict and the physical address go on to the
// machine-level PMP/ePMP and the memory system, which are outside this block.
//
// Timing: the access path is combinational. rsp_* answer req_* in the same
// cycle, so the added latency is fixed and independent of access history; no
// translation cache exists. CSR writes take effect at the next rising edge.
//
// rsp_pa_o is the relocated address for V=1 hits and the unchanged address
// otherwise; rsp_allow_o is 0 when hPMP (or, for V=1, the vSPMP) denies.
// The stage order follows the paper's two-level PMP figure; combining the
// vSPMP verdict by a simple AND and the same-cycle response are this
// design's choices.
module hpmp_top
  import hpmp_pkg::*;
#(
  parameter int unsigned NUM_ENTRIES = hpmp_pkg::N_ENTRIES
) (
  input  logic                             clk_i,
  input  logic                             rst_ni,
  // hypervisor CSR access
  input  logic                             csr_we_i,
  input  csr_kind_e                        csr_kind_i,
  input  logic [5:0]                       csr_idx_i,
  input  logic [XLEN-1:0]                  csr_wdata_i,
  output logic [XLEN-1:0]                  csr_rdata_o,
  // access from the hart
  input  logic                             req_valid_i,
  input  logic                             req_virt_i,
  input  priv_e                            req_priv_i,
  input  access_e                          req_acc_i,
  input  logic [PA_BITS-1:0]                  req_gpa_i,
  // first-stage (vSPMP) verdict for V=1 accesses
  input  logic                             vspmp_allow_i,
  // response towards PMP/ePMP and memory
  output logic                             rsp_valid_o,
  output logic                             rsp_allow_o,
  output logic                             rsp_hit_o,
  output logic [$clog2(NUM_ENTRIES/2)-1:0] rsp_region_o,
  output logic [PA_BITS-1:0]                  rsp_pa_o
);

  hpmpcfg_t               cfg    [NUM_ENTRIES];
  logic [XLEN-1:0]        addr   [NUM_ENTRIES];
  logic [XLEN-1:0]        offset [NUM_ENTRIES];
  logic [NUM_ENTRIES-1:0] switch_en;
  logic                   hpmp_allow;

  hpmp_csr_file #(.NUM_ENTRIES(NUM_ENTRIES)) u_csr (
    .clk_i, .rst_ni,
    .csr_we_i, .csr_kind_i, .csr_idx_i, .csr_wdata_i, .csr_rdata_o,
    .cfg_o    (cfg),
    .addr_o   (addr),
    .switch_o (switch_en),
    .offset_o (offset)
  );

  hpmp_checker #(.NUM_ENTRIES(NUM_ENTRIES), .PLEN(PA_BITS)) u_chk (
    .cfg_i    (cfg),
    .addr_i   (addr),
    .switch_i (switch_en),
    .virt_i   (req_virt_i),
    .priv_i   (req_priv_i),
    .acc_i    (req_acc_i),
    .gpa_i    (req_gpa_i),
    .hit_o    (rsp_hit_o),
    .region_o (rsp_region_o),
    .allow_o  (hpmp_allow)
  );

  hpmp_translate #(.NUM_ENTRIES(NUM_ENTRIES), .PLEN(PA_BITS)) u_xlt (
    .offset_i (offset),
    .virt_i   (req_virt_i),
    .hit_i    (rsp_hit_o),
    .region_i (rsp_region_o),
    .gpa_i    (req_gpa_i),
    .pa_o     (rsp_pa_o)
  );

  assign rsp_valid_o = req_valid_i;
  assign rsp_allow_o = hpmp_allow && (!req_virt_i || vspmp_allow_i);

  // Guests never run in M-mode, and the hypervisor's physical addresses are
  // never relocated.
  a_no_virt_m: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                req_valid_i |-> !(req_virt_i && req_priv_i == PRIV_M));
  a_host_untranslated: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                        (req_valid_i && !req_virt_i) |-> rsp_pa_o == req_gpa_i);

endmodule
