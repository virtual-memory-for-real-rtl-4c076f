// hpmp_translate -- guest-physical to physical address relocation.
//
// For an access with V=1 that hits hPMP region k, the physical address is
//     PA = GPA + hpmpoffset[2k+1]
// where the offset register holds offset bits 33:2 (bits 1:0 are zero, so the
// alignment of the access is kept). The addition is modulo 2^34. With V=0, or
// without a hit, the address passes unchanged. The formula, the x = 2k+1
// selection, the V=1 condition and the [33:2] register layout are the
// paper's; dropping the carry out of bit 33 is this design's choice.
//
// Purely combinational: one multiplexer and one 34-bit adder after the
// checker, the same delay for every access.
module hpmp_translate
  import hpmp_pkg::*;
#(
  parameter int unsigned NUM_ENTRIES = hpmp_pkg::N_ENTRIES,
  parameter int unsigned PLEN        = hpmp_pkg::PA_BITS
) (
  input  logic [XLEN-1:0]                   offset_i [NUM_ENTRIES],
  input  logic                              virt_i,
  input  logic                              hit_i,
  input  logic [$clog2(NUM_ENTRIES/2)-1:0]  region_i,
  input  logic [PLEN-1:0]                   gpa_i,
  output logic [PLEN-1:0]                   pa_o
);

  logic [PLEN-1:0] ofs;

  // Entry x = 2k + 1 of region k; offset register bits map to PA bits 33:2.
  assign ofs  = {offset_i[{region_i, 1'b1}][PLEN-3:0], 2'b00};
  assign pa_o = (virt_i && hit_i) ? gpa_i + ofs : gpa_i;

endmodule
