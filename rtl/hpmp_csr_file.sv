// hpmp_csr_file -- hypervisor-controlled state of the hPMP.
//
// Holds NUM_ENTRIES hpmpaddr registers (address bits 33:2), NUM_ENTRIES
// hpmpcfg entries, the hpmpswitch enable mask (one bit per entry) and the
// hpmpoffset registers (offset bits 33:2). Following the paper's OFF-TOR
// scheme, even-numbered cfg entries are fixed to A=OFF, odd-numbered ones
// accept OFF or TOR only, and even-numbered offsets are hardwired to zero, so
// only NUM_ENTRIES/2 offset registers exist.
//
// Interface: one access port selected by class (cfg, addr, switch, offset) and
// index. A write (csr_we_i) takes effect at the next rising clock edge; the
// read data is combinational from the current contents. All register contents
// are also presented in parallel to the checker and translator.
//
// Own choices (the paper gives no CSR numbers, reset values or field
// positions): the class/index port stands in for an indirect-CSR window, a cfg
// access carries one entry in wdata[7:0], the switch mask is read and written
// as 32-bit words, NA4/NAPOT written to an odd cfg store OFF, reserved cfg
// bits read zero, and reset clears every register.
module hpmp_csr_file
  import hpmp_pkg::*;
#(
  parameter int unsigned NUM_ENTRIES = hpmp_pkg::N_ENTRIES  // even, at most 64
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  // hypervisor CSR access
  input  logic                   csr_we_i,
  input  csr_kind_e              csr_kind_i,
  input  logic [5:0]             csr_idx_i,
  input  logic [XLEN-1:0]        csr_wdata_i,
  output logic [XLEN-1:0]        csr_rdata_o,
  // parallel view of the state
  output hpmpcfg_t               cfg_o    [NUM_ENTRIES],
  output logic [XLEN-1:0]        addr_o   [NUM_ENTRIES],
  output logic [NUM_ENTRIES-1:0] switch_o,
  output logic [XLEN-1:0]        offset_o [NUM_ENTRIES]
);

  localparam int unsigned NUM_REGIONS = NUM_ENTRIES / 2;

  hpmpcfg_t               cfg_q  [NUM_ENTRIES];
  logic [XLEN-1:0]        addr_q [NUM_ENTRIES];
  logic [NUM_ENTRIES-1:0] switch_q;
  logic [XLEN-1:0]        ofs_q  [NUM_REGIONS];   // offset of entry 2k+1

  // WARL legalisation of a cfg write to entry idx.
  function automatic hpmpcfg_t legal_cfg(input logic [7:0] wd, input logic odd);
    hpmpcfg_t c;
    c      = hpmpcfg_t'(wd);
    c.rsvd = 2'b00;
    if (!odd || (c.a != A_TOR)) c.a = A_OFF;
    return c;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < NUM_ENTRIES; i++) begin
        cfg_q[i]  <= '0;
        addr_q[i] <= '0;
      end
      for (int k = 0; k < NUM_REGIONS; k++) ofs_q[k] <= '0;
      switch_q <= '0;
    end else if (csr_we_i) begin
      unique case (csr_kind_i)
        CSR_CFG:
          if (int'(csr_idx_i) < NUM_ENTRIES)
            cfg_q[csr_idx_i] <= legal_cfg(csr_wdata_i[7:0], csr_idx_i[0]);
        CSR_ADDR:
          if (int'(csr_idx_i) < NUM_ENTRIES) addr_q[csr_idx_i] <= csr_wdata_i;
        CSR_SWITCH:
          for (int b = 0; b < NUM_ENTRIES; b++)
            if (b / XLEN == int'(csr_idx_i)) switch_q[b] <= csr_wdata_i[b % XLEN];
        CSR_OFFSET:
          if (int'(csr_idx_i) < NUM_ENTRIES && csr_idx_i[0])
            ofs_q[csr_idx_i[5:1]] <= csr_wdata_i;
        default: ;
      endcase
    end
  end

  // Parallel outputs.
  always_comb begin
    for (int i = 0; i < NUM_ENTRIES; i++) begin
      cfg_o[i]    = cfg_q[i];
      addr_o[i]   = addr_q[i];
      offset_o[i] = (i % 2 == 1) ? ofs_q[i / 2] : '0;
    end
    switch_o = switch_q;
  end

  // Read port.
  always_comb begin
    csr_rdata_o = '0;
    unique case (csr_kind_i)
      CSR_CFG:    if (int'(csr_idx_i) < NUM_ENTRIES) csr_rdata_o = {24'b0, cfg_q[csr_idx_i]};
      CSR_ADDR:   if (int'(csr_idx_i) < NUM_ENTRIES) csr_rdata_o = addr_q[csr_idx_i];
      CSR_SWITCH:
        for (int b = 0; b < NUM_ENTRIES; b++)
          if (b / XLEN == int'(csr_idx_i)) csr_rdata_o[b % XLEN] = switch_q[b];
      CSR_OFFSET: if (int'(csr_idx_i) < NUM_ENTRIES && csr_idx_i[0])
                    csr_rdata_o = ofs_q[csr_idx_i[5:1]];
      default: ;
    endcase
  end

  // OFF-TOR rule: even entries never select TOR, odd entries only OFF or TOR.
  for (genvar g = 0; g < NUM_ENTRIES; g++) begin : g_chk
    if (g % 2 == 0) begin : g_even
      a_even_off: assert property (@(posedge clk_i) disable iff (!rst_ni) cfg_q[g].a == A_OFF);
    end else begin : g_odd
      a_odd_offtor: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                     cfg_q[g].a inside {A_OFF, A_TOR});
    end
  end

endmodule
