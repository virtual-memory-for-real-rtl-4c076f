// tb_hpmp_vm_switch -- randomized VM-switching workload on the full hPMP.
//
// The hypervisor is modelled as a scheduler that, on every simulated timer
// tick, enables the hypervisor regions plus the regions of the next VM in
// hpmpswitch (and, every few ticks, moves the second VM by rewriting its
// offsets, as in a partial update). Between ticks the running VM and the
// hypervisor issue random accesses: mostly inside one of the configured
// regions, some at region edges, some anywhere. Every response is compared
// with a reference model of the region table held in the testbench (lowest
// enabled region wins, TOR with exclusive top, S=0 for guests, S=1 for the
// hypervisor, PA = GPA + offset for guest hits).
//
// Loaded configuration: the eleven regions of the example address map
// (regions 0..10) and, as a second pair of VMs, generic images that share
// one guest layout and differ only in their offsets (regions 11..18).
module tb_hpmp_vm_switch;
  import hpmp_pkg::*;

  localparam int unsigned NREG   = 19;
  localparam int unsigned NTICKS = 400;
  localparam int unsigned NACC   = 40;

  logic            clk = 1'b0;
  logic            rst_n;
  logic            csr_we;
  csr_kind_e       csr_kind;
  logic [5:0]      csr_idx;
  logic [31:0]     csr_wdata, csr_rdata;
  logic            req_valid, req_virt, vspmp_allow;
  priv_e           req_priv;
  access_e         req_acc;
  logic [33:0]     req_gpa;
  logic            rsp_valid, rsp_allow, rsp_hit;
  logic [4:0]      rsp_region;
  logic [33:0]     rsp_pa;

  int checks = 0, failures = 0;
  int n_allow = 0, n_deny = 0, n_xlat = 0, n_switch = 0, n_move = 0;

  // reference region table
  logic [33:0] r_start [NREG];
  logic [33:0] r_end   [NREG];   // inclusive byte address
  logic [2:0]  r_rwx   [NREG];   // {x, w, r}
  logic        r_s     [NREG];
  logic [33:0] r_ofs   [NREG];
  logic [31:0] r_en;

  hpmp_top dut (
    .clk_i(clk), .rst_ni(rst_n),
    .csr_we_i(csr_we), .csr_kind_i(csr_kind), .csr_idx_i(csr_idx),
    .csr_wdata_i(csr_wdata), .csr_rdata_o(csr_rdata),
    .req_valid_i(req_valid), .req_virt_i(req_virt), .req_priv_i(req_priv),
    .req_acc_i(req_acc), .req_gpa_i(req_gpa), .vspmp_allow_i(vspmp_allow),
    .rsp_valid_o(rsp_valid), .rsp_allow_o(rsp_allow), .rsp_hit_o(rsp_hit),
    .rsp_region_o(rsp_region), .rsp_pa_o(rsp_pa));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 30) $display("FAIL: %s", what);
    end
  endtask

  task automatic csr_write(input csr_kind_e k, input int i, input logic [31:0] d);
    @(negedge clk);
    csr_we = 1'b1; csr_kind = k; csr_idx = 6'(i); csr_wdata = d;
    @(negedge clk);
    csr_we = 1'b0;
  endtask

  task automatic region(input int k, input logic [33:0] s_b, input logic [33:0] e_b,
                        input bit s, input logic [2:0] xwr, input logic [33:0] ofs);
    r_start[k] = s_b; r_end[k] = e_b; r_s[k] = s; r_rwx[k] = xwr; r_ofs[k] = ofs;
    csr_write(CSR_ADDR,   2*k,   32'(s_b >> 2));
    csr_write(CSR_ADDR,   2*k+1, 32'((e_b + 34'd1) >> 2));
    csr_write(CSR_CFG,    2*k+1, {24'h0, s, 2'b00, 2'b01, xwr});
    csr_write(CSR_OFFSET, 2*k+1, 32'(ofs >> 2));
  endtask

  task automatic set_offset(input int k, input logic [33:0] ofs);
    r_ofs[k] = ofs;
    csr_write(CSR_OFFSET, 2*k+1, 32'(ofs >> 2));
  endtask

  task automatic enable(input logic [31:0] regions);
    logic [63:0] m = '0;
    r_en = regions;
    for (int k = 0; k < 32; k++) if (regions[k]) m[2*k+1] = 1'b1;
    csr_write(CSR_SWITCH, 0, m[31:0]);
    csr_write(CSR_SWITCH, 1, m[63:32]);
  endtask

  task automatic model(input bit v, input priv_e p, input access_e a, input logic [33:0] g,
                       output bit e_allow, output logic [33:0] e_pa);
    bit hit = 0; int k = 0; bit perm;
    for (int i = 0; i < NREG; i++)
      if (!hit && r_en[i] && g[33:2] >= r_start[i][33:2] && g <= r_end[i]) begin
        hit = 1; k = i;
      end
    perm = r_rwx[k][int'(a)];
    if (p == PRIV_M) e_allow = 1;
    else if (v)      e_allow = hit && !r_s[k] && perm && vspmp_allow;
    else if (hit)    e_allow = r_s[k] && perm;
    else             e_allow = 1;
    e_pa = (v && hit) ? 34'(g + r_ofs[k]) : g;
  endtask

  task automatic access(input bit v, input priv_e p, input access_e a, input logic [33:0] g);
    bit e_allow; logic [33:0] e_pa;
    @(negedge clk);
    req_valid = 1; req_virt = v; req_priv = p; req_acc = a; req_gpa = g;
    vspmp_allow = ($urandom_range(0, 31) != 0);
    #1;
    model(v, p, a, g, e_allow, e_pa);
    check(rsp_allow == e_allow, $sformatf("allow=%0d exp %0d v=%0d p=%0d a=%0d gpa=%h",
                                          rsp_allow, e_allow, v, p, a, g));
    if (e_allow) check(rsp_pa == e_pa, $sformatf("pa=%h exp %h gpa=%h", rsp_pa, e_pa, g));
    if (rsp_allow) n_allow++; else n_deny++;
    if (rsp_allow && rsp_pa != g) n_xlat++;
  endtask

  // Random address: inside or at the edge of one configured region, or anywhere.
  function automatic logic [33:0] pick_addr();
    int k, sel;
    k   = $urandom_range(0, NREG - 1);
    sel = $urandom_range(0, 5);
    unique case (sel)
      0:       return {2'b00, $urandom()} & ~34'h3;
      1:       return r_end[k] + 34'd1;                  // first word past the top
      2:       return r_start[k] - 34'd4;                // last word before the start
      3:       return r_end[k] - 34'd3;                  // last word
      default: return (r_start[k] + 34'($urandom_range(0, 32'(r_end[k] - r_start[k])))) & ~34'h3;
    endcase
  endfunction

  localparam logic [31:0] HV   = 32'h0000_0109;   // 0, 3, 8
  localparam logic [31:0] VM1  = 32'h0000_0252;   // 1, 4, 6, 9
  localparam logic [31:0] VM2  = 32'h0000_04A4;   // 2, 5, 7, 10
  localparam logic [31:0] GVM1 = 32'h0000_7800;   // 11..14
  localparam logic [31:0] GVM2 = 32'h0007_8000;   // 15..18

  initial begin
    logic [31:0] vm;
    csr_we = 0; csr_kind = CSR_CFG; csr_idx = '0; csr_wdata = '0;
    req_valid = 0; req_virt = 0; req_priv = PRIV_S; req_acc = ACC_READ; req_gpa = '0;
    vspmp_allow = 1; r_en = '0;
    rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    region(0,  34'h2000_0000, 34'h2000_07FF, 1, 3'b011, 0);
    region(1,  34'h2000_0800, 34'h2000_17FF, 0, 3'b011, 0);
    region(2,  34'h2000_1800, 34'h2000_27FF, 0, 3'b011, 0);
    region(3,  34'h8000_0000, 34'h8003_FFFF, 1, 3'b101, 0);
    region(4,  34'h8004_0000, 34'h800B_FFFF, 0, 3'b101, 0);
    region(5,  34'h800C_0000, 34'h8013_FFFF, 0, 3'b101, 0);
    region(6,  34'h9000_0000, 34'h9001_FFFF, 0, 3'b011, 0);
    region(7,  34'h9002_0000, 34'h9003_FFFF, 0, 3'b011, 0);
    region(8,  34'h9080_0000, 34'h9081_7FFF, 1, 3'b011, 0);
    region(9,  34'h9081_8000, 34'h9085_7FFF, 0, 3'b011, 0);
    region(10, 34'h9085_8000, 34'h9089_7FFF, 0, 3'b011, 0);
    region(11, 34'h0000_0000, 34'h0000_0FFF, 0, 3'b011, 34'h2000_0800);
    region(12, 34'h0010_0000, 34'h0017_FFFF, 0, 3'b101, 34'h8004_0000 - 34'h0010_0000);
    region(13, 34'h0100_0000, 34'h0101_FFFF, 0, 3'b011, 34'h9000_0000 - 34'h0100_0000);
    region(14, 34'h0200_0000, 34'h0203_FFFF, 0, 3'b011, 34'h9081_8000 - 34'h0200_0000);
    region(15, 34'h0000_0000, 34'h0000_0FFF, 0, 3'b011, 34'h2000_1800);
    region(16, 34'h0010_0000, 34'h0017_FFFF, 0, 3'b101, 34'h800C_0000 - 34'h0010_0000);
    region(17, 34'h0100_0000, 34'h0101_FFFF, 0, 3'b011, 34'h9002_0000 - 34'h0100_0000);
    region(18, 34'h0200_0000, 34'h0203_FFFF, 0, 3'b011, 34'h9085_8000 - 34'h0200_0000);

    for (int t = 0; t < NTICKS; t++) begin
      // hypervisor: occasionally relocate VM2 (partial update style)
      if (t % 16 == 15) begin
        set_offset(5, ($urandom_range(0, 1) != 0) ? 34'h8_0000 : 34'h0);
        n_move++;
      end
      unique case (t % 4)
        0: vm = VM1;
        1: vm = VM2;
        2: vm = GVM1;
        default: vm = GVM2;
      endcase
      if ($urandom_range(0, 7) == 0) vm = vm | (($urandom_range(0, 1) != 0) ? VM1 : GVM2);  // overlaps
      enable(HV | vm);
      n_switch++;
      for (int i = 0; i < NACC; i++) begin
        bit v;
        priv_e p;
        v = ($urandom_range(0, 4) != 0);
        p = v ? priv_e'($urandom_range(0, 1))
              : (($urandom_range(0, 9) == 0) ? PRIV_M : PRIV_S);
        access(v, p, access_e'($urandom_range(0, 2)), pick_addr());
      end
    end
    check(n_allow > 1000 && n_deny > 1000 && n_xlat > 500, "workload coverage");
    check(n_switch == NTICKS && n_move > 0, "switches and relocations");
    $display("switches=%0d relocations=%0d allowed=%0d denied=%0d translated=%0d",
             n_switch, n_move, n_allow, n_deny, n_xlat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
