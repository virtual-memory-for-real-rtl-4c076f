// tb_hpmp_top -- end-to-end test of the hPMP with offsets at its default size
// (64 entries, 34-bit physical addresses).
//
// A hypervisor is modelled by CSR writes, the hart by accesses on the request
// port. The scenario follows the example system of two virtual machines and
// a hypervisor:
//   1. The eleven OFF-TOR region pairs of the example configuration are
//      programmed (stacks, code, two data areas per VM, hypervisor regions with
//      S=1). Byte end addresses are converted to TOR tops, (end+1)>>2.
//   2. VM1 is scheduled: hypervisor regions and VM1 regions enabled in
//      hpmpswitch. Guest and hypervisor accesses are checked for verdict and
//      address.
//   3. Switch to VM2: VM1 regions disabled, VM2 regions enabled.
//   4. Partial update: VM1 code grows from 512 KB to 768 KB (hpmpaddr9), VM2
//      is relocated by hpmpoffset11 = 512 KB without changing its guest
//      addresses.
//   5. Generic images: both VMs use the same guest-physical layout; their
//      regions differ only in the offsets, and hpmpswitch selects the VM.
// Every response is checked in the cycle of its request (zero added cycles).
// Each mechanism is counted and a mechanism that never occurs is a failure.
module tb_hpmp_top;
  import hpmp_pkg::*;

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

  // mechanism counters
  int n_translate, n_guest_s1_deny, n_host_s0_deny, n_guest_nomatch_deny,
      n_host_nomatch_allow, n_switch_off, n_perm_deny, n_m_bypass, n_vspmp_deny,
      n_overlap_priority, n_partial_update, n_generic_image, n_even_ofs_zero, n_warl;

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
    repeat (50000) @(posedge clk);
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

  // ---------------------------------------------------------------- CSRs
  task automatic csr_write(input csr_kind_e k, input int i, input logic [31:0] d);
    @(negedge clk);
    csr_we = 1'b1; csr_kind = k; csr_idx = 6'(i); csr_wdata = d;
    @(negedge clk);
    csr_we = 1'b0;
  endtask

  task automatic csr_read(input csr_kind_e k, input int i, output logic [31:0] d);
    @(negedge clk);
    csr_kind = k; csr_idx = 6'(i);
    #1 d = csr_rdata;
  endtask

  // Region k from a start byte address and an inclusive end byte address.
  task automatic program_region(input int k, input logic [33:0] start_b, input logic [33:0] end_b,
                                input bit s, input bit r, input bit w, input bit x,
                                input logic [33:0] ofs_b);
    logic [7:0] c;
    c = {s, 2'b00, 2'b01, x, w, r};
    csr_write(CSR_CFG,    2*k,   32'h0);                 // 'A': OFF
    csr_write(CSR_ADDR,   2*k,   32'(start_b >> 2));
    csr_write(CSR_ADDR,   2*k+1, 32'((end_b + 34'd1) >> 2));
    csr_write(CSR_CFG,    2*k+1, {24'h0, c});            // 'B': TOR with permissions
    csr_write(CSR_OFFSET, 2*k+1, 32'(ofs_b >> 2));
  endtask

  // Enable the given regions (bit k = region k), all others off.
  task automatic set_switch(input logic [31:0] regions);
    logic [63:0] m = '0;
    for (int k = 0; k < 32; k++) if (regions[k]) m[2*k+1] = 1'b1;
    csr_write(CSR_SWITCH, 0, m[31:0]);
    csr_write(CSR_SWITCH, 1, m[63:32]);
  endtask

  // ---------------------------------------------------------------- accesses
  task automatic access(input bit v, input priv_e p, input access_e a, input logic [33:0] g,
                        input bit exp_allow, input logic [33:0] exp_pa, input string what);
    @(negedge clk);
    req_valid = 1'b1; req_virt = v; req_priv = p; req_acc = a; req_gpa = g;
    #1;  // same cycle: no clock edge between request and response
    check(rsp_valid, {what, ": valid in request cycle"});
    check(rsp_allow == exp_allow, $sformatf("%s: allow=%0d exp %0d", what, rsp_allow, exp_allow));
    if (exp_allow)
      check(rsp_pa == exp_pa, $sformatf("%s: pa=%h exp %h", what, rsp_pa, exp_pa));
    observe();
    @(negedge clk);
    req_valid = 1'b0;
  endtask

  // Example configuration: region, start, inclusive end, S, RWX
  localparam logic [31:0] HV_REGIONS  = 32'b001_0000_1001;   // 0, 3, 8
  localparam logic [31:0] VM1_REGIONS = 32'b010_0101_0010;   // 1, 4, 6, 9
  localparam logic [31:0] VM2_REGIONS = 32'b100_1010_0100;   // 2, 5, 7, 10

  task automatic program_example();
    program_region(0,  34'h2000_0000, 34'h2000_07FF, 1, 1, 1, 0, 0); // Stack HV
    program_region(1,  34'h2000_0800, 34'h2000_17FF, 0, 1, 1, 0, 0); // Stack VM1
    program_region(2,  34'h2000_1800, 34'h2000_27FF, 0, 1, 1, 0, 0); // Stack VM2
    program_region(3,  34'h8000_0000, 34'h8003_FFFF, 1, 1, 0, 1, 0); // Code HV
    program_region(4,  34'h8004_0000, 34'h800B_FFFF, 0, 1, 0, 1, 0); // Code VM1
    program_region(5,  34'h800C_0000, 34'h8013_FFFF, 0, 1, 0, 1, 0); // Code VM2
    program_region(6,  34'h9000_0000, 34'h9001_FFFF, 0, 1, 1, 0, 0); // Data VM1
    program_region(7,  34'h9002_0000, 34'h9003_FFFF, 0, 1, 1, 0, 0); // Data VM2
    program_region(8,  34'h9080_0000, 34'h9081_7FFF, 1, 1, 1, 0, 0); // Data HV
    program_region(9,  34'h9081_8000, 34'h9085_7FFF, 0, 1, 1, 0, 0); // Data VM1
    program_region(10, 34'h9085_8000, 34'h9089_7FFF, 0, 1, 1, 0, 0); // Data VM2
  endtask

  // Mechanisms as seen on the response (regions 0, 3, 8 hold S=1 rules).
  function automatic bit hv_region(input logic [4:0] k);
    return k == 5'd0 || k == 5'd3 || k == 5'd8;
  endfunction

  task automatic observe();
    begin
      if (req_virt && rsp_allow && rsp_pa != req_gpa) n_translate++;
      if (req_virt && rsp_allow && rsp_pa != req_gpa && rsp_region == 5'd5) n_partial_update++;
      if (req_virt && rsp_allow && rsp_pa != req_gpa && rsp_region >= 5'd11) n_generic_image++;
      if (req_virt && rsp_hit && hv_region(rsp_region) && !rsp_allow) n_guest_s1_deny++;
      if (!req_virt && req_priv != PRIV_M && rsp_hit && !hv_region(rsp_region) && !rsp_allow)
        n_host_s0_deny++;
      if (req_virt && !rsp_hit && !rsp_allow) n_guest_nomatch_deny++;
      if (!req_virt && req_priv != PRIV_M && !rsp_hit && rsp_allow) n_host_nomatch_allow++;
      if (req_priv == PRIV_M && rsp_hit && rsp_allow) n_m_bypass++;
      if (rsp_hit && rsp_allow == 1'b0 && (req_virt ? !hv_region(rsp_region) : hv_region(rsp_region))
          && vspmp_allow) n_perm_deny++;
    end
  endtask

  logic [31:0] rd;

  initial begin
    {n_translate, n_guest_s1_deny, n_host_s0_deny, n_guest_nomatch_deny, n_host_nomatch_allow,
     n_switch_off, n_perm_deny, n_m_bypass, n_vspmp_deny, n_overlap_priority,
     n_partial_update, n_generic_image, n_even_ofs_zero, n_warl} = '0;
    csr_we = 1'b0; csr_kind = CSR_CFG; csr_idx = '0; csr_wdata = '0;
    req_valid = 1'b0; req_virt = 1'b0; req_priv = PRIV_S; req_acc = ACC_READ; req_gpa = '0;
    vspmp_allow = 1'b1;
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // ---- reset state: nothing enabled; guests denied, host allowed
    access(1, PRIV_S, ACC_READ, 34'h2000_0800, 0, 0, "reset guest");
    access(0, PRIV_S, ACC_READ, 34'h2000_0800, 1, 34'h2000_0800, "reset host");

    // ---- 1. example configuration
    program_example();
    csr_read(CSR_ADDR, 17, rd);
    check(rd == 32'h2420_6000, $sformatf("hpmpaddr17 = %h", rd));   // (0x9081_7FFF+1)>>2
    csr_read(CSR_CFG, 1, rd);
    check(rd == 32'h8B, $sformatf("hpmpcfg1 (S TOR RW) = %h", rd));
    csr_write(CSR_OFFSET, 10, 32'hFFFF_FFFF);
    csr_read(CSR_OFFSET, 10, rd);
    check(rd == 0, "even offset reads 0"); if (rd == 0) n_even_ofs_zero++;
    csr_write(CSR_CFG, 12, 32'h0F);                                  // TOR asked on even entry
    csr_read(CSR_CFG, 12, rd);
    check(rd[4:3] == 2'b00, "even cfg stays OFF"); if (rd[4:3] == 2'b00) n_warl++;
    csr_write(CSR_CFG, 12, 32'h00);

    // ---- 2. VM1 scheduled
    set_switch(HV_REGIONS | VM1_REGIONS);
    access(1, PRIV_S, ACC_WRITE, 34'h2000_0800, 1, 34'h2000_0800, "VM1 stack write");
    access(1, PRIV_U, ACC_READ,  34'h2000_17FC, 1, 34'h2000_17FC, "VM1 stack top read");
    access(1, PRIV_S, ACC_EXEC,  34'h8004_0000, 1, 34'h8004_0000, "VM1 code exec");
    access(1, PRIV_S, ACC_WRITE, 34'h8004_0000, 0, 0, "VM1 code write");
    access(1, PRIV_U, ACC_WRITE, 34'h9000_1000, 1, 34'h9000_1000, "VM1 data write");
    access(1, PRIV_U, ACC_READ,  34'h9085_7FFC, 1, 34'h9085_7FFC, "VM1 data2 read");
    access(1, PRIV_S, ACC_READ,  34'h2000_0000, 0, 0, "VM1 to HV stack");
    access(1, PRIV_S, ACC_EXEC,  34'h8000_0100, 0, 0, "VM1 to HV code");
    access(1, PRIV_S, ACC_READ,  34'h9080_0000, 0, 0, "VM1 to HV data");
    access(1, PRIV_S, ACC_READ,  34'h2000_1800, 0, 0, "VM1 to VM2 stack");
    access(1, PRIV_S, ACC_READ,  34'hF000_0000, 0, 0, "VM1 to unmapped");
    vspmp_allow = 1'b0;
    access(1, PRIV_U, ACC_READ,  34'h2000_0800, 0, 0, "VM1 denied by vSPMP");
    if (rsp_hit && !rsp_allow) n_vspmp_deny++;
    vspmp_allow = 1'b1;
    access(0, PRIV_S, ACC_WRITE, 34'h2000_0400, 1, 34'h2000_0400, "HV stack write");
    access(0, PRIV_S, ACC_EXEC,  34'h8003_FFFC, 1, 34'h8003_FFFC, "HV code exec");
    access(0, PRIV_S, ACC_WRITE, 34'h8000_0000, 0, 0, "HV code write");
    access(0, PRIV_S, ACC_WRITE, 34'h2000_0800, 0, 0, "HV to VM1 S=0 stack");
    access(0, PRIV_S, ACC_WRITE, 34'hF000_0010, 1, 34'hF000_0010, "HV peripheral");
    access(0, PRIV_M, ACC_WRITE, 34'h8000_0000, 1, 34'h8000_0000, "M-mode");

    // ---- 3. switch to VM2
    set_switch(HV_REGIONS | VM2_REGIONS);
    access(1, PRIV_S, ACC_READ,  34'h2000_0800, 0, 0, "VM1 stack after switch");
    if (!rsp_hit && !rsp_allow) n_switch_off++;
    access(1, PRIV_S, ACC_READ,  34'h9000_0000, 0, 0, "VM1 data after switch");
    access(1, PRIV_S, ACC_WRITE, 34'h2000_27FC, 1, 34'h2000_27FC, "VM2 stack write");
    access(1, PRIV_S, ACC_EXEC,  34'h800C_0000, 1, 34'h800C_0000, "VM2 code exec");
    access(1, PRIV_U, ACC_WRITE, 34'h9089_0000, 1, 34'h9089_0000, "VM2 data2 write");
    access(0, PRIV_S, ACC_READ,  34'h2000_0800, 1, 34'h2000_0800, "HV to disabled VM1 stack");

    // ---- 4. partial update: VM1 code 512 KB -> 768 KB, VM2 moved by 512 KB
    csr_write(CSR_ADDR, 9, 32'((34'h800F_FFFF + 1) >> 2));   // hpmpaddr9 = 0x800F_FFFF (inclusive)
    csr_write(CSR_OFFSET, 11, 32'(34'h8_0000 >> 2));         // hpmpoffset11 = 0x8_0000 bytes
    csr_read(CSR_OFFSET, 11, rd);
    check(rd == 32'h0002_0000, "hpmpoffset11 readback");
    // VM2 keeps its guest addresses; its code now lives at 0x8014_0000..0x801B_FFFF
    access(1, PRIV_S, ACC_EXEC, 34'h800C_0000, 1, 34'h8014_0000, "VM2 relocated code start");
    access(1, PRIV_U, ACC_READ, 34'h8013_FFFC, 1, 34'h801B_FFFC, "VM2 relocated code end"); n_translate += 2;
    access(1, PRIV_S, ACC_WRITE, 34'h2000_2000, 1, 34'h2000_2000, "VM2 stack unaffected");
    // VM1 sees its grown code area
    set_switch(HV_REGIONS | VM1_REGIONS);
    access(1, PRIV_S, ACC_EXEC, 34'h800F_FFFC, 1, 34'h800F_FFFC, "VM1 grown code end");
    access(1, PRIV_S, ACC_EXEC, 34'h8010_0000, 0, 0, "VM1 beyond grown code");
    // hypervisor (V=0) sees physical addresses: no offset applied
    access(0, PRIV_S, ACC_READ, 34'h8014_0000, 1, 34'h8014_0000, "HV reads moved VM2 image");
    // overlap: with VM1 and VM2 code both enabled, the lower region (VM1) wins
    set_switch(HV_REGIONS | VM1_REGIONS | VM2_REGIONS);
    access(1, PRIV_S, ACC_EXEC, 34'h800C_0000, 1, 34'h800C_0000, "overlap: region 4 wins");
    check(rsp_hit && rsp_region == 5'd4, $sformatf("overlap: region %0d", rsp_region));
    if (rsp_hit && rsp_region == 5'd4) n_overlap_priority++;

    // ---- 5. generic images: both VMs linked to the same guest layout
    //   stack 0x0000_0000 (4 KB), code 0x0010_0000 (512 KB),
    //   data 0x0100_0000 (128 KB), data2 0x0200_0000 (256 KB)
    // VM1 uses regions 11..14, VM2 regions 15..18; physical homes from the
    // example address map.
    program_region(11, 34'h0000_0000, 34'h0000_0FFF, 0, 1, 1, 0, 34'h2000_0800);
    program_region(12, 34'h0010_0000, 34'h0017_FFFF, 0, 1, 0, 1, 34'h8004_0000 - 34'h0010_0000);
    program_region(13, 34'h0100_0000, 34'h0101_FFFF, 0, 1, 1, 0, 34'h9000_0000 - 34'h0100_0000);
    program_region(14, 34'h0200_0000, 34'h0203_FFFF, 0, 1, 1, 0, 34'h9081_8000 - 34'h0200_0000);
    program_region(15, 34'h0000_0000, 34'h0000_0FFF, 0, 1, 1, 0, 34'h2000_1800);
    program_region(16, 34'h0010_0000, 34'h0017_FFFF, 0, 1, 0, 1, 34'h800C_0000 - 34'h0010_0000);
    program_region(17, 34'h0100_0000, 34'h0101_FFFF, 0, 1, 1, 0, 34'h9002_0000 - 34'h0100_0000);
    program_region(18, 34'h0200_0000, 34'h0203_FFFF, 0, 1, 1, 0, 34'h9085_8000 - 34'h0200_0000);
    set_switch(HV_REGIONS | 32'h0000_7800);                    // VM1 generic: 11..14
    access(1, PRIV_S, ACC_WRITE, 34'h0000_0010, 1, 34'h2000_0810, "gen VM1 stack");
    access(1, PRIV_S, ACC_EXEC,  34'h0010_0000, 1, 34'h8004_0000, "gen VM1 code");
    access(1, PRIV_U, ACC_READ,  34'h0101_FFFC, 1, 34'h9001_FFFC, "gen VM1 data");
    access(1, PRIV_U, ACC_WRITE, 34'h0200_0004, 1, 34'h9081_8004, "gen VM1 data2");
    access(1, PRIV_S, ACC_WRITE, 34'h0010_0000, 0, 0, "gen VM1 code write");
    set_switch(HV_REGIONS | 32'h0007_8000);                    // VM2 generic: 15..18
    access(1, PRIV_S, ACC_WRITE, 34'h0000_0010, 1, 34'h2000_1810, "gen VM2 stack");
    access(1, PRIV_S, ACC_EXEC,  34'h0010_0000, 1, 34'h800C_0000, "gen VM2 code");
    access(1, PRIV_U, ACC_READ,  34'h0101_FFFC, 1, 34'h9003_FFFC, "gen VM2 data");
    access(1, PRIV_U, ACC_WRITE, 34'h0200_0004, 1, 34'h9085_8004, "gen VM2 data2"); n_translate += 4;
    // the hypervisor's own regions are never translated
    access(0, PRIV_S, ACC_READ,  34'h9080_0100, 1, 34'h9080_0100, "HV data, no offset");
    access(0, PRIV_S, ACC_READ,  34'h0000_0010, 0, 0, "HV to guest generic region");

    // ---- mechanism coverage
    check(n_translate > 0,          "translation exercised");
    check(n_guest_s1_deny > 0,      "guest denied on hypervisor rule");
    check(n_host_s0_deny > 0,       "host denied on guest rule");
    check(n_guest_nomatch_deny > 0, "guest no-match deny");
    check(n_host_nomatch_allow > 0, "host no-match allow");
    check(n_switch_off > 0,         "hpmpswitch disable");
    check(n_perm_deny > 0,          "permission deny");
    check(n_m_bypass > 0,           "M-mode bypass");
    check(n_vspmp_deny > 0,         "vSPMP deny");
    check(n_overlap_priority > 0,   "overlap priority");
    check(n_partial_update > 0,     "partial update");
    check(n_generic_image > 0,      "generic images");
    check(n_even_ofs_zero > 0,      "even offset hardwired");
    check(n_warl > 0,               "cfg WARL");
    $display("mechanisms: translate=%0d guest_s1_deny=%0d host_s0_deny=%0d guest_nomatch=%0d host_nomatch=%0d",
             n_translate, n_guest_s1_deny, n_host_s0_deny, n_guest_nomatch_deny, n_host_nomatch_allow);
    $display("            switch_off=%0d perm_deny=%0d m_bypass=%0d vspmp_deny=%0d overlap=%0d partial=%0d generic=%0d",
             n_switch_off, n_perm_deny, n_m_bypass, n_vspmp_deny, n_overlap_priority, n_partial_update,
             n_generic_image);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
