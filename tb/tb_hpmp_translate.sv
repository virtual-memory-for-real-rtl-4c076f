// tb_hpmp_translate -- self-checking test of the guest-to-physical address
// relocation PA = GPA + hpmpoffset[2k+1].
//
// Offsets and addresses are random; the expected address is computed in the
// testbench from the offset array (offset bits 33:2, sum modulo 2^34) and the
// register number 2k+1 of region k. Also checks that V=0 and a miss leave
// the address unchanged, and the paper's partial-update value for region 5
// (hpmpoffset11 = 512 KB moves 0x800C_0000 to 0x8014_0000).
module tb_hpmp_translate;
  import hpmp_pkg::*;

  localparam int unsigned N = 64;

  logic [31:0] ofs [N];
  logic        virt, hit;
  logic [4:0]  region;
  logic [33:0] gpa, pa;
  int checks = 0, failures = 0;
  logic clk = 1'b0;

  hpmp_translate #(.NUM_ENTRIES(N), .PLEN(34)) dut (
    .offset_i(ofs), .virt_i(virt), .hit_i(hit), .region_i(region), .gpa_i(gpa), .pa_o(pa));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    for (int i = 0; i < N; i++) ofs[i] = '0;
    // Partial update example: region 5 (entries 10/11), 512 KB byte offset.
    ofs[11] = 32'h0008_0000 >> 2;
    virt = 1; hit = 1; region = 5; gpa = 34'h0_800C_0000;
    #1 check(pa == 34'h0_8014_0000, $sformatf("region 5 relocation pa=%h", pa));
    gpa = 34'h0_8013_FFFC;
    #1 check(pa == 34'h0_801B_FFFC, $sformatf("region 5 top pa=%h", pa));
    virt = 0;
    #1 check(pa == gpa, "V=0 passes unchanged");

    for (int t = 0; t < 20000; t++) begin
      logic [33:0] exp;
      if (t % 50 == 0)
        for (int i = 0; i < N; i++) ofs[i] = (i % 2 == 1) ? $urandom() : 32'h0;
      virt   = ($urandom_range(0, 3) != 0);
      hit    = ($urandom_range(0, 3) != 0);
      region = 5'($urandom());
      gpa    = {2'($urandom()), 32'($urandom())};
      exp    = (virt && hit) ? 34'(gpa + {ofs[2*region+1], 2'b00}) : gpa;
      #1 check(pa == exp, $sformatf("pa=%h exp %h (virt=%0d hit=%0d k=%0d)", pa, exp, virt, hit, region));
      check(pa[1:0] == gpa[1:0], "byte offset kept");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
