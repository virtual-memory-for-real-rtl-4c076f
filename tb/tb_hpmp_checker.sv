// tb_hpmp_checker -- self-checking test of the hPMP region match and
// permission decision.
//
// Random OFF-TOR configurations over a small address window (so regions
// overlap and hit often) and random accesses are compared with a reference
// model written as a plain loop over region pairs: TOR match on address bits
// 33:2 with exclusive top, entries enabled by their switch bit, lowest region
// wins, S=0 rules for guests, S=1 rules for the hypervisor, no-hit denies a
// guest and allows the host, M-mode is not checked. Directed cases use the
// first regions of the example hPMP configuration (hypervisor and VM1 stack).
module tb_hpmp_checker;
  import hpmp_pkg::*;

  localparam int unsigned N  = 64;
  localparam int unsigned NR = N / 2;

  hpmpcfg_t       cfg  [N];
  logic [31:0]    addr [N];
  logic [N-1:0]   sw;
  logic           virt;
  priv_e          priv;
  access_e        acc;
  logic [33:0]    gpa;
  logic           hit, allow;
  logic [4:0]     region;

  int checks = 0, failures = 0;
  int n_hit = 0, n_allow = 0, n_deny = 0;
  logic clk = 1'b0;

  hpmp_checker #(.NUM_ENTRIES(N), .PLEN(34)) dut (
    .cfg_i(cfg), .addr_i(addr), .switch_i(sw), .virt_i(virt), .priv_i(priv),
    .acc_i(acc), .gpa_i(gpa), .hit_o(hit), .region_o(region), .allow_o(allow));

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
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // reference model
  task automatic model(output bit e_hit, output int e_reg, output bit e_allow);
    logic [31:0] w = gpa[33:2];
    bit p;
    e_hit = 0; e_reg = 0;
    for (int k = 0; k < NR; k++) begin
      if (!e_hit && sw[2*k+1] && cfg[2*k+1].a == A_TOR &&
          w >= addr[2*k] && w < addr[2*k+1]) begin
        e_hit = 1; e_reg = k;
      end
    end
    p = (acc == ACC_READ)  ? cfg[2*e_reg+1].r :
        (acc == ACC_WRITE) ? cfg[2*e_reg+1].w : cfg[2*e_reg+1].x;
    if (priv == PRIV_M)  e_allow = 1;
    else if (virt)       e_allow = e_hit && !cfg[2*e_reg+1].s && p;
    else if (e_hit)      e_allow = cfg[2*e_reg+1].s && p;
    else                 e_allow = 1;
  endtask

  task automatic run_check(input string tag);
    bit e_hit, e_allow; int e_reg;
    #1;
    model(e_hit, e_reg, e_allow);
    check(hit == e_hit, $sformatf("%s hit=%0d exp %0d gpa=%h", tag, hit, e_hit, gpa));
    if (e_hit) check(int'(region) == e_reg, $sformatf("%s region=%0d exp %0d", tag, region, e_reg));
    check(allow == e_allow, $sformatf("%s allow=%0d exp %0d gpa=%h virt=%0d priv=%0d acc=%0d",
                                      tag, allow, e_allow, gpa, virt, priv, acc));
    if (hit) n_hit++;
    if (allow) n_allow++; else n_deny++;
  endtask

  task automatic clear();
    for (int i = 0; i < N; i++) begin cfg[i] = '0; addr[i] = '0; end
    sw = '0;
  endtask

  task automatic set_region(input int k, input logic [33:0] start_b, input logic [33:0] end_b,
                            input bit s, input bit r, input bit w, input bit x);
    hpmpcfg_t c;
    addr[2*k]   = start_b[33:2];
    addr[2*k+1] = 32'((end_b + 34'd1) >> 2);
    c = '0; c.s = s; c.a = A_TOR; c.r = r; c.w = w; c.x = x;
    cfg[2*k+1] = c;
    sw[2*k+1]  = 1'b1;
  endtask

  task automatic access(input bit v, input priv_e p, input access_e a, input logic [33:0] ad);
    virt = v; priv = p; acc = a; gpa = ad;
  endtask

  initial begin
    clear();
    access(0, PRIV_S, ACC_READ, '0);

    // Directed: regions 0 (Stack HV, S TOR RW) and 1 (Stack VM1, TOR RW).
    set_region(0, 34'h2000_0000, 34'h2000_07FF, 1, 1, 1, 0);
    set_region(1, 34'h2000_0800, 34'h2000_17FF, 0, 1, 1, 0);
    access(1, PRIV_S, ACC_WRITE, 34'h2000_0800); run_check("vm1 stack low");
    check(hit && region == 1 && allow, "VM1 writes its stack");
    access(1, PRIV_U, ACC_READ, 34'h2000_17FC);  run_check("vm1 stack top word");
    check(allow, "VM1 reads last word of its stack");
    access(1, PRIV_U, ACC_READ, 34'h2000_1800);  run_check("vm1 past top");
    check(!hit && !allow, "first byte past VM1 stack: no hit, guest denied");
    access(1, PRIV_S, ACC_READ, 34'h2000_07FC);  run_check("vm1 to hv stack");
    check(hit && region == 0 && !allow, "guest denied on S=1 region");
    access(1, PRIV_S, ACC_EXEC, 34'h2000_0900);  run_check("vm1 exec stack");
    check(!allow, "no X on RW region");
    access(0, PRIV_S, ACC_WRITE, 34'h2000_0000); run_check("hv stack");
    check(allow, "HV writes its stack");
    access(0, PRIV_S, ACC_WRITE, 34'h2000_0800); run_check("hv to vm1 stack");
    check(!allow, "HV denied on S=0 region");
    access(0, PRIV_S, ACC_READ, 34'h3000_0000);  run_check("hv no match");
    check(allow, "HV allowed where nothing matches");
    access(0, PRIV_M, ACC_WRITE, 34'h2000_0800); run_check("m-mode");
    check(allow, "M-mode bypasses hPMP");
    sw[3] = 1'b0;
    access(1, PRIV_S, ACC_READ, 34'h2000_0800);  run_check("vm1 disabled");
    check(!hit && !allow, "switched-off region does not match");

    // Random
    for (int t = 0; t < 20000; t++) begin
      if (t % 20 == 0) begin
        clear();
        for (int i = 0; i < N; i++) begin
          hpmpcfg_t c;
          addr[i] = $urandom_range(0, 40);
          c = hpmpcfg_t'(8'($urandom()));
          c.rsvd = '0;
          c.a = (i % 2 == 1 && $urandom_range(0, 3) != 0) ? A_TOR : A_OFF;
          cfg[i] = c;
          sw[i] = ($urandom_range(0, 3) != 0);
        end
      end
      access(1'($urandom_range(0, 1)), priv_e'($urandom_range(0, 1)), access_e'($urandom_range(0, 2)),
             {$urandom_range(0, 2) == 0 ? 2'($urandom()) : 2'b00, 30'($urandom_range(0, 44)), 2'($urandom())});
      if ($urandom_range(0, 9) == 0) priv = PRIV_M;
      run_check($sformatf("rand%0d", t));
    end
    check(n_hit > 1000 && n_allow > 1000 && n_deny > 1000, "random coverage");
    $display("hits=%0d allowed=%0d denied=%0d", n_hit, n_allow, n_deny);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
