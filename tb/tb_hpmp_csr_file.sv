// tb_hpmp_csr_file -- self-checking test of the hPMP register bank.
//
// Checks the reset state, then performs random writes of every register class
// and compares the read port and the parallel outputs with a reference model
// kept in the testbench: even cfg entries stay OFF, odd ones keep only OFF or
// TOR, reserved cfg bits read zero, even offsets stay zero, and the switch
// mask is written word by word. Writes must be visible one clock edge later.
module tb_hpmp_csr_file;
  import hpmp_pkg::*;

  localparam int unsigned N = 64;

  logic            clk = 1'b0;
  logic            rst_n;
  logic            we;
  csr_kind_e       kind;
  logic [5:0]      idx;
  logic [31:0]     wdata, rdata;
  hpmpcfg_t        cfg    [N];
  logic [31:0]     addr   [N];
  logic [N-1:0]    sw;
  logic [31:0]     offset [N];

  int checks = 0, failures = 0;

  // reference model
  logic [7:0]  m_cfg [N];
  logic [31:0] m_addr[N];
  logic [31:0] m_ofs [N];
  logic [N-1:0] m_sw;

  hpmp_csr_file #(.NUM_ENTRIES(N)) dut (
    .clk_i(clk), .rst_ni(rst_n), .csr_we_i(we), .csr_kind_i(kind), .csr_idx_i(idx),
    .csr_wdata_i(wdata), .csr_rdata_o(rdata),
    .cfg_o(cfg), .addr_o(addr), .switch_o(sw), .offset_o(offset));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
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

  function automatic logic [7:0] model_cfg(input logic [7:0] wd, input int i);
    logic [7:0] c = wd & 8'h9F;                  // reserved bits 6:5 read 0
    if ((i % 2 == 0) || (wd[4:3] != 2'b01)) c[4:3] = 2'b00;
    return c;
  endfunction

  task automatic write(input csr_kind_e k, input int i, input logic [31:0] d);
    @(negedge clk);
    we = 1'b1; kind = k; idx = 6'(i); wdata = d;
    @(negedge clk);
    we = 1'b0;
    unique case (k)
      CSR_CFG:    m_cfg[i]  = model_cfg(d[7:0], i);
      CSR_ADDR:   m_addr[i] = d;
      CSR_SWITCH: if (i < 2) m_sw[32*i +: 32] = d;
      CSR_OFFSET: if (i % 2 == 1) m_ofs[i] = d;
      default: ;
    endcase
  endtask

  function automatic logic [31:0] model_read(input csr_kind_e k, input int i);
    unique case (k)
      CSR_CFG:    return {24'b0, m_cfg[i]};
      CSR_ADDR:   return m_addr[i];
      CSR_SWITCH: return (i < 2) ? m_sw[32*i +: 32] : 32'b0;
      CSR_OFFSET: return m_ofs[i];
      default:    return 32'b0;
    endcase
  endfunction

  task automatic compare_all();
    for (int i = 0; i < N; i++) begin
      check(cfg[i] == hpmpcfg_t'(m_cfg[i]), $sformatf("cfg_o[%0d]=%h exp %h", i, cfg[i], m_cfg[i]));
      check(addr[i] == m_addr[i], $sformatf("addr_o[%0d]", i));
      check(offset[i] == m_ofs[i], $sformatf("offset_o[%0d]=%h exp %h", i, offset[i], m_ofs[i]));
    end
    check(sw == m_sw, $sformatf("switch_o=%h exp %h", sw, m_sw));
  endtask

  initial begin
    we = 1'b0; kind = CSR_CFG; idx = '0; wdata = '0;
    rst_n = 1'b0;
    for (int i = 0; i < N; i++) begin m_cfg[i] = '0; m_addr[i] = '0; m_ofs[i] = '0; end
    m_sw = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    compare_all();

    // directed WARL cases
    write(CSR_CFG, 0, 32'h0000_008F);             // even entry asks TOR: stays OFF
    check(cfg[0].a == A_OFF, "even cfg forced OFF");
    write(CSR_CFG, 1, 32'h0000_0017);             // NA4 on odd entry -> OFF
    check(cfg[1].a == A_OFF, "odd cfg NA4 -> OFF");
    write(CSR_CFG, 3, 32'h0000_00EB);             // S TOR W R, reserved bits set
    check(cfg[3] == hpmpcfg_t'(8'h8B), $sformatf("odd cfg S TOR RW = %h", cfg[3]));
    write(CSR_OFFSET, 10, 32'h1234_5678);         // even offset hardwired 0
    check(offset[10] == 32'h0, "even offset hardwired 0");
    write(CSR_OFFSET, 11, 32'h0002_0000);         // Table 2: hpmpoffset11
    check(offset[11] == 32'h0002_0000, "hpmpoffset11 written");
    write(CSR_SWITCH, 1, 32'h8000_0001);          // upper switch word
    check(sw[32] && sw[63] && !sw[31] && !sw[0], "switch upper word");

    // random traffic
    for (int t = 0; t < 3000; t++) begin
      csr_kind_e k;
      int i;
      k = csr_kind_e'($urandom_range(0, 3));
      i = (k == CSR_SWITCH) ? $urandom_range(0, 1) : $urandom_range(0, N - 1);
      write(k, i, $urandom());
      kind = csr_kind_e'($urandom_range(0, 3));
      idx  = 6'((kind == CSR_SWITCH) ? $urandom_range(0, 1) : $urandom_range(0, N - 1));
      #1;
      check(rdata == model_read(kind, int'(idx)),
            $sformatf("read kind=%0d idx=%0d got %h exp %h", kind, idx, rdata, model_read(kind, int'(idx))));
      if (t % 100 == 0) compare_all();
    end
    compare_all();

    // a write without we has no effect
    @(negedge clk); kind = CSR_ADDR; idx = 6'd5; wdata = ~m_addr[5]; we = 1'b0;
    @(negedge clk);
    check(addr[5] == m_addr[5], "no write without we");

    // reset clears everything again
    rst_n = 1'b0; #1;
    for (int i = 0; i < N; i++) begin m_cfg[i] = '0; m_addr[i] = '0; m_ofs[i] = '0; end
    m_sw = '0;
    compare_all();
    rst_n = 1'b1;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
