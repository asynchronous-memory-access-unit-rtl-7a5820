// tb_amu_ctrl_regs: self-checking test of the AMU control registers. Checks reset values,
// write/read-back of every register, the read-only status register, SPMWAYS clamping, and
// the effective configuration chosen through the default configuration register or named
// by the instruction: the selected MAC's granularity and QoS, its access pattern when
// enabled, a single element of one granule otherwise, and SW0 as user word.
module tb_amu_ctrl_regs;
  import amu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic csr_we;
  logic [CSR_AW-1:0] csr_addr;
  logic [XLEN-1:0] csr_wdata, csr_rdata;
  status_t status;
  logic cfg_sel_en;
  logic [1:0] cfg_sel;
  amu_cfg_t cfg;
  logic [3:0] spm_ways;
  amu_ctrl_regs dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(input int a, input logic [63:0] d);
    @(negedge clk); csr_we = 1; csr_addr = CSR_AW'(a); csr_wdata = d;
    @(negedge clk); csr_we = 0;
  endtask
  task automatic rd(input int a, output logic [63:0] d);
    csr_addr = CSR_AW'(a);
    #1 d = csr_rdata;
  endtask

  function automatic logic [63:0] mk_mac(input int beats, input int qos, input bit pen, input int pidx);
    return {49'd0, 2'(pidx), pen, 4'(qos), 8'(beats)};
  endfunction
  function automatic logic [63:0] mk_pat(input int count, input int stride);
    return {16'd0, 16'(count), 32'(stride)};
  endfunction

  logic [63:0] v;
  initial begin
    csr_we = 0; csr_addr = '0; csr_wdata = '0; status = '0; cfg_sel_en = 0; cfg_sel = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // reset state
    rd(0, v); check(v == 64'd1, "MAC0 reset = 1 beat");
    rd(4, v); check(v == 0, "DEFCFG reset");
    rd(16, v); check(v == 4, "SPMWAYS reset = WAYS/2");
    check(cfg.beats == 1 && cfg.count == 1 && cfg.stride == 8 && cfg.qos == 0, "reset cfg");
    // read-back of all registers
    for (int i = 0; i < 4; i++) wr(0 + i, mk_mac(2 + i, 3 + i, i[0], 3 - i));
    for (int i = 0; i < 4; i++) wr(8 + i, mk_pat(10 + i, 1000 * (i + 1)));
    for (int i = 0; i < 4; i++) wr(12 + i, 64'hABCD_0000_0000_0000 + 64'(i));
    for (int i = 0; i < 4; i++) begin rd(i, v); check(v == mk_mac(2 + i, 3 + i, i[0], 3 - i), $sformatf("MAC%0d", i)); end
    for (int i = 0; i < 4; i++) begin rd(8 + i, v); check(v == mk_pat(10 + i, 1000 * (i + 1)), $sformatf("PAT%0d", i)); end
    for (int i = 0; i < 4; i++) begin rd(12 + i, v); check(v == 64'hABCD_0000_0000_0000 + 64'(i), $sformatf("SW%0d", i)); end
    // effective configuration through DEFCFG
    for (int i = 0; i < 4; i++) begin
      wr(4, 64'(i));
      @(negedge clk);
      rd(4, v); check(v == 64'(i), "DEFCFG read-back");
      check(cfg.beats == 8'(2 + i) && cfg.qos == 4'(3 + i), $sformatf("cfg beats/qos via MAC%0d", i));
      if (i[0]) check(cfg.count == 16'(10 + 3 - i) && cfg.stride == 32'(1000 * (4 - i)),
                      $sformatf("cfg pattern via MAC%0d", i));
      else      check(cfg.count == 1 && cfg.stride == 32'(8 * (2 + i)), $sformatf("cfg single element via MAC%0d", i));
      check(cfg.user == 64'hABCD_0000_0000_0000, "cfg user = SW0");
    end
    // a MAC named by the instruction overrides DEFCFG (now 3)
    for (int i = 0; i < 4; i++) begin
      cfg_sel_en = 1; cfg_sel = 2'(i);
      #1 check(cfg.beats == 8'(2 + i) && cfg.qos == 4'(3 + i), $sformatf("cfg via named MAC%0d", i));
    end
    cfg_sel_en = 0;
    #1 check(cfg.beats == 8'd5, "cfg back to DEFCFG's MAC3");
    // granularity 0 counts as 1 beat
    wr(0, mk_mac(0, 1, 0, 0)); wr(4, 0);
    @(negedge clk);
    check(cfg.beats == 1, "granularity 0 -> 1 beat");
    // SPM ways and clamping
    wr(16, 64'd2); rd(16, v); check(v == 2 && spm_ways == 2, "SPMWAYS = 2");
    wr(16, 64'd0); check(spm_ways == 0, "SPMWAYS = 0");
    wr(16, 64'd13); check(spm_ways == 8, "SPMWAYS clamped");
    // status is read-only and live
    status = '{rsvd: 0, free_ids: 8'd7, finished: 8'd2, in_flight: 8'd5, queued: 8'd1};
    rd(17, v); check(v == 64'(status), "STATUS reads live value");
    wr(17, 64'hFFFF); rd(17, v); check(v == 64'(status), "STATUS not writable");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
