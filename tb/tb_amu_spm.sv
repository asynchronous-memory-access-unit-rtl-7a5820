// tb_amu_spm: self-checking test of the cache/SPM data region. A reference array tracks
// the SPM contents. Checks byte-enable writes and reads on the core port, whole-word
// writes and reads on the engine port, port B winning a same-word write collision, the
// one-cycle read latency, refusal of accesses beyond the SPM part, and the cache way mask
// as the number of SPM ways changes.
module tb_amu_spm;
  import amu_pkg::*;
  localparam int WAYS = 4, WAY_WORDS = 64;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [3:0] spm_ways;
  logic [WAYS-1:0] cache_way_mask;
  logic a_en, a_we, a_err, b_en, b_we, b_err;
  logic [31:0] a_addr;
  logic [7:0] a_be;
  logic [63:0] a_wdata, a_rdata, b_wdata, b_rdata;
  logic [28:0] b_word;
  amu_spm #(.WAYS(WAYS), .WAY_WORDS(WAY_WORDS)) dut (.*);

  int checks = 0, failures = 0, collisions = 0, refused = 0;
  logic [63:0] ref_m [WAYS * WAY_WORDS];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    a_en = 0; a_we = 0; b_en = 0; b_we = 0; a_addr = 0; a_be = 0; a_wdata = 0; b_word = 0; b_wdata = 0;
    spm_ways = 4'(WAYS);
    // fill through port B
    for (int w = 0; w < WAYS * WAY_WORDS; w++) begin
      @(negedge clk); b_en = 1; b_we = 1; b_word = 29'(w); b_wdata = {32'(w), 32'hF00D};
      ref_m[w] = {32'(w), 32'hF00D};
    end
    @(negedge clk); b_en = 0; b_we = 0;
    // mask checks
    for (int n = 0; n <= WAYS; n++) begin
      spm_ways = 4'(n);
      #1 check(cache_way_mask == ~WAYS'((1 << n) - 1), $sformatf("way mask with %0d SPM ways", n));
    end
    // random traffic on both ports
    for (int cyc = 0; cyc < 4000; cyc++) begin
      int aw, bw, lim;
      bit a_ok, b_ok;
      logic [63:0] exp_a, exp_b;
      @(negedge clk);
      spm_ways = 4'(1 + (cyc / 1000));
      lim = int'(spm_ways) * WAY_WORDS;
      aw = (cyc % 7 == 0) ? int'($urandom % 8) : int'($urandom % (WAYS * WAY_WORDS));
      bw = (cyc % 7 == 0) ? aw : int'($urandom % (WAYS * WAY_WORDS));
      a_en = 1; a_we = $urandom % 2; a_addr = 32'(aw * 8 + int'($urandom % 8)); a_be = 8'($urandom);
      a_wdata = {$urandom, $urandom};
      b_en = ($urandom % 4 != 0); b_we = $urandom % 2; b_word = 29'(bw); b_wdata = {$urandom, $urandom};
      a_ok = aw < lim; b_ok = bw < lim;
      exp_a = a_ok ? ref_m[aw] : 64'd0;
      exp_b = b_ok ? ref_m[bw] : 64'd0;
      @(posedge clk);
      if (a_we && a_ok && !(b_en && b_we && b_ok && bw == aw))
        for (int i = 0; i < 8; i++) if (a_be[i]) ref_m[aw][8*i +: 8] = a_wdata[8*i +: 8];
      if (b_en && b_we && a_we && aw == bw && b_ok) collisions++;
      if (b_en && b_we && b_ok) ref_m[bw] = b_wdata;
      if (!a_ok) refused++;
      #1;
      check(a_rdata == exp_a && a_err == !a_ok, $sformatf("port A read word %0d", aw));
      if (b_en) check(b_rdata == exp_b && b_err == !b_ok, $sformatf("port B read word %0d", bw));
    end
    check(collisions > 0 && refused > 0, "collisions and refusals exercised");
    $display("collisions=%0d refused=%0d", collisions, refused);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
