// tb_amu_top: end-to-end test of the AMU at its default parameters, with the testbench in
// the role of the core's program and the far-memory model behind the memory port.
//   1. The basic example: one aload, poll getfin until it returns the id, then read the
//      data from the SPM with ordinary loads.
//   2. A large-granularity aload (64 beats = 512 bytes in one memory request).
//   3. Strided gathers (vector style): 32 elements 1 KiB apart packed into the SPM, then
//      200 elements, enough to keep all 32 tags busy.
//   4. An astore of data written into the SPM by ordinary stores, with a strided pattern.
//   4b. Sixteen aloads left uncollected, so that a seventeenth must stall.
//   5. Event-driven use: 48 aloads/astores of random shape issued without waiting; when
//      the AMU stalls (no free id) the program polls getfin and checks each finished
//      request's data. Requests finish out of order. Each instruction names its
//      configuration register itself instead of going through DEFCFG.
//   6. SPM reconfiguration: shrinking the SPM to one way returns ways to the cache and
//      makes SPM accesses beyond it fail, for the core and for the engine.
// Each mechanism is counted; one that never happened counts as a failure.
module tb_amu_top;
  import amu_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, res_valid;
  amu_op_e in_op;
  logic [XLEN-1:0] in_rs1, in_rs2, res_data;
  logic [CSR_AW-1:0] in_csr;
  logic spm_en, spm_we, spm_err, engine_spm_err;
  logic [31:0] spm_addr;
  logic [7:0] spm_be;
  logic [XLEN-1:0] spm_wdata, spm_rdata;
  logic [7:0] cache_way_mask;
  logic mreq_valid, mreq_ready, wd_valid, wd_ready, rsp_valid, rsp_ready;
  mem_req_t mreq;
  logic [XLEN-1:0] wd_data;
  mem_rsp_t rsp;

  amu_top dut (.*);
  far_mem_model #(.MIN_LAT(10), .MAX_LAT(400)) u_mem (
    .clk, .rst_n, .mreq_valid, .mreq_ready, .mreq, .wd_valid, .wd_ready, .wd_data,
    .rsp_valid, .rsp_ready, .rsp);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [63:0] init_word(input logic [63:0] a);
    return {a[31:0] ^ 32'h5A5A_C3C3, ~a[31:0]};
  endfunction

  // mechanism counters
  int n_stall = 0, n_getfin_fail = 0, n_out_of_order = 0, n_large = 0, n_strided = 0;
  int n_astore = 0, n_reconfig = 0, n_tags_full = 0, n_spm_refused = 0, n_named = 0;

  // transfers in flight at the memory port; the tag table (32) is full at 32
  int in_flight = 0;
  always @(posedge clk) if (rst_n) begin
    in_flight += int'(mreq_valid && mreq_ready) - int'(rsp_valid && rsp.last);
    if (in_flight == 32) n_tags_full++;
  end

  // ---------------- core-side helpers ----------------
  // Try one AMU instruction. Returns 0 without issuing it if the AMU stalls it.
  task automatic try_exec(input amu_op_e op, input logic [63:0] rs1, input logic [63:0] rs2,
                          input int csr, output bit ok, output logic [63:0] rd);
    @(negedge clk);
    in_valid = 1; in_op = op; in_rs1 = rs1; in_rs2 = rs2; in_csr = CSR_AW'(csr);
    #1;
    ok = in_ready;
    if (!ok) begin
      in_valid = 0;
      n_stall++;
      rd = '0;
      return;
    end
    @(posedge clk);
    #1 in_valid = 0;
    check(res_valid, "Rd written one cycle after issue");
    rd = res_data;
  endtask

  task automatic exec(input amu_op_e op, input logic [63:0] rs1, input logic [63:0] rs2,
                      input int csr, output logic [63:0] rd);
    bit ok;
    do try_exec(op, rs1, rs2, csr, ok, rd); while (!ok);
  endtask

  task automatic spm_load(input int addr, output logic [63:0] d, output bit err);
    @(negedge clk); spm_en = 1; spm_we = 0; spm_addr = 32'(addr);
    @(negedge clk); spm_en = 0; d = spm_rdata; err = spm_err;
  endtask

  task automatic spm_store(input int addr, input logic [63:0] d);
    @(negedge clk); spm_en = 1; spm_we = 1; spm_addr = 32'(addr); spm_be = 8'hFF; spm_wdata = d;
    @(negedge clk); spm_en = 0; spm_we = 0;
  endtask

  function automatic logic [63:0] mac(input int beats, input int qos, input bit pen, input int pidx);
    return {49'd0, 2'(pidx), pen, 4'(qos), 8'(beats)};
  endfunction
  function automatic logic [63:0] pat(input int count, input int stride);
    return {16'd0, 16'(count), 32'(stride)};
  endfunction

  // shape of each outstanding request, by id
  typedef struct {
    bit write; int spm; logic [63:0] mem; int beats; int count; int stride; int seq;
  } shape_t;
  shape_t shapes [16];
  int     seq_issue = 0, last_fin_seq = -1;

  // Check a finished request's data through the core's SPM port / the memory model.
  task automatic verify(input int id);
    shape_t s;
    bit ok, err;
    logic [63:0] d;
    s = shapes[id];
    ok = 1;
    for (int e = 0; e < s.count; e++)
      for (int b = 0; b < s.beats; b++) begin
        logic [63:0] ma;
        int sa;
        ma = s.mem + 64'(e * s.stride + 8 * b);
        sa = s.spm + 8 * (e * s.beats + b);
        spm_load(sa, d, err);
        if (s.write) begin
          if (u_mem.read_word(ma) !== d) ok = 0;
        end else begin
          if (d !== init_word(ma)) ok = 0;
        end
      end
    check(ok, $sformatf("data of request id %0d (write=%0b beats=%0d count=%0d stride=%0d)",
                        id, s.write, s.beats, s.count, s.stride));
    if (s.seq < last_fin_seq) n_out_of_order++;
    if (s.seq > last_fin_seq) last_fin_seq = s.seq;
  endtask

  task automatic wait_fin(input int id);
    logic [63:0] rd;
    int polls = 0;
    do begin
      exec(OP_GETFIN, 0, 0, 0, rd);
      if (rd == GETFIN_FAIL) n_getfin_fail++;
      polls++;
    end while (rd == GETFIN_FAIL && polls < 100000);
    check(rd == 64'(id), $sformatf("getfin returned %0d, expected %0d", rd, id));
  endtask

  logic [63:0] rd, d;
  bit ok, err;
  initial begin
    in_valid = 0; in_op = OP_GETFIN; in_rs1 = 0; in_rs2 = 0; in_csr = 0;
    spm_en = 0; spm_we = 0; spm_addr = 0; spm_be = 0; spm_wdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. basic example
    exec(OP_ALOAD, 64'h0, 64'h4000_0000, 0, rd);
    check(rd == 0, "first request gets id 0");
    shapes[0] = '{0, 'h0, 64'h4000_0000, 1, 1, 8, seq_issue++};
    wait_fin(0);
    spm_load('h0, d, err);
    check(d == init_word(64'h4000_0000) && !err, "basic example data read with a load");
    check(n_getfin_fail > 0, "getfin polled while the request was pending");

    // 2. large granularity: MAC1 = 64 beats, QoS 3
    exec(OP_CSRW, mac(64, 3, 0, 0), 0, 1, rd);
    exec(OP_CSRW, 64'd1, 0, 4, rd);
    exec(OP_CSRW, 64'hFEED_BEEF, 0, 12, rd);
    exec(OP_ALOAD, 64'h1000, 64'h4100_0000, 0, rd);
    shapes[rd] = '{0, 'h1000, 64'h4100_0000, 64, 1, 512, seq_issue++};
    wait_fin(int'(rd)); verify(int'(rd)); n_large++;
    check(u_mem.last_qos == 3 && u_mem.last_user == 64'hFEED_BEEF, "QoS label and SW0 reach memory");

    // 3. strided gather: MAC2 = 1 beat with PAT0 = 32 x 1 KiB
    exec(OP_CSRW, mac(1, 0, 1, 0), 0, 2, rd);
    exec(OP_CSRW, pat(32, 1024), 0, 8, rd);
    exec(OP_CSRW, 64'd2, 0, 4, rd);
    exec(OP_ALOAD, 64'h2000, 64'h4200_0000, 0, rd);
    shapes[rd] = '{0, 'h2000, 64'h4200_0000, 1, 32, 1024, seq_issue++};
    wait_fin(int'(rd)); verify(int'(rd)); n_strided++;

    //    and a long gather, 200 elements 64 bytes apart, which keeps every tag busy
    exec(OP_CSRW, pat(200, 64), 0, 8, rd);
    exec(OP_ALOAD, 64'h4000, 64'h4400_0000, 0, rd);
    shapes[rd] = '{0, 'h4000, 64'h4400_0000, 1, 200, 64, seq_issue++};
    wait_fin(int'(rd)); verify(int'(rd)); n_strided++;

    // 4. astore: SPM data from ordinary stores, MAC3 = 4 beats x PAT1 = 4 x 4 KiB
    for (int i = 0; i < 16; i++) spm_store('h3000 + 8 * i, 64'hA5A5_0000_0000_0000 | 64'(i));
    exec(OP_CSRW, mac(4, 1, 1, 1), 0, 3, rd);
    exec(OP_CSRW, pat(4, 4096), 0, 9, rd);
    exec(OP_CSRW, 64'd3, 0, 4, rd);
    exec(OP_ASTORE, 64'h3000, 64'h4300_0000, 0, rd);
    shapes[rd] = '{1, 'h3000, 64'h4300_0000, 4, 4, 4096, seq_issue++};
    wait_fin(int'(rd)); verify(int'(rd)); n_astore++;
    check(u_mem.read_word(64'h4300_1000) == (64'hA5A5_0000_0000_0000 | 64'd4), "astore word at stride");

    // 4b. sixteen aloads without collecting any: every id is taken and the next stalls
    exec(OP_CSRW, mac(2, 0, 0, 0), 0, 0, rd);
    exec(OP_CSRW, 64'd0, 0, 4, rd);
    for (int i = 0; i < 16; i++) begin
      exec(OP_ALOAD, 64'('h1_8000 + 64 * i), 64'h4500_0000 + 64'(256 * i), 0, rd);
      shapes[rd] = '{0, 'h1_8000 + 64 * i, 64'h4500_0000 + 64'(256 * i), 2, 1, 16, seq_issue++};
    end
    begin
      int stalls_seen;
      stalls_seen = n_stall;
      try_exec(OP_ALOAD, 64'h1_C000, 64'h4600_0000, 0, ok, rd);
      check(!ok && n_stall == stalls_seen + 1, "17th aload stalls with all 16 ids taken");
    end
    for (int i = 0; i < 16; i++) begin
      do exec(OP_GETFIN, 0, 0, 0, rd); while (rd == GETFIN_FAIL);
      verify(int'(rd));
    end

    // 5. event-driven: many requests in flight, polled with getfin. The program keeps
    //    16 SPM buffers of 4 KiB at 64 KiB and gives each request a free one.
    begin
      int issued = 0, finished = 0;
      bit slot_busy [16];
      int slot_of_id [16];
      foreach (slot_busy[i]) slot_busy[i] = 0;
      while (finished < 48) begin
        int slot;
        slot = -1;
        foreach (slot_busy[i]) if (!slot_busy[i] && slot < 0) slot = i;
        if (issued < 48 && slot >= 0) begin
          int beats, count, stride, spm, mac_n;
          bit wr;
          logic [63:0] mem;
          beats = 1 + int'($urandom % 16);
          count = 1 + int'($urandom % 6);
          stride = 8 * beats + 8 * int'($urandom % 64);
          wr = ($urandom % 4 == 0);
          mem = 64'h5000_0000 + 64'(issued) * 64'h10_0000;
          spm = 'h1_0000 + slot * 'h1000;
          // the instruction names MAC1..3 itself; DEFCFG still points at MAC0 (2 beats)
          mac_n = 1 + issued % 3;
          exec(OP_CSRW, mac(beats, issued % 16, 1, 2), 0, mac_n, rd);
          exec(OP_CSRW, pat(count, stride), 0, 10, rd);
          try_exec(wr ? OP_ASTORE : OP_ALOAD, 64'(spm), mem, int'(CFG_NAMED) + mac_n, ok, rd);
          if (ok) n_named++;
          if (ok) begin
            shapes[rd] = '{wr, spm, mem, beats, count, stride, seq_issue++};
            slot_busy[slot] = 1;
            slot_of_id[rd] = slot;
            issued++;
          end
        end
        // poll once
        exec(OP_GETFIN, 0, 0, 0, rd);
        if (rd == GETFIN_FAIL) n_getfin_fail++;
        else begin
          verify(int'(rd));
          slot_busy[slot_of_id[rd]] = 0;
          finished++;
        end
      end
    end

    // 6. SPM reconfiguration: one way of SPM, seven for the cache
    exec(OP_CSRR, 0, 0, 16, rd);
    check(rd == 4 && cache_way_mask == 8'hF0, "default: four SPM ways");
    exec(OP_CSRW, 64'd1, 0, 16, rd);
    @(negedge clk);
    check(cache_way_mask == 8'hFE, "one SPM way: seven ways back to the cache");
    spm_load(32'h8000, d, err);
    check(err, "load beyond the SPM refused");
    if (err) n_spm_refused++;
    spm_load(32'h7FF8, d, err);
    check(!err, "load at the SPM's last word accepted");
    exec(OP_CSRW, mac(1, 0, 0, 0), 0, 0, rd);
    exec(OP_CSRW, 64'd0, 0, 4, rd);
    exec(OP_ALOAD, 64'h9000, 64'h6000_0000, 0, rd);
    begin
      int id;
      id = int'(rd);
      wait_fin(id);
      check(engine_spm_err, "engine write beyond the SPM refused");
    end
    exec(OP_CSRW, 64'd8, 0, 16, rd);
    @(negedge clk);
    check(cache_way_mask == 8'h00, "whole L2 as SPM");
    n_reconfig++;

    // status after everything: all ids free, nothing queued
    exec(OP_CSRR, 0, 0, 17, rd);
    check(rd[31:24] == 16 && rd[23:0] == 0, "status: all ids free at the end");
    check(u_mem.errors == 0, "memory protocol");

    // mechanisms
    check(n_stall > 0, "issue stalled (ids or queue exhausted)");
    check(n_getfin_fail > 0, "getfin failure code seen");
    check(n_out_of_order > 0, "requests finished out of order");
    check(n_tags_full > 0, "tag table filled");
    check(n_large > 0 && n_strided > 0 && n_astore > 0, "large, strided and store requests");
    check(n_reconfig > 0 && n_spm_refused > 0, "SPM reconfigured");
    check(n_named > 0, "configuration named by the instruction");
    $display("stalls=%0d getfin_fail=%0d out_of_order=%0d tags_full_cycles=%0d named_cfg=%0d mem_reads=%0d mem_writes=%0d",
             n_stall, n_getfin_fail, n_out_of_order, n_tags_full, n_named, u_mem.n_rd, u_mem.n_wr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
