// tb_amu_memacc: self-checking test of the pipeline-side AMU. The testbench plays both the
// pipeline (issuing instructions) and the engine (taking requests, reporting finished
// ids). Checks: aload/astore return the lowest free id and queue a request with the
// operands and the configuration in force (DEFCFG's MAC, or the MAC the instruction
// names); getfin returns GETFIN_FAIL when nothing has
// finished and otherwise finished ids in the order they were reported, freeing them;
// issue stalls when all ids are taken and when the request queue is full; status counts.
module tb_amu_memacc;
  import amu_pkg::*;
  localparam int NUM_IDS = 4, REQ_DEPTH = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, res_valid, req_valid, req_ready, fin_valid, fin_ready;
  amu_op_e in_op;
  logic [XLEN-1:0] in_rs1, in_rs2, res_data;
  logic [CSR_AW-1:0] in_csr;
  amu_req_t req;
  logic [ID_W-1:0] fin_id;
  logic [3:0] spm_ways;
  amu_memacc #(.NUM_IDS(NUM_IDS), .REQ_DEPTH(REQ_DEPTH)) dut (.*);

  int checks = 0, failures = 0, stall_ids = 0, stall_queue = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Issue one instruction; returns Rd and the number of cycles it was stalled.
  task automatic exec(input amu_op_e op, input logic [63:0] rs1, input logic [63:0] rs2,
                      input int csr, output logic [63:0] rd, output int stalled);
    @(negedge clk);
    in_valid = 1; in_op = op; in_rs1 = rs1; in_rs2 = rs2; in_csr = CSR_AW'(csr);
    stalled = 0;
    #1;
    while (!in_ready) begin
      stalled++;
      @(negedge clk);
      #1;
      if (stalled > 50) break;
    end
    @(posedge clk);
    #1 in_valid = 0;
    check(res_valid, "result one cycle after issue");
    rd = res_data;
  endtask

  amu_req_t got[$];
  always @(posedge clk) if (rst_n && req_valid && req_ready) got.push_back(req);

  task automatic finish_id(input int id);
    @(negedge clk); fin_valid = 1; fin_id = ID_W'(id);
    @(posedge clk); #1 fin_valid = 0;
  endtask

  logic [63:0] rd;
  int st;
  initial begin
    in_valid = 0; in_op = OP_GETFIN; in_rs1 = 0; in_rs2 = 0; in_csr = 0;
    req_ready = 1; fin_valid = 0; fin_id = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // getfin with nothing finished
    exec(OP_GETFIN, 0, 0, 0, rd, st);
    check(rd == GETFIN_FAIL, "getfin fails when nothing finished");
    // configure: MAC1 = 4 beats, QoS 9, pattern 2; PAT2 = 5 x 128; DEFCFG = 1; SW0
    exec(OP_CSRW, {49'd0, 2'd2, 1'b1, 4'd9, 8'd4}, 0, 1, rd, st);
    exec(OP_CSRW, {16'd0, 16'd5, 32'd128}, 0, 10, rd, st);
    exec(OP_CSRW, 64'd1, 0, 4, rd, st);
    exec(OP_CSRW, 64'h5EED, 0, 12, rd, st);
    exec(OP_CSRR, 0, 0, 1, rd, st);
    check(rd == {49'd0, 2'd2, 1'b1, 4'd9, 8'd4}, "csrr MAC1");
    // aload / astore
    exec(OP_ALOAD, 64'h40, 64'h1234_5678, 0, rd, st);
    check(rd == 0, "first id is 0");
    exec(OP_ASTORE, 64'h80, 64'h9999_0000, 0, rd, st);
    check(rd == 1, "second id is 1");
    repeat (2) @(posedge clk);
    check(got.size() == 2, "two requests queued");
    if (got.size() == 2) begin
      check(got[0].id == 0 && !got[0].write && got[0].spm_addr == 32'h40 && got[0].mem_addr == 64'h1234_5678,
            "aload request fields");
      check(got[1].id == 1 && got[1].write && got[1].spm_addr == 32'h80 && got[1].mem_addr == 64'h9999_0000,
            "astore request fields");
      check(got[0].cfg.beats == 4 && got[0].cfg.qos == 9 && got[0].cfg.count == 5 &&
            got[0].cfg.stride == 128 && got[0].cfg.user == 64'h5EED, "request configuration");
    end
    // an aload that names MAC2 (1 beat, no pattern) overrides DEFCFG = 1
    exec(OP_CSRW, 64'd1, 0, 2, rd, st);
    exec(OP_ALOAD, 64'h400, 64'h8000, int'(CFG_NAMED) + 2, rd, st);
    check(rd == 2, "third id is 2");
    repeat (2) @(posedge clk);
    check(got.size() == 3 && got[2].cfg.beats == 1 && got[2].cfg.count == 1 && got[2].cfg.stride == 8,
          "aload naming MAC2 uses MAC2, not DEFCFG");
    finish_id(2);
    exec(OP_GETFIN, 0, 0, 0, rd, st); check(rd == 2, "getfin returns 2");
    // status: 2 in flight, 2 free
    exec(OP_CSRR, 0, 0, 17, rd, st);
    check(rd[31:24] == 2 && rd[15:8] == 2 && rd[23:16] == 0, "status after two aloads");
    // finish 1 then 0: getfin returns them in that order
    finish_id(1);
    finish_id(0);
    exec(OP_CSRR, 0, 0, 17, rd, st);
    check(rd[23:16] == 2 && rd[15:8] == 0, "status: two finished");
    exec(OP_GETFIN, 0, 0, 0, rd, st); check(rd == 1, "getfin returns 1 first");
    exec(OP_GETFIN, 0, 0, 0, rd, st); check(rd == 0, "getfin returns 0 next");
    exec(OP_GETFIN, 0, 0, 0, rd, st); check(rd == GETFIN_FAIL, "getfin empty again");
    // run out of ids: 4 aloads take ids 0..3, the 5th stalls until one id is freed by getfin
    for (int i = 0; i < NUM_IDS; i++) begin
      exec(OP_ALOAD, 64'(i * 8), 64'(i * 64), 0, rd, st);
      check(rd == 64'(i), $sformatf("id %0d allocated", i));
    end
    // a 5th aload is held off while no id is free
    @(negedge clk);
    in_valid = 1; in_op = OP_ALOAD; in_rs1 = 64'h100; in_rs2 = 64'h200;
    repeat (5) begin
      @(negedge clk);
      check(!in_ready, "aload stalls without a free id");
      if (!in_ready) stall_ids++;
    end
    in_valid = 0;
    finish_id(2);
    exec(OP_GETFIN, 0, 0, 0, rd, st);
    check(rd == 2, $sformatf("getfin returns 2 (got %0h)", rd));
    exec(OP_ALOAD, 64'h100, 64'h200, 0, rd, st);
    check(rd == 2 && st == 0, "freed id 2 reused");
    // request queue full: engine stops taking requests
    for (int i = 0; i < NUM_IDS; i++) begin
      finish_id(i);
      exec(OP_GETFIN, 0, 0, 0, rd, st);
    end
    req_ready = 0;
    for (int i = 0; i < REQ_DEPTH; i++) exec(OP_ALOAD, 0, 0, 0, rd, st);
    fork
      begin exec(OP_ALOAD, 0, 0, 0, rd, st); if (st > 0) stall_queue++; end
      begin repeat (5) @(posedge clk); req_ready = 1; end
    join
    check(stall_ids > 0, "stall on id exhaustion happened");
    check(stall_queue > 0, "stall on full request queue happened");
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
