// tb_amu_engine: self-checking test of the AMU engine against the far-memory model and a
// testbench SPM array. It sends loads of one beat, of large granularity and with a
// strided pattern, stores, an empty (count 0) request and a burst of requests that uses
// up every tag. When an id is reported finished, all of its data must already be in
// place: SPM words for loads (compared with the model's initial memory contents) and
// memory words for stores (compared with what the SPM held). Each id must finish once.
module tb_amu_engine;
  import amu_pkg::*;

  localparam int NUM_IDS  = 16;
  localparam int NUM_TAGS = 8;
  localparam int SPM_WORDS = 4096;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid, req_ready;
  amu_req_t req;
  logic mreq_valid, mreq_ready;
  mem_req_t mreq;
  logic wd_valid, wd_ready;
  logic [XLEN-1:0] wd_data;
  logic rsp_valid, rsp_ready;
  mem_rsp_t rsp;
  logic spm_en, spm_we;
  logic [28:0] spm_word;
  logic [XLEN-1:0] spm_wdata, spm_rdata;
  logic fin_valid, fin_ready;
  logic [ID_W-1:0] fin_id;

  amu_engine #(.NUM_IDS(NUM_IDS), .NUM_TAGS(NUM_TAGS)) dut (.*);
  far_mem_model #(.MIN_LAT(3), .MAX_LAT(150)) u_mem (
    .clk, .rst_n, .mreq_valid, .mreq_ready, .mreq, .wd_valid, .wd_ready, .wd_data,
    .rsp_valid, .rsp_ready, .rsp);

  // testbench SPM
  logic [63:0] spm [SPM_WORDS];
  always @(posedge clk) begin
    if (spm_en && spm_we) spm[spm_word % SPM_WORDS] <= spm_wdata;
    if (spm_en) spm_rdata <= spm[spm_word % SPM_WORDS];
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic logic [63:0] init_word(input logic [63:0] a);
    return {a[31:0] ^ 32'h5A5A_C3C3, ~a[31:0]};
  endfunction

  amu_req_t sent_req [NUM_IDS];
  int       fin_seen [NUM_IDS];
  int       n_fin = 0, n_sent = 0, tag_full_cycles = 0;

  // Check the data of a request when it is reported finished.
  always @(posedge clk) if (rst_n && fin_valid && fin_ready) begin
    amu_req_t r;
    bit ok;
    r = sent_req[fin_id];
    fin_seen[fin_id]++;
    n_fin++;
    check(fin_seen[fin_id] == 1, $sformatf("id %0d finished once", fin_id));
    ok = 1;
    for (int e = 0; e < int'(r.cfg.count); e++)
      for (int b = 0; b < int'(r.cfg.beats); b++) begin
        logic [63:0] maddr;
        int sw;
        maddr = {r.mem_addr[63:3], 3'b0} + 64'(e) * 64'(r.cfg.stride) + 64'(8 * b);
        sw    = int'(r.spm_addr[31:3]) + e * int'(r.cfg.beats) + b;
        if (r.write) begin
          if (u_mem.read_word(maddr) !== spm[sw]) ok = 0;
        end else begin
          if (spm[sw] !== init_word(maddr)) ok = 0;
        end
      end
    check(ok, $sformatf("data of id %0d (write=%0b count=%0d beats=%0d)", fin_id, r.write,
                        r.cfg.count, r.cfg.beats));
  end

  // element transfers in flight, seen from the ports: the tag table is full at NUM_TAGS
  int in_flight = 0;
  always @(posedge clk) if (rst_n) begin
    in_flight += int'(mreq_valid && mreq_ready) - int'(rsp_valid && rsp.last);
    if (in_flight == NUM_TAGS) tag_full_cycles++;
    if (in_flight > NUM_TAGS) begin
      failures++;
      $display("FAIL: more than NUM_TAGS transfers in flight");
    end
  end

  task automatic send(input int id, input bit wr, input int spm_a, input logic [63:0] mem_a,
                      input int beats, input int count, input int stride);
    amu_req_t r;
    r = '0;
    r.id = ID_W'(id); r.write = wr; r.spm_addr = 32'(spm_a); r.mem_addr = mem_a;
    r.cfg.beats = 8'(beats); r.cfg.count = 16'(count); r.cfg.stride = 32'(stride);
    r.cfg.qos = 4'(id); r.cfg.user = 64'hC0DE_0000 + 64'(id);
    sent_req[id] = r;
    fin_seen[id] = 0;
    @(negedge clk);
    req_valid = 1; req = r;
    do @(posedge clk); while (!req_ready);
    #1 req_valid = 0;
    n_sent++;
  endtask

  initial begin
    req_valid = 0; req = '0; fin_ready = 1;
    for (int i = 0; i < SPM_WORDS; i++) spm[i] = 64'hDEAD_0000_0000_0000 | 64'(i);
    repeat (3) @(posedge clk);
    rst_n = 1;
    // single beat load, large granularity load, strided gather
    send(0, 0, 'h000, 64'h1_0000, 1, 1, 8);
    send(1, 0, 'h100, 64'h2_0000, 32, 1, 256);
    send(2, 0, 'h400, 64'h3_0000, 2, 8, 512);
    // stores of SPM data that was not touched by the loads
    send(3, 1, 'h4000, 64'h8_0000, 4, 3, 64);
    send(4, 1, 'h5000, 64'h9_0000, 1, 6, 4096);
    // empty request
    send(5, 0, 'h6000, 64'hA_0000, 1, 0, 8);
    // burst: more elements in flight than tags
    for (int i = 6; i < 16; i++)
      send(i, (i % 3 == 0), 'h6000 + 'h200 * i, 64'h10_0000 + 64'h1000 * i, 1 + i % 4, 4, 64);
    wait (n_fin == n_sent);
    repeat (10) @(posedge clk);
    check(n_fin == 16, "all 16 requests finished");
    check(u_mem.n_out_of_order > 0, "memory answered out of order");
    check(tag_full_cycles > 0, "tag table was full at least once");
    check(u_mem.errors == 0, "memory protocol");
    check(u_mem.last_user == 64'hC0DE_0000 + 64'd15, "user word forwarded");
    check(u_mem.last_qos == 15, "QoS label forwarded");
    $display("out_of_order=%0d tag_full_cycles=%0d reads=%0d writes=%0d", u_mem.n_out_of_order,
             tag_full_cycles, u_mem.n_rd, u_mem.n_wr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
