// amu_engine: the AMU logic inside the L2 controller. It takes queued aload/astore
// requests and moves their data between the SPM and memory in the background, while the
// core goes on executing.
//
// A request covers 'count' elements of 'beats' 8-byte beats each. Element i sits at
// memory address mem_addr + i*stride and at SPM word spm_addr/8 + i*beats, so a strided
// gather/scatter in memory becomes a dense block in the SPM; a stream is stride = element
// size. The issue side walks one request at a time, element by element:
//   * It takes a free transaction tag, and sends one memory request per element (a burst
//     of 'beats' beats) carrying the tag, the QoS label and the software-defined user word.
//   * For a store it then streams the element's beats out of SPM port B on the write-data
//     channel, one beat per cycle when the memory accepts them.
// The response side is independent of the issue side: responses of different tags may
// come back in any order and interleave, as far memory with widely spread latency
// returns them. A read beat is written into the SPM at the tag's next word; the last
// beat, or the single write acknowledge, frees the tag and lowers its request's
// outstanding-element count. Response writes have priority on SPM port B; a store beat
// read waits a cycle when they collide. rsp_ready is always high.
// A request has finished when all its elements were issued and none is outstanding;
// finished ids are reported one per cycle (lowest id first) on fin_valid/fin_id.
// Up to NUM_TAGS element transfers of any number of requests are in flight at once.
// The paper says this logic manages and executes the asynchronous requests and moves the
// data between SPM and far memory; the tag table, the element walk, the memory port and
// all sizes are this design's own.
module amu_engine
  import amu_pkg::*;
#(
  parameter int unsigned NUM_IDS  = 16,
  parameter int unsigned NUM_TAGS = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  // requests from the pipeline-side queue
  input  logic              req_valid,
  output logic              req_ready,
  input  amu_req_t          req,
  // memory request channel
  output logic              mreq_valid,
  input  logic              mreq_ready,
  output mem_req_t          mreq,
  // memory write-data channel
  output logic              wd_valid,
  input  logic              wd_ready,
  output logic [XLEN-1:0]   wd_data,
  // memory response channel
  input  logic              rsp_valid,
  output logic              rsp_ready,
  input  mem_rsp_t          rsp,
  // SPM port B
  output logic              spm_en,
  output logic              spm_we,
  output logic [28:0]       spm_word,
  output logic [XLEN-1:0]   spm_wdata,
  input  logic [XLEN-1:0]   spm_rdata,
  // finished ids
  output logic              fin_valid,
  input  logic              fin_ready,
  output logic [ID_W-1:0]   fin_id
);
  localparam int IDW = (NUM_IDS  > 1) ? $clog2(NUM_IDS)  : 1;
  localparam int TW  = (NUM_TAGS > 1) ? $clog2(NUM_TAGS) : 1;

  // ---------------- per-request state ----------------
  logic [NUM_IDS-1:0] active;      // accepted, not yet reported finished
  logic [NUM_IDS-1:0] issued_all;  // every element has been issued
  logic [16:0]        outstanding [NUM_IDS];

  // ---------------- tag table ----------------
  logic [NUM_TAGS-1:0] tag_busy;
  logic [IDW-1:0]      tag_id    [NUM_TAGS];
  logic [28:0]         tag_word  [NUM_TAGS];   // SPM word of the element's next beat
  logic                tag_write [NUM_TAGS];

  logic          tag_avail;
  logic [TW-1:0] tag_free;
  always_comb begin
    tag_avail = 1'b0;
    tag_free  = '0;
    for (int t = NUM_TAGS - 1; t >= 0; t--)
      if (!tag_busy[t]) begin
        tag_avail = 1'b1;
        tag_free  = TW'(t);
      end
  end

  // ---------------- issue side ----------------
  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_WDATA} state_e;
  state_e      state;
  amu_req_t    cur;
  logic [15:0] elem;          // element being issued
  logic [63:0] elem_addr;     // its memory address
  logic [28:0] elem_word;     // its first SPM word
  logic [7:0]  rd_beat;       // store beats read from the SPM
  logic [7:0]  wr_beat;       // store beats accepted by memory
  logic        rd_pend;       // SPM read data for wd arrives this cycle
  logic        hold_v;        // store beat parked in hold_d
  logic [XLEN-1:0] hold_d;

  logic [IDW-1:0] cur_id;
  assign cur_id = cur.id[IDW-1:0];

  assign req_ready = (state == S_IDLE);

  // Once offered, a request keeps its tag until the memory takes it.
  logic          tag_lock_v;
  logic [TW-1:0] tag_lock, tag_sel;
  assign tag_sel = tag_lock_v ? tag_lock : tag_free;

  assign mreq_valid = (state == S_ISSUE) && (tag_avail || tag_lock_v);
  always_comb begin
    mreq       = '0;
    mreq.tag   = TAG_W'(tag_sel);
    mreq.write = cur.write;
    mreq.addr  = elem_addr;
    mreq.beats = cur.cfg.beats;
    mreq.qos   = cur.cfg.qos;
    mreq.user  = cur.cfg.user;
  end
  logic issue_fire;
  assign issue_fire = mreq_valid && mreq_ready;

  // Response side decode.
  logic          rsp_fire, rsp_is_wr, rsp_done;
  logic [TW-1:0] rtag;
  logic [IDW-1:0] rid;
  assign rsp_ready = 1'b1;
  assign rsp_fire  = rsp_valid;
  assign rtag      = rsp.tag[TW-1:0];
  assign rid       = tag_id[rtag];
  assign rsp_is_wr = rsp_fire && !tag_write[rtag];   // read data goes into the SPM
  assign rsp_done  = rsp_fire && rsp.last;

  // Store data: present the SPM read data directly, or a parked beat.
  assign wd_valid = rd_pend || hold_v;
  assign wd_data  = hold_v ? hold_d : spm_rdata;
  logic wd_fire, rd_issue, last_beat;
  assign wd_fire   = wd_valid && wd_ready;
  assign last_beat = wd_fire && (wr_beat == cur.cfg.beats - 8'd1);
  assign rd_issue  = (state == S_WDATA) && (rd_beat != cur.cfg.beats) && !rsp_is_wr &&
                     (wd_ready || !wd_valid);

  // SPM port B: response writes first, then store reads.
  always_comb begin
    spm_en    = rsp_is_wr || rd_issue;
    spm_we    = rsp_is_wr;
    spm_word  = rsp_is_wr ? tag_word[rtag] : elem_word + 29'(rd_beat);
    spm_wdata = rsp.data;
  end

  // Element finished issuing (read: request accepted; write: last data beat accepted).
  logic elem_done, last_elem;
  assign elem_done = (state == S_ISSUE && issue_fire && !cur.write) ||
                     (state == S_WDATA && last_beat);
  assign last_elem = (elem == cur.cfg.count - 16'd1);

  // ---------------- finished ids ----------------
  logic [NUM_IDS-1:0] finishable;
  always_comb
    for (int i = 0; i < NUM_IDS; i++)
      finishable[i] = active[i] && issued_all[i] && (outstanding[i] == '0);

  always_comb begin
    fin_valid = 1'b0;
    fin_id    = '0;
    for (int i = NUM_IDS - 1; i >= 0; i--)
      if (finishable[i]) begin
        fin_valid = 1'b1;
        fin_id    = ID_W'(i);
      end
  end

  logic [NUM_IDS-1:0] id_inc, id_dec;
  always_comb
    for (int i = 0; i < NUM_IDS; i++) begin
      id_inc[i] = issue_fire && (cur_id == IDW'(i));
      id_dec[i] = rsp_done && (rid == IDW'(i));
    end

  // ---------------- state update ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      cur        <= '0;
      elem       <= '0;
      elem_addr  <= '0;
      elem_word  <= '0;
      rd_beat    <= '0;
      wr_beat    <= '0;
      rd_pend    <= 1'b0;
      hold_v     <= 1'b0;
      hold_d     <= '0;
      tag_lock_v <= 1'b0;
      tag_lock   <= '0;
      active     <= '0;
      issued_all <= '0;
      tag_busy   <= '0;
      for (int i = 0; i < NUM_IDS; i++) outstanding[i] <= '0;
      for (int t = 0; t < NUM_TAGS; t++) begin
        tag_id[t]    <= '0;
        tag_word[t]  <= '0;
        tag_write[t] <= 1'b0;
      end
    end else begin
      if (mreq_valid && !mreq_ready) begin
        tag_lock_v <= 1'b1;
        tag_lock   <= tag_sel;
      end else begin
        tag_lock_v <= 1'b0;
      end

      // store data pipeline
      rd_pend <= rd_issue;
      if (rd_pend && !wd_ready && !hold_v) begin
        hold_v <= 1'b1;
        hold_d <= spm_rdata;
      end else if (hold_v && wd_ready) begin
        hold_v <= 1'b0;
      end
      if (rd_issue) rd_beat <= rd_beat + 8'd1;
      if (wd_fire)  wr_beat <= wr_beat + 8'd1;

      // finished id reported
      if (fin_valid && fin_ready) active[fin_id[IDW-1:0]] <= 1'b0;

      // responses
      if (rsp_is_wr) tag_word[rtag] <= tag_word[rtag] + 29'd1;
      if (rsp_done)  tag_busy[rtag] <= 1'b0;

      // outstanding counts: +1 on issue, -1 on a finished element
      for (int i = 0; i < NUM_IDS; i++) begin
        if (id_inc[i] && !id_dec[i])      outstanding[i] <= outstanding[i] + 17'd1;
        else if (id_dec[i] && !id_inc[i]) outstanding[i] <= outstanding[i] - 17'd1;
      end

      unique case (state)
        S_IDLE: if (req_valid) begin
          cur       <= req;
          elem      <= '0;
          elem_addr <= req.mem_addr;
          elem_word <= req.spm_addr[31:3];
          active[req.id[IDW-1:0]]     <= 1'b1;
          issued_all[req.id[IDW-1:0]] <= (req.cfg.count == '0);
          if (req.cfg.count != '0) state <= S_ISSUE;
        end
        S_ISSUE: if (issue_fire) begin
          tag_busy[tag_sel]  <= 1'b1;
          tag_id[tag_sel]    <= cur_id;
          tag_word[tag_sel]  <= elem_word;
          tag_write[tag_sel] <= cur.write;
          if (cur.write) begin
            state   <= S_WDATA;
            rd_beat <= '0;
            wr_beat <= '0;
          end
        end
        S_WDATA: ;
        default: state <= S_IDLE;
      endcase

      if (elem_done) begin
        elem      <= elem + 16'd1;
        elem_addr <= elem_addr + 64'(cur.cfg.stride);
        elem_word <= elem_word + 29'(cur.cfg.beats);
        if (last_elem) begin
          issued_all[cur_id] <= 1'b1;
          state <= S_IDLE;
        end else begin
          state <= S_ISSUE;
        end
      end
    end
  end

  // Handshake rules of the memory port.
  a_mreq_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                  mreq_valid && !mreq_ready |=> mreq_valid && $stable(mreq));
  a_wd_stable:   assert property (@(posedge clk) disable iff (!rst_n)
                                  wd_valid && !wd_ready |=> wd_valid && $stable(wd_data));
  // A response must name a tag that is in flight.
  always_ff @(posedge clk)
    if (rst_n && rsp_valid) a_rsp_known: assert (tag_busy[rtag]);
endmodule
