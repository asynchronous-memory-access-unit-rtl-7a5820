// far_mem_model: behavioural model of far memory behind the AMU's memory port (the
// memory bus, controllers, remote fabric and DRAM are not part of the design).
// Each request gets its own random latency between MIN_LAT and MAX_LAT cycles, so
// responses come back out of order, and read bursts of different tags interleave beat by
// beat. Request and write-data channels apply random back-pressure. Writes take their
// data beats in request order and answer with one acknowledge beat. A word never written
// reads as init_word(address). Counters report what the model saw.
module far_mem_model
  import amu_pkg::*;
#(
  parameter int MIN_LAT  = 4,
  parameter int MAX_LAT  = 120,
  parameter int MAX_PEND = 48
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            mreq_valid,
  output logic            mreq_ready,
  input  mem_req_t        mreq,
  input  logic            wd_valid,
  output logic            wd_ready,
  input  logic [XLEN-1:0] wd_data,
  output logic            rsp_valid,
  input  logic            rsp_ready,
  output mem_rsp_t        rsp
);
  // pending answers, indexed by tag (tags are unique while in flight)
  bit          p_v     [256];
  bit          p_write [256];
  logic [63:0] p_addr  [256];
  int          p_beats [256];
  int          p_sent  [256];
  longint      p_due   [256];
  int          n_pend;

  logic [63:0] mem [logic [63:0]];
  mem_req_t    wq[$];        // writes waiting for their data
  int          wbeat;
  longint      now;

  // statistics
  int          n_req, n_rd, n_wr, n_beats_out, n_out_of_order, max_pend, errors;
  int          last_qos;
  logic [63:0] last_user;
  logic [TAG_W-1:0] issue_order[$];

  function automatic logic [63:0] init_word(input logic [63:0] a);
    return {a[31:0] ^ 32'h5A5A_C3C3, ~a[31:0]};
  endfunction

  function automatic logic [63:0] read_word(input logic [63:0] a);
    return mem.exists(a) ? mem[a] : init_word(a);
  endfunction

  function automatic int rand_lat();
    // mostly short, sometimes very long: a widely spread latency
    if ($urandom % 4 == 0) return MIN_LAT + int'($urandom % (MAX_LAT - MIN_LAT + 1));
    return MIN_LAT + int'($urandom % ((MAX_LAT - MIN_LAT) / 4 + 1));
  endfunction

  function automatic void add_pend(input int t, input bit w, input logic [63:0] a, input int beats);
    if (p_v[t]) errors++;
    p_v[t] = 1; p_write[t] = w; p_addr[t] = a; p_beats[t] = beats; p_sent[t] = 0;
    p_due[t] = now + longint'(rand_lat());
    n_pend++;
  endfunction

  initial begin
    mreq_ready = 0; wd_ready = 0; rsp_valid = 0; rsp = '0;
    now = 0; wbeat = 0; n_req = 0; n_rd = 0; n_wr = 0; n_beats_out = 0;
    n_out_of_order = 0; max_pend = 0; errors = 0; last_qos = 0; last_user = '0; n_pend = 0;
    for (int t = 0; t < 256; t++) begin
      p_v[t] = 0; p_write[t] = 0; p_addr[t] = '0; p_beats[t] = 0; p_sent[t] = 0; p_due[t] = 0;
    end
  end

  always @(posedge clk) begin
    if (!rst_n) begin
      mreq_ready <= 0; wd_ready <= 0; rsp_valid <= 0;
    end else begin
      now++;
      // beat delivered in the cycle that just ended
      if (rsp_valid) begin
        int t;
        t = int'(rsp.tag);
        if (!rsp_ready || !p_v[t]) errors++;
        p_sent[t]++;
        if (rsp.last) begin
          if (issue_order.size() > 0 && issue_order[0] != rsp.tag) n_out_of_order++;
          foreach (issue_order[j]) if (issue_order[j] == rsp.tag) begin
            issue_order.delete(j);
            break;
          end
          p_v[t] = 0;
          n_pend--;
        end
      end
      // new request
      if (mreq_valid && mreq_ready) begin
        n_req++;
        last_qos  = int'(mreq.qos);
        last_user = mreq.user;
        issue_order.push_back(mreq.tag);
        if (mreq.write) begin
          n_wr++;
          wq.push_back(mreq);
        end else begin
          n_rd++;
          add_pend(int'(mreq.tag), 1'b0, mreq.addr, int'(mreq.beats));
        end
      end
      // write data
      if (wd_valid && wd_ready) begin
        if (wq.size() == 0) errors++;
        else begin
          mem[{wq[0].addr[63:3], 3'b000} + 64'(8 * wbeat)] = wd_data;
          wbeat++;
          if (wbeat == int'(wq[0].beats)) begin
            add_pend(int'(wq[0].tag), 1'b1, wq[0].addr, 1);
            void'(wq.pop_front());
            wbeat = 0;
          end
        end
      end
      if (n_pend > max_pend) max_pend = n_pend;
      // choose the next response beat among the due entries, at random
      begin
        int due_idx[$];
        due_idx.delete();
        for (int t = 0; t < 256; t++) if (p_v[t] && p_due[t] <= now) due_idx.push_back(t);
        if (due_idx.size() > 0) begin
          int k;
          k = due_idx[$urandom % due_idx.size()];
          rsp_valid <= 1;
          rsp.tag   <= TAG_W'(k);
          rsp.last  <= p_write[k] || (p_sent[k] + 1 == p_beats[k]);
          rsp.data  <= p_write[k] ? 64'd0
                       : read_word({p_addr[k][63:3], 3'b000} + 64'(8 * p_sent[k]));
          n_beats_out++;
        end else begin
          rsp_valid <= 0;
        end
      end
      mreq_ready <= ($urandom % 4 != 0) && (n_pend + wq.size() < MAX_PEND);
      wd_ready   <= ($urandom % 4 != 0);
    end
  end
endmodule
