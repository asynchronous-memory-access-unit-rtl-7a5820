// amu_memacc: the AMU's pipeline-side part ("MemAcc" in the core): it executes the AMU
// instructions and holds the control registers and the two queues.
//
//   aload/astore  Take the lowest free request id, queue {id, SPM address (Rs1), memory
//                 address (Rs2), configuration in force} for the engine and return the id
//                 in Rd. The instruction can commit as soon as it is accepted; the data
//                 moves later. With no free id or a full request queue, in_ready is low and
//                 the pipeline stalls until an id is freed or the queue drains.
//                 The register field in_csr names the configuration: an instruction form
//                 that carries a MAC number sets the CFG_NAMED bit of in_csr and puts the
//                 number in in_csr[1:0]; with that bit clear, DEFCFG chooses the MAC.
//   getfin        Never blocks: returns the oldest finished id and frees it, or GETFIN_FAIL
//                 (all ones) when nothing has finished.
//   csrr/csrw     Read or write a control register (amu_ctrl_regs).
// Handshake: an instruction is taken in a cycle with in_valid && in_ready; its Rd value
// appears on res_data with res_valid one cycle later. Finished ids arrive from the engine
// on fin_valid/fin_id (fin_ready is high whenever the finished queue has room; it holds
// NUM_IDS entries so it never refuses one).
// The instruction behaviour follows the paper; ids, queue sizes, the failure code and the
// stall-on-full policy are this design's own.
module amu_memacc
  import amu_pkg::*;
#(
  parameter int unsigned NUM_IDS   = 16,
  parameter int unsigned REQ_DEPTH = 8,
  parameter int unsigned L2_WAYS   = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  // instruction port from the pipeline
  input  logic              in_valid,
  output logic              in_ready,
  input  amu_op_e           in_op,
  input  logic [XLEN-1:0]   in_rs1,
  input  logic [XLEN-1:0]   in_rs2,
  input  logic [CSR_AW-1:0] in_csr,
  output logic              res_valid,
  output logic [XLEN-1:0]   res_data,
  // requests to the engine
  output logic              req_valid,
  input  logic              req_ready,
  output amu_req_t          req,
  // finished ids from the engine
  input  logic              fin_valid,
  output logic              fin_ready,
  input  logic [ID_W-1:0]   fin_id,
  // SPM partition
  output logic [3:0]        spm_ways
);
  localparam int CW = $clog2(NUM_IDS + 1);

  // ---------------- id allocation ----------------
  logic [NUM_IDS-1:0] id_busy;
  logic               id_avail;
  logic [ID_W-1:0]    id_next;

  always_comb begin
    id_avail = 1'b0;
    id_next  = '0;
    for (int i = NUM_IDS - 1; i >= 0; i--)
      if (!id_busy[i]) begin
        id_avail = 1'b1;
        id_next  = ID_W'(i);
      end
  end

  // ---------------- queues ----------------
  logic                       rq_push, rq_full, rq_empty;
  amu_req_t                   rq_in;
  logic [$clog2(REQ_DEPTH+1)-1:0] rq_count;

  logic                       fq_pop, fq_full, fq_empty;
  logic [ID_W-1:0]            fq_out;
  logic [CW-1:0]              fq_count;

  amu_fifo #(.T(amu_req_t), .DEPTH(REQ_DEPTH)) u_req_q (
    .clk, .rst_n,
    .push(rq_push), .push_data(rq_in), .pop(req_valid && req_ready), .pop_data(req),
    .full(rq_full), .empty(rq_empty), .count(rq_count)
  );
  assign req_valid = !rq_empty;

  amu_fifo #(.T(logic [ID_W-1:0]), .DEPTH(NUM_IDS)) u_fin_q (
    .clk, .rst_n,
    .push(fin_valid && fin_ready), .push_data(fin_id), .pop(fq_pop), .pop_data(fq_out),
    .full(fq_full), .empty(fq_empty), .count(fq_count)
  );
  assign fin_ready = !fq_full;

  // ---------------- control registers ----------------
  logic            is_async;
  assign is_async = (in_op == OP_ALOAD) || (in_op == OP_ASTORE);
  amu_cfg_t        cfg;
  logic [XLEN-1:0] csr_rdata;
  status_t         status;
  logic [CW-1:0]   n_busy;

  always_comb begin
    n_busy = '0;
    for (int i = 0; i < NUM_IDS; i++) n_busy += CW'(id_busy[i]);
  end

  always_comb begin
    status           = '0;
    status.free_ids  = 8'(NUM_IDS) - 8'(n_busy);
    status.finished  = 8'(fq_count);
    status.in_flight = 8'(n_busy) - 8'(fq_count);
    status.queued    = 8'(rq_count);
  end

  amu_ctrl_regs #(.L2_WAYS(L2_WAYS)) u_regs (
    .clk, .rst_n,
    .csr_we(in_valid && in_ready && in_op == OP_CSRW),
    .csr_addr(in_csr), .csr_wdata(in_rs1), .csr_rdata,
    .status,
    .cfg_sel_en(is_async && (in_csr & CFG_NAMED) != 0), .cfg_sel(in_csr[1:0]),
    .cfg, .spm_ways
  );

  // ---------------- instruction execution ----------------
  logic fire;
  assign in_ready = !is_async || (id_avail && !rq_full);
  assign fire     = in_valid && in_ready;

  assign rq_push = fire && is_async;
  assign fq_pop  = fire && (in_op == OP_GETFIN) && !fq_empty;

  always_comb begin
    rq_in          = '0;
    rq_in.id       = id_next;
    rq_in.write    = (in_op == OP_ASTORE);
    rq_in.spm_addr = in_rs1[31:0];
    rq_in.mem_addr = in_rs2;
    rq_in.cfg      = cfg;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      id_busy   <= '0;
      res_valid <= 1'b0;
      res_data  <= '0;
    end else begin
      res_valid <= fire;
      if (fire) begin
        unique case (in_op)
          OP_ALOAD, OP_ASTORE: res_data <= XLEN'(id_next);
          OP_GETFIN:           res_data <= fq_empty ? GETFIN_FAIL : XLEN'(fq_out);
          OP_CSRR:             res_data <= csr_rdata;
          default:             res_data <= '0;
        endcase
      end
      if (rq_push) id_busy[id_next[$clog2(NUM_IDS)-1:0]] <= 1'b1;
      if (fq_pop)  id_busy[fq_out[$clog2(NUM_IDS)-1:0]]  <= 1'b0;
    end
  end

  a_fin_busy: assert property (@(posedge clk) disable iff (!rst_n)
                               fin_valid |-> id_busy[fin_id[$clog2(NUM_IDS)-1:0]]);
endmodule
