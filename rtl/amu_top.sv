// amu_top: the asynchronous memory access unit (AMU) of one core.
//
// It joins the three parts of the unit:
//   amu_memacc  in the core pipeline: executes aload/astore/getfin and the control
//               register accesses, allocates request ids, queues requests and finished ids.
//   amu_engine  in the L2 controller: executes queued requests in the background, moving
//               data between the SPM and memory through a tagged, out-of-order memory port.
//   amu_spm     the L2 data region whose lowest SPMWAYS ways form the SPM; the core reaches
//               it with ordinary loads and stores on the spm_* port, the engine on its own port.
// The pipeline that decodes the instructions, the caches, the memory bus and the memory
// behind it are outside: their connections are the ports below.
//   in_* / res_*     one AMU instruction per cycle when in_ready; Rd one cycle later.
//   spm_*            core load/store to the SPM, byte address, read data one cycle later.
//   cache_way_mask   L2 ways the cache may still use.
//   mreq_* / wd_* / rsp_*  memory port (see amu_pkg for the burst rules).
// The split into a pipeline part, an L2 part and a reconfigurable cache/SPM follows the
// paper's architecture figure; every size is this design's own.
module amu_top
  import amu_pkg::*;
#(
  parameter int unsigned NUM_IDS   = 16,
  parameter int unsigned REQ_DEPTH = 8,
  parameter int unsigned NUM_TAGS  = 32,
  parameter int unsigned L2_WAYS   = 8,
  parameter int unsigned WAY_WORDS = 4096
) (
  input  logic               clk,
  input  logic               rst_n,
  // AMU instructions
  input  logic               in_valid,
  output logic               in_ready,
  input  amu_op_e            in_op,
  input  logic [XLEN-1:0]    in_rs1,
  input  logic [XLEN-1:0]    in_rs2,
  input  logic [CSR_AW-1:0]  in_csr,
  output logic               res_valid,
  output logic [XLEN-1:0]    res_data,
  // core load/store to the SPM
  input  logic               spm_en,
  input  logic               spm_we,
  input  logic [31:0]        spm_addr,
  input  logic [7:0]         spm_be,
  input  logic [XLEN-1:0]    spm_wdata,
  output logic [XLEN-1:0]    spm_rdata,
  output logic               spm_err,
  output logic [L2_WAYS-1:0] cache_way_mask,
  output logic               engine_spm_err,   // engine's last SPM access fell outside the SPM
  // memory port
  output logic               mreq_valid,
  input  logic               mreq_ready,
  output mem_req_t           mreq,
  output logic               wd_valid,
  input  logic               wd_ready,
  output logic [XLEN-1:0]    wd_data,
  input  logic               rsp_valid,
  output logic               rsp_ready,
  input  mem_rsp_t           rsp
);
  logic            req_valid, req_ready;
  amu_req_t        req;
  logic            fin_valid, fin_ready;
  logic [ID_W-1:0] fin_id;
  logic [3:0]      spm_ways;

  logic            b_en, b_we;
  logic [28:0]     b_word;
  logic [XLEN-1:0] b_wdata, b_rdata;

  amu_memacc #(.NUM_IDS(NUM_IDS), .REQ_DEPTH(REQ_DEPTH), .L2_WAYS(L2_WAYS)) u_memacc (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_op, .in_rs1, .in_rs2, .in_csr, .res_valid, .res_data,
    .req_valid, .req_ready, .req,
    .fin_valid, .fin_ready, .fin_id,
    .spm_ways
  );

  amu_engine #(.NUM_IDS(NUM_IDS), .NUM_TAGS(NUM_TAGS)) u_engine (
    .clk, .rst_n,
    .req_valid, .req_ready, .req,
    .mreq_valid, .mreq_ready, .mreq,
    .wd_valid, .wd_ready, .wd_data,
    .rsp_valid, .rsp_ready, .rsp,
    .spm_en(b_en), .spm_we(b_we), .spm_word(b_word), .spm_wdata(b_wdata), .spm_rdata(b_rdata),
    .fin_valid, .fin_ready, .fin_id
  );

  amu_spm #(.WAYS(L2_WAYS), .WAY_WORDS(WAY_WORDS)) u_spm (
    .clk, .spm_ways, .cache_way_mask,
    .a_en(spm_en), .a_we(spm_we), .a_addr(spm_addr), .a_be(spm_be), .a_wdata(spm_wdata),
    .a_rdata(spm_rdata), .a_err(spm_err),
    .b_en, .b_we, .b_word, .b_wdata, .b_rdata, .b_err(engine_spm_err)
  );
endmodule
