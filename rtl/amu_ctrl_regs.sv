// amu_ctrl_regs: the AMU's control registers, kept next to the core pipeline so that
// programs can set up requests and read the accelerator's state quickly.
//
// Registers (numbers in amu_pkg):
//   MAC0..MAC3   memory access configuration: granularity (beats per element), QoS label,
//                and whether/which access pattern register applies.
//   DEFCFG       default configuration: which MAC register an aload/astore uses when the
//                instruction does not name one itself (cfg_sel_en low).
//   PAT0..PAT3   access pattern: element count and stride (a stream is stride = granularity).
//   SW0..SW3     software-defined; SW0 travels with every memory request as user data for
//                a message-based memory system.
//   SPMWAYS      how many L2 ways serve as SPM (written values above L2_WAYS are clamped).
//   STATUS       read-only snapshot of the id and queue counters (status_t).
// Writes take effect at the next clock edge; reads and the derived 'cfg' are
// combinational. 'cfg' is built from MAC[cfg_sel] when cfg_sel_en is high, else from
// MAC[DEFCFG]. Reset: MACs select one 8-byte beat, no pattern, QoS 0; DEFCFG 0;
// patterns, software registers 0; SPMWAYS = L2_WAYS/2.
// The kinds of register follow the paper; numbers, fields and reset values are this
// design's own, as are the counts of each register.
module amu_ctrl_regs
  import amu_pkg::*;
#(
  parameter int unsigned NUM_MAC = 4,
  parameter int unsigned NUM_PAT = 4,
  parameter int unsigned NUM_SW  = 4,
  parameter int unsigned L2_WAYS = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              csr_we,
  input  logic [CSR_AW-1:0] csr_addr,
  input  logic [XLEN-1:0]   csr_wdata,
  output logic [XLEN-1:0]   csr_rdata,
  input  status_t           status,
  input  logic              cfg_sel_en,
  input  logic [1:0]        cfg_sel,
  output amu_cfg_t          cfg,
  output logic [3:0]        spm_ways
);
  mac_t            mac    [NUM_MAC];
  pat_t            pat    [NUM_PAT];
  logic [XLEN-1:0] sw     [NUM_SW];
  logic [1:0]      defcfg;

  localparam logic [3:0] WAYS4 = 4'(L2_WAYS);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_MAC; i++) mac[i] <= '{beats: 8'd1, default: '0};
      for (int i = 0; i < NUM_PAT; i++) pat[i] <= '0;
      for (int i = 0; i < NUM_SW; i++)  sw[i]  <= '0;
      defcfg   <= '0;
      spm_ways <= 4'(L2_WAYS / 2);
    end else if (csr_we) begin
      for (int i = 0; i < NUM_MAC; i++)
        if (csr_addr == CSR_MAC0 + CSR_AW'(i)) mac[i] <= mac_t'(csr_wdata);
      for (int i = 0; i < NUM_PAT; i++)
        if (csr_addr == CSR_PAT0 + CSR_AW'(i)) pat[i] <= pat_t'(csr_wdata);
      for (int i = 0; i < NUM_SW; i++)
        if (csr_addr == CSR_SW0 + CSR_AW'(i)) sw[i] <= csr_wdata;
      if (csr_addr == CSR_DEFCFG)  defcfg <= 2'(csr_wdata[1:0] % NUM_MAC);
      if (csr_addr == CSR_SPMWAYS)
        spm_ways <= (csr_wdata[XLEN-1:4] != '0 || csr_wdata[3:0] > WAYS4) ? WAYS4 : csr_wdata[3:0];
    end
  end

  always_comb begin
    csr_rdata = '0;
    for (int i = 0; i < NUM_MAC; i++) if (csr_addr == CSR_MAC0 + CSR_AW'(i)) csr_rdata = XLEN'(mac[i]);
    for (int i = 0; i < NUM_PAT; i++) if (csr_addr == CSR_PAT0 + CSR_AW'(i)) csr_rdata = XLEN'(pat[i]);
    for (int i = 0; i < NUM_SW; i++)  if (csr_addr == CSR_SW0 + CSR_AW'(i))  csr_rdata = sw[i];
    if (csr_addr == CSR_DEFCFG)  csr_rdata = XLEN'(defcfg);
    if (csr_addr == CSR_SPMWAYS) csr_rdata = XLEN'(spm_ways);
    if (csr_addr == CSR_STATUS)  csr_rdata = XLEN'(status);
  end

  // Effective configuration for the next aload/astore.
  mac_t       sel_mac;
  pat_t       sel_pat;
  logic [1:0] mac_idx;
  always_comb begin
    mac_idx    = cfg_sel_en ? cfg_sel : defcfg;
    sel_mac    = mac[32'(mac_idx) % NUM_MAC];
    sel_pat    = pat[32'(sel_mac.pat_idx) % NUM_PAT];
    cfg.beats  = (sel_mac.beats == 0) ? 8'd1 : sel_mac.beats;
    cfg.qos    = sel_mac.qos;
    cfg.user   = sw[0];
    if (sel_mac.pat_en) begin
      cfg.count  = sel_pat.count;
      cfg.stride = sel_pat.stride;
    end else begin
      cfg.count  = 16'd1;
      cfg.stride = 32'(cfg.beats) * BEAT_BYTES;
    end
  end
endmodule
