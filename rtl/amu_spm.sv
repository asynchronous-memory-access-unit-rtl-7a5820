// amu_spm: the L2 data region shared between the L2 cache and the scratchpad memory (SPM).
//
// The array is WAYS ways of WAY_WORDS 8-byte words. Software gives the lowest 'spm_ways'
// ways to the SPM and the rest stay with the cache: cache_way_mask has a 1 for each way
// the cache may still allocate into. SPM byte address a maps to word a/8, so the SPM is
// one linear space of spm_ways*WAY_WORDS*8 bytes; an access beyond it is refused
// (no write, read data 0, a_err/b_err high with the data).
//   Port A: ordinary load/store from the core (byte address, byte enables).
//   Port B: the AMU engine (word address, whole words).
// Both ports read with one cycle of latency. If both write the same word in one cycle,
// port B's data is kept. Moving the boundary does not flush the cache ways handed over;
// that is left to the cache, which is not part of this design.
// That a part of the cache can be made SPM is the paper's; the way-granular split, the
// two ports and the sizes are this design's own choices.
module amu_spm
  import amu_pkg::*;
#(
  parameter int unsigned WAYS      = 8,
  parameter int unsigned WAY_WORDS = 4096
) (
  input  logic              clk,
  input  logic [3:0]        spm_ways,
  output logic [WAYS-1:0]   cache_way_mask,
  // port A: core load/store
  input  logic              a_en,
  input  logic              a_we,
  input  logic [31:0]       a_addr,
  input  logic [7:0]        a_be,
  input  logic [XLEN-1:0]   a_wdata,
  output logic [XLEN-1:0]   a_rdata,
  output logic              a_err,
  // port B: AMU engine
  input  logic              b_en,
  input  logic              b_we,
  input  logic [28:0]       b_word,
  input  logic [XLEN-1:0]   b_wdata,
  output logic [XLEN-1:0]   b_rdata,
  output logic              b_err
);
  localparam int unsigned WORDS = WAYS * WAY_WORDS;
  localparam int          WAW   = $clog2(WORDS);

  logic [XLEN-1:0] mem [WORDS];

  logic [31:0] limit;
  assign limit = 32'(spm_ways) * 32'(WAY_WORDS);

  always_comb
    for (int w = 0; w < WAYS; w++) cache_way_mask[w] = (32'(w) >= 32'(spm_ways));

  logic [28:0] a_word;
  logic        a_ok, b_ok;
  assign a_word = a_addr[31:3];
  assign a_ok   = 32'(a_word) < limit;
  assign b_ok   = 32'(b_word) < limit;

  logic [WAW-1:0] a_idx, b_idx;
  assign a_idx = a_word[WAW-1:0];
  assign b_idx = b_word[WAW-1:0];

  always_ff @(posedge clk) begin
    if (a_en && a_we && a_ok && !(b_en && b_we && b_ok && b_idx == a_idx))
      for (int i = 0; i < 8; i++)
        if (a_be[i]) mem[a_idx][8*i +: 8] <= a_wdata[8*i +: 8];
    if (b_en && b_we && b_ok) mem[b_idx] <= b_wdata;
  end

  always_ff @(posedge clk) begin
    if (a_en) begin
      a_rdata <= a_ok ? mem[a_idx] : '0;
      a_err   <= !a_ok;
    end
    if (b_en) begin
      b_rdata <= b_ok ? mem[b_idx] : '0;
      b_err   <= !b_ok;
    end
  end
endmodule
