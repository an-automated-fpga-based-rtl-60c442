// prior_memory: double-buffered, dual-port store of the n prior LLRVs of a
// frame.
//
// Two banks of N words, one word per variable node, each holding n_m entries
// of (cost, symbol) = NM x (Q + log2 q) bits. The prior generator fills one
// bank (wr_bank) while the decoder reads the frame in the other (rd_bank),
// so prior generation of frame k+1 can overlap decoding of frame k. The two
// write ports (one per prior-generator channel) write single entries of
// bank wr_bank through per-entry enables; the read port returns a whole LLRV
// of bank rd_bank one cycle after the address (registered read, block-RAM
// style).
//
// Interface: wr_bank, wa_* / wb_* write ports, rd_bank, rd_addr -> rd_list
// (1-cycle latency). Port a wins if both write the same entry in one cycle
// (never happens in the emulator: the channels own disjoint nodes).
//
// One bank is the paper's [n x n_m] x [Q + log2 q]-bit dual-port prior
// memory; the second bank and the word organisation are this design's
// choices, made so that PG and DD can overlap as in the paper's schedule.
module prior_memory #(
  parameter int unsigned GFB = 5,
  parameter int unsigned Q   = 6,
  parameter int unsigned NM  = 8,
  parameter int unsigned N   = 192
) (
  input  logic                       clk,
  input  logic                       wr_bank,
  input  logic                       wa_en,
  input  logic [$clog2(N)-1:0]       wa_vn,
  input  logic [$clog2(NM)-1:0]      wa_idx,
  input  logic [Q+GFB-1:0]           wa_entry,
  input  logic                       wb_en,
  input  logic [$clog2(N)-1:0]       wb_vn,
  input  logic [$clog2(NM)-1:0]      wb_idx,
  input  logic [Q+GFB-1:0]           wb_entry,
  input  logic                       rd_bank,
  input  logic [$clog2(N)-1:0]       rd_addr,
  output logic [NM-1:0][Q+GFB-1:0]   rd_list
);

  localparam int unsigned AW = $clog2(2 * N);

  logic [NM-1:0][Q+GFB-1:0] mem [2 * N];
  logic [AW-1:0] wa_a, wb_a, rd_a;

  always_comb begin
    wa_a = wr_bank ? AW'(N) + AW'(wa_vn) : AW'(wa_vn);
    wb_a = wr_bank ? AW'(N) + AW'(wb_vn) : AW'(wb_vn);
    rd_a = rd_bank ? AW'(N) + AW'(rd_addr) : AW'(rd_addr);
  end

  always_ff @(posedge clk) begin
    if (wb_en) mem[wb_a][wb_idx] <= wb_entry;
    if (wa_en) mem[wa_a][wa_idx] <= wa_entry;
    rd_list <= mem[rd_a];
  end

endmodule
