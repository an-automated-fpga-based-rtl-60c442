// error_memory: log of the frames that were decoded with errors.
//
// A DEPTH-entry RAM of WW-bit records written in order (the write pointer
// wraps, so the newest DEPTH records are kept) and a count of all records
// written, saturating at its maximum. The host reads entry raddr one cycle
// later on rdata.
//
// Interface: clear empties the log; we/wdata append a record;
// raddr -> rdata (1-cycle latency); count = records written since clear.
//
// The paper only names this memory; its record format and depth are this
// design's choice.
module error_memory #(
  parameter int unsigned DEPTH = 256,
  parameter int unsigned WW    = 48
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     we,
  input  logic [WW-1:0]            wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [WW-1:0]            rdata,
  output logic [31:0]              count
);

  logic [WW-1:0]            mem [DEPTH];
  logic [$clog2(DEPTH)-1:0] wptr;

  always_ff @(posedge clk) begin
    if (we) mem[wptr] <= wdata;
    rdata <= mem[raddr];
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      wptr  <= '0;
      count <= '0;
    end else if (we) begin
      wptr  <= wptr + 1'b1;
      if (count != '1) count <= count + 1'b1;
    end
  end

endmodule
