// sorter: parallel-compare insertion sorter keeping the LEN smallest keys.
//
// Each cycle up to two candidates (key, data) can be inserted. Contents are
// kept in ascending key order in out_key/out_data[0..LEN-1]; empty slots hold
// an all-ones key, so they always sort last. Every old entry moves down by the
// number of new candidates smaller than it, and each candidate lands after all
// old entries that are not larger; entries pushed beyond LEN are dropped. Ties
// keep the older entry first, and candidate 0 ahead of candidate 1 when equal.
//
// Interface: `clear` empties the sorter (it wins over inserts that cycle);
// results are visible the cycle after the insert. There is no output
// handshake: the owner reads the registers directly.
//
// The paper uses sorters of length q (prior generator), L_S-CN (ECN) and
// L_S-VN (VN) without describing them; this structure is this design's choice.
module sorter #(
  parameter int unsigned LEN = 32,
  parameter int unsigned KW  = 9,
  parameter int unsigned DW  = 5
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic [1:0]              in_valid,
  input  logic [1:0][KW-1:0]      in_key,
  input  logic [1:0][DW-1:0]      in_data,
  output logic [LEN-1:0][KW-1:0]  out_key,
  output logic [LEN-1:0][DW-1:0]  out_data
);

  localparam int unsigned IW = $clog2(LEN + 3);

  logic [LEN-1:0][KW-1:0] nkey;
  logic [LEN-1:0][DW-1:0] ndata;

  // Candidates put in order: c0 <= c1.
  logic          v0, v1;
  logic [KW-1:0] k0, k1;
  logic [DW-1:0] d0, d1;

  always_comb begin
    if (in_valid == 2'b11 && in_key[1] < in_key[0]) begin
      v0 = 1'b1; k0 = in_key[1]; d0 = in_data[1];
      v1 = 1'b1; k1 = in_key[0]; d1 = in_data[0];
    end else if (in_valid == 2'b10) begin
      v0 = 1'b1; k0 = in_key[1]; d0 = in_data[1];
      v1 = 1'b0; k1 = '1;        d1 = '0;
    end else begin
      v0 = in_valid[0]; k0 = in_key[0]; d0 = in_data[0];
      v1 = in_valid[1]; k1 = in_key[1]; d1 = in_data[1];
    end
  end

  always_comb begin
    logic [IW-1:0] pos0, pos1, pi;
    nkey  = out_key;
    ndata = out_data;
    pos0  = '0;
    pos1  = IW'(1);
    for (int unsigned i = 0; i < LEN; i++) begin
      if (out_key[i] <= k0) pos0 = pos0 + 1'b1;
      if (out_key[i] <= k1) pos1 = pos1 + 1'b1;
    end
    for (int unsigned i = 0; i < LEN; i++) begin
      pi = IW'(i) + IW'(v0 && (k0 < out_key[i])) + IW'(v1 && (k1 < out_key[i]));
      if (pi < IW'(LEN)) begin
        nkey[pi]  = out_key[i];
        ndata[pi] = out_data[i];
      end
    end
    if (v0 && pos0 < IW'(LEN)) begin
      nkey[pos0]  = k0;
      ndata[pos0] = d0;
    end
    if (v1 && v0 && pos1 < IW'(LEN)) begin
      nkey[pos1]  = k1;
      ndata[pos1] = d1;
    end else if (v1 && !v0 && (pos1 - 1'b1) < IW'(LEN)) begin
      nkey[pos1 - 1'b1]  = k1;
      ndata[pos1 - 1'b1] = d1;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      out_key  <= '1;
      out_data <= '0;
    end else if (|in_valid) begin
      out_key  <= nkey;
      out_data <= ndata;
    end
  end

endmodule
