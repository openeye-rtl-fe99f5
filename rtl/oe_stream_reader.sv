// oe_stream_reader: streams a range of a serial-front-end RAM to the clusters.
//
// On start it reads n consecutive words from base on and offers them as a
// valid/ready stream. The RAM has one cycle of read latency, so reads are
// issued only while the 4-entry output FIFO has room for the word being read
// plus the one already in flight; the reader then sustains one word per
// cycle. busy stays high until the last word has left the FIFO. start is
// ignored while busy. re/raddr drive the RAM's read port; rgnt low (port
// lent to another user this cycle) holds the read back.
module oe_stream_reader #(
  parameter int AW = 14,
  parameter int W  = 64
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW-1:0] base,
  input  logic [15:0]   n,
  output logic          busy,
  output logic          re,
  output logic [AW-1:0] raddr,
  input  logic          rgnt,
  input  logic [W-1:0]  rdata,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [W-1:0]  out_data
);
  logic [15:0]   left;
  logic          inflight;
  logic [2:0]    cnt;
  logic          active;

  assign re   = active && (left != '0) && ({1'b0, cnt} + {3'b0, inflight} < 4'd4) && rgnt;
  assign busy = active;

  oe_fifo #(.T(logic [W-1:0]), .DEPTH(4)) u_q (
    .clk, .rst_n, .in_valid(inflight), .in_ready(), .in_data(rdata),
    .out_valid, .out_ready, .out_data, .count(cnt));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; left <= '0; raddr <= '0; inflight <= 1'b0;
    end else begin
      inflight <= re;
      if (!active) begin
        if (start) begin active <= 1'b1; left <= n; raddr <= base; end
      end else begin
        if (re) begin left <= left - 1'b1; raddr <= raddr + 1'b1; end
        if (left == '0 && !inflight && !re && cnt == '0) active <= 1'b0;
      end
    end
  end
endmodule
