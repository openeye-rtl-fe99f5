// oe_wb_slave: 64-bit Wishbone (B4, classic cycles) host interface.
//
// The host streams commands and data to the accelerator and reads results
// back through it. Address map (byte addresses, bits [23:20] select):
//   0x00_0000  read : status {done, busy, 14'b0, layer_count} in bits 63:32
//   0x10_0000  write: push one 64-bit word into the command queue
//   0x20_0000  read : PSUM RAM word at index adr[AW+2:3] (AW <= 17)
// Every access is acknowledged with a one-cycle ack: one cycle after the
// request for status reads and queue writes (a write waits while the queue
// is full), two cycles for PSUM RAM reads (one-cycle RAM latency). The
// master must drop stb after ack (classic cycle). Byte selects are ignored:
// all accesses are full 64-bit words. The command queue is QDEPTH deep.
// The source names AXI or Wishbone with a 64-bit data port; Wishbone and
// the address map are this design's choices. host_raddr is wired straight
// from wb_adr on purpose: the RAM registers the address itself.
module oe_wb_slave
  import oe_pkg::*;
#(
  parameter int AW     = 14,
  parameter int QDEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wb_cyc,
  input  logic             wb_stb,
  input  logic             wb_we,
  input  logic [31:0]      wb_adr,
  input  logic [BUS_W-1:0] wb_dat_i,
  output logic [BUS_W-1:0] wb_dat_o,
  output logic             wb_ack,
  // command queue output
  output logic             cmd_valid,
  input  logic             cmd_ready,
  output logic [BUS_W-1:0] cmd_data,
  // PSUM RAM read
  output logic             host_re,
  output logic [AW-1:0]    host_raddr,
  input  logic [BUS_W-1:0] host_rdata,
  // status
  input  logic             st_busy,
  input  logic             st_done,
  input  logic [15:0]      st_layers
);
  logic q_ready, rd_wait;
  wire  req    = wb_cyc && wb_stb && !wb_ack && !rd_wait;
  wire  region_cmd  = (wb_adr[23:20] == 4'h1);
  wire  region_psum = (wb_adr[23:20] == 4'h2);
  wire  push   = req && wb_we && region_cmd && q_ready;

  assign host_re    = req && !wb_we && region_psum;
  assign host_raddr = wb_adr[AW+2:3];

  oe_fifo #(.T(logic [BUS_W-1:0]), .DEPTH(QDEPTH)) u_q (
    .clk, .rst_n, .in_valid(push), .in_ready(q_ready), .in_data(wb_dat_i),
    .out_valid(cmd_valid), .out_ready(cmd_ready), .out_data(cmd_data), .count());

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wb_ack <= 1'b0; wb_dat_o <= '0; rd_wait <= 1'b0;
    end else begin
      wb_ack <= 1'b0;
      if (rd_wait) begin
        rd_wait <= 1'b0; wb_ack <= 1'b1; wb_dat_o <= host_rdata;
      end else if (req) begin
        if (wb_we) begin
          // writes outside the queue are acknowledged and ignored
          if (!region_cmd || q_ready) wb_ack <= 1'b1;
        end else if (region_psum) begin
          rd_wait <= 1'b1;
        end else begin
          wb_ack   <= 1'b1;
          wb_dat_o <= {st_done, st_busy, 14'b0, st_layers, 32'b0};
        end
      end
    end
  end

  // Wishbone classic: a request stays up until it is acknowledged.
  property p_stb_held;
    @(posedge clk) disable iff (!rst_n) (wb_cyc && wb_stb && !wb_ack) |=> (wb_stb || wb_ack);
  endproperty
  assert property (p_stb_held) else $error("oe_wb_slave: stb dropped before ack");
endmodule
