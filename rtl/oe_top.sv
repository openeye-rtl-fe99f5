// oe_top: the OpenEye accelerator ("OpenEye Serial").
//
// Serial front end plus parallel back end. The host talks to a 64-bit
// Wishbone slave (oe_wb_slave) that queues a command/data stream and reads
// results back from the PSUM RAM. The central control logic
// (oe_serial_ctrl) executes that stream layer by layer: it fills the three
// on-chip RAMs (oe_ram: IAct, Weights, PSUM/bias/results), writes router and
// PE settings into the parallel control logic, streams RAM contents to the
// clusters, starts computation and output phases and writes the results of
// a chosen cluster back into the PSUM RAM. The parallel back end
// (oe_parallel) is the array of clusters. done/busy mirror the status
// register. Clock: one clock domain, clk; reset: active-low asynchronous
// rst_n. Defaults: 2 x 2 clusters of 4 x 3 PEs and 16384-word RAMs.
module oe_top
  import oe_pkg::*;
#(
  parameter int CLUSTER_ROWS    = 2,
  parameter int CLUSTER_COLS    = 2,
  parameter int PE_X            = 4,
  parameter int PE_Y            = 3,
  parameter int IACT_ADDR_DEPTH = 9,
  parameter int IACT_DATA_DEPTH = 16,
  parameter int W_ADDR_DEPTH    = 16,
  parameter int W_DATA_DEPTH    = 96,
  parameter int PSUM_DEPTH      = 32,
  parameter int RAM_DEPTH       = 16384
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
  output logic             busy,
  output logic             done
);
  localparam int NC = CLUSTER_ROWS * CLUSTER_COLS;
  localparam int AW = $clog2(RAM_DEPTH);

  logic             cmd_valid, cmd_ready;
  logic [BUS_W-1:0] cmd_data;
  logic             host_re;
  logic [AW-1:0]    host_raddr;
  logic [15:0]      layers;

  logic [2:0]       ram_we, ram_re;
  logic [AW-1:0]    ram_waddr [3];
  logic [AW-1:0]    ram_raddr [3];
  logic [BUS_W-1:0] ram_wdata [3];
  logic [BUS_W-1:0] ram_rdata [3];

  logic             cfg_we, all_idle;
  logic [15:0]      cfg_addr;
  logic [31:0]      cfg_wdata;
  logic             iv, ir, wv, wr, pv, pr;
  logic [CID_W-1:0] idst, wdst, pdst;
  iact_word_t       id;
  weight_word_t     wd;
  psum_t            pd;
  logic [NC-1:0]    res_v, res_r;
  psum_t            res_d [NC];

  oe_wb_slave #(.AW(AW)) u_wb (
    .clk, .rst_n, .wb_cyc, .wb_stb, .wb_we, .wb_adr, .wb_dat_i, .wb_dat_o, .wb_ack,
    .cmd_valid, .cmd_ready, .cmd_data, .host_re, .host_raddr, .host_rdata(ram_rdata[2]),
    .st_busy(busy), .st_done(done), .st_layers(layers));

  for (genvar e = 0; e < 3; e++) begin : g_ram
    oe_ram #(.DEPTH(RAM_DEPTH), .W(BUS_W)) u_ram (
      .clk, .we(ram_we[e]), .waddr(ram_waddr[e]), .wdata(ram_wdata[e]),
      .re(ram_re[e]), .raddr(ram_raddr[e]), .rdata(ram_rdata[e]));
  end

  oe_serial_ctrl #(.NC(NC), .AW(AW)) u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_data,
    .ram_we, .ram_waddr, .ram_wdata, .ram_re, .ram_raddr, .ram_rdata,
    .host_re, .host_raddr,
    .cfg_we, .cfg_addr, .cfg_wdata, .all_idle,
    .iact_valid(iv), .iact_ready(ir), .iact_dest(idst), .iact_data(id),
    .w_valid(wv), .w_ready(wr), .w_dest(wdst), .w_data(wd),
    .psum_valid(pv), .psum_ready(pr), .psum_dest(pdst), .psum_data(pd),
    .res_valid(res_v), .res_ready(res_r), .res_data(res_d),
    .busy, .done, .layer_count(layers));

  oe_parallel #(.CLUSTER_ROWS(CLUSTER_ROWS), .CLUSTER_COLS(CLUSTER_COLS), .PE_X(PE_X),
    .PE_Y(PE_Y), .IACT_ADDR_DEPTH(IACT_ADDR_DEPTH), .IACT_DATA_DEPTH(IACT_DATA_DEPTH),
    .W_ADDR_DEPTH(W_ADDR_DEPTH), .W_DATA_DEPTH(W_DATA_DEPTH), .PSUM_DEPTH(PSUM_DEPTH)) u_par (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .all_idle,
    .iact_valid(iv), .iact_ready(ir), .iact_dest(idst), .iact_data(id),
    .w_valid(wv), .w_ready(wr), .w_dest(wdst), .w_data(wd),
    .psum_valid(pv), .psum_ready(pr), .psum_dest(pdst), .psum_data(pd),
    .res_valid(res_v), .res_ready(res_r), .res_data(res_d));
endmodule
