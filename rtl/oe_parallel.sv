// oe_parallel: parallel back end, a CLUSTER_ROWS x CLUSTER_COLS array of
// OpenEye clusters with their control logic (oe_parallel_ctrl).
//
// Cluster (r, c) has index r*CLUSTER_COLS + c; row 0 is the south edge and
// column 0 the west edge. Neighbours are linked as the source describes:
// activation links in all four directions, weight links from west to east,
// partial-sum links north and south in both directions. Links that would
// leave the array are tied off (no input words; outputs always accepted).
//
// The serial front end reaches every cluster through three shared streams
// (activations, weights, partial sums/biases). Each word carries a
// destination cluster index; 8'hFF sends it to all clusters at once, and the
// word is taken when all addressed clusters are ready. The EXT partial-sum
// output of every cluster is brought out separately (res_*), so the front
// end can collect results from a chosen cluster. Configuration writes and
// commands go through cfg_we/cfg_addr/cfg_wdata (see oe_parallel_ctrl).
// Stream tagging with a destination index is this design's own choice.
module oe_parallel
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
  localparam int NC             = CLUSTER_ROWS * CLUSTER_COLS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_we,
  input  logic [15:0]       cfg_addr,
  input  logic [31:0]       cfg_wdata,
  output logic              all_idle,
  input  logic              iact_valid,
  output logic              iact_ready,
  input  logic [CID_W-1:0]  iact_dest,
  input  iact_word_t        iact_data,
  input  logic              w_valid,
  output logic              w_ready,
  input  logic [CID_W-1:0]  w_dest,
  input  weight_word_t      w_data,
  input  logic              psum_valid,
  output logic              psum_ready,
  input  logic [CID_W-1:0]  psum_dest,
  input  psum_t             psum_data,
  output logic [NC-1:0]     res_valid,
  input  logic [NC-1:0]     res_ready,
  output psum_t             res_data [NC]
);
  cluster_cfg_t cfg [NC];
  pe_cmd_t      cmd [NC];
  logic [NC-1:0] busy;

  oe_parallel_ctrl #(.NC(NC)) u_ctrl (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .cluster_busy(busy),
    .cfg, .cmd, .all_idle);

  // shared external streams
  logic [NC-1:0] hit_i, hit_w, hit_p, rdy_i, rdy_w, rdy_p;
  always_comb begin
    for (int c = 0; c < NC; c++) begin
      hit_i[c] = (iact_dest == 8'hFF) || (iact_dest == CID_W'(c));
      hit_w[c] = (w_dest    == 8'hFF) || (w_dest    == CID_W'(c));
      hit_p[c] = (psum_dest == 8'hFF) || (psum_dest == CID_W'(c));
    end
    iact_ready = (|hit_i) && &(rdy_i | ~hit_i);
    w_ready    = (|hit_w) && &(rdy_w | ~hit_w);
    psum_ready = (|hit_p) && &(rdy_p | ~hit_p);
  end

  // neighbour link nets, per cluster, direction 0=N 1=S 2=E 3=W
  logic [3:0]   ia_iv [NC];
  logic [3:0]   ia_ir [NC];
  logic [3:0]   ia_ov [NC];
  logic [3:0]   ia_or [NC];
  iact_word_t   ia_id [NC][4];
  iact_word_t   ia_od [NC][4];
  logic [NC-1:0] ww_v, ww_r, we_v, we_r;
  weight_word_t ww_d [NC];
  weight_word_t we_d [NC];
  logic [1:0]   ps_iv [NC];
  logic [1:0]   ps_ir [NC];
  logic [1:0]   ps_ov [NC];
  logic [1:0]   ps_or [NC];
  psum_t        ps_id [NC][2];
  psum_t        ps_od [NC][2];

  for (genvar r = 0; r < CLUSTER_ROWS; r++) begin : g_r
    for (genvar c = 0; c < CLUSTER_COLS; c++) begin : g_c
      localparam int I  = r * CLUSTER_COLS + c;
      localparam int IN = I + CLUSTER_COLS, IS = I - CLUSTER_COLS, IE = I + 1, IW = I - 1;
      // north side
      if (r < CLUSTER_ROWS - 1) begin : g_n
        assign ia_iv[I][0] = ia_ov[IN][1];  assign ia_id[I][0] = ia_od[IN][1];
        assign ia_or[I][0] = ia_ir[IN][1];
        assign ps_iv[I][0] = ps_ov[IN][1];  assign ps_id[I][0] = ps_od[IN][1];
        assign ps_or[I][0] = ps_ir[IN][1];
      end else begin : g_nt
        assign ia_iv[I][0] = 1'b0; assign ia_id[I][0] = '0; assign ia_or[I][0] = 1'b1;
        assign ps_iv[I][0] = 1'b0; assign ps_id[I][0] = '0; assign ps_or[I][0] = 1'b1;
      end
      // south side
      if (r > 0) begin : g_s
        assign ia_iv[I][1] = ia_ov[IS][0];  assign ia_id[I][1] = ia_od[IS][0];
        assign ia_or[I][1] = ia_ir[IS][0];
        assign ps_iv[I][1] = ps_ov[IS][0];  assign ps_id[I][1] = ps_od[IS][0];
        assign ps_or[I][1] = ps_ir[IS][0];
      end else begin : g_st
        assign ia_iv[I][1] = 1'b0; assign ia_id[I][1] = '0; assign ia_or[I][1] = 1'b1;
        assign ps_iv[I][1] = 1'b0; assign ps_id[I][1] = '0; assign ps_or[I][1] = 1'b1;
      end
      // east side
      if (c < CLUSTER_COLS - 1) begin : g_e
        assign ia_iv[I][2] = ia_ov[IE][3];  assign ia_id[I][2] = ia_od[IE][3];
        assign ia_or[I][2] = ia_ir[IE][3];
        assign we_r[I] = ww_r[IE];
      end else begin : g_et
        assign ia_iv[I][2] = 1'b0; assign ia_id[I][2] = '0; assign ia_or[I][2] = 1'b1;
        assign we_r[I] = 1'b1;
      end
      // west side
      if (c > 0) begin : g_w
        assign ia_iv[I][3] = ia_ov[IW][2];  assign ia_id[I][3] = ia_od[IW][2];
        assign ia_or[I][3] = ia_ir[IW][2];
        assign ww_v[I] = we_v[IW]; assign ww_d[I] = we_d[IW];
      end else begin : g_wt
        assign ia_iv[I][3] = 1'b0; assign ia_id[I][3] = '0; assign ia_or[I][3] = 1'b1;
        assign ww_v[I] = 1'b0; assign ww_d[I] = '0;
      end

      oe_cluster #(.PE_X(PE_X), .PE_Y(PE_Y), .IACT_ADDR_DEPTH(IACT_ADDR_DEPTH),
        .IACT_DATA_DEPTH(IACT_DATA_DEPTH), .W_ADDR_DEPTH(W_ADDR_DEPTH),
        .W_DATA_DEPTH(W_DATA_DEPTH), .PSUM_DEPTH(PSUM_DEPTH)) u_cluster (
        .clk, .rst_n, .cfg(cfg[I]), .cmd(cmd[I]), .busy(busy[I]),
        .ext_iact_valid(iact_valid && hit_i[I] && iact_ready), .ext_iact_ready(rdy_i[I]),
        .ext_iact_data(iact_data),
        .ext_w_valid(w_valid && hit_w[I] && w_ready), .ext_w_ready(rdy_w[I]), .ext_w_data(w_data),
        .ext_psum_in_valid(psum_valid && hit_p[I] && psum_ready), .ext_psum_in_ready(rdy_p[I]),
        .ext_psum_in_data(psum_data),
        .ext_psum_out_valid(res_valid[I]), .ext_psum_out_ready(res_ready[I]),
        .ext_psum_out_data(res_data[I]),
        .nb_iact_in_valid(ia_iv[I]), .nb_iact_in_ready(ia_ir[I]), .nb_iact_in_data(ia_id[I]),
        .nb_iact_out_valid(ia_ov[I]), .nb_iact_out_ready(ia_or[I]), .nb_iact_out_data(ia_od[I]),
        .w_west_valid(ww_v[I]), .w_west_ready(ww_r[I]), .w_west_data(ww_d[I]),
        .w_east_valid(we_v[I]), .w_east_ready(we_r[I]), .w_east_data(we_d[I]),
        .nb_psum_in_valid(ps_iv[I]), .nb_psum_in_ready(ps_ir[I]), .nb_psum_in_data(ps_id[I]),
        .nb_psum_out_valid(ps_ov[I]), .nb_psum_out_ready(ps_or[I]), .nb_psum_out_data(ps_od[I]));
    end
  end
endmodule
