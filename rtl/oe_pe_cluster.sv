// oe_pe_cluster: two-dimensional PE array of one OpenEye cluster.
//
// PE_X columns by PE_Y rows of oe_pe; row 0 is the bottom row. Three
// structured paths connect them:
//  * IAct bus: one activation stream shared by all PEs. iact_mask (bit
//    y*PE_X+x) selects the PEs that take the current word; several bits give
//    a multicast (e.g. the diagonal pattern of row-stationary convolution)
//    and the word is taken once all selected PEs are ready.
//  * Weights: one stream enters the left PE of every row whose bit is set in
//    w_row_mask and is passed PE to PE to the right; every PE of the row
//    keeps a copy. The rightmost PE's forward output is discarded.
//  * PSUMs: the PSum bus input feeds the bottom PE of column psum_col; each
//    PE passes its sums to the PE above; the top PE of column psum_col drives
//    the PSum bus output. The control logic steps psum_col through the
//    columns during the output phase.
// cmd and cfg go to every PE; busy is high while any PE is busy or a
// weight word is still being passed along a row.
// The three paths follow the source; the mask and column-select encodings
// are this design's own.
module oe_pe_cluster
  import oe_pkg::*;
#(
  parameter int PE_X = 4,
  parameter int PE_Y = 3,
  parameter int IACT_ADDR_DEPTH = 9,
  parameter int IACT_DATA_DEPTH = 16,
  parameter int W_ADDR_DEPTH    = 16,
  parameter int W_DATA_DEPTH    = 96,
  parameter int PSUM_DEPTH      = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  pe_cmd_t      cmd,
  input  pe_cfg_t      cfg,
  input  logic [PE_X*PE_Y-1:0] iact_mask,
  input  logic [PE_Y-1:0]      w_row_mask,
  input  logic [3:0]           psum_col,
  input  logic         iact_valid,
  output logic         iact_ready,
  input  iact_word_t   iact_data,
  input  logic         w_valid,
  output logic         w_ready,
  input  weight_word_t w_data,
  input  logic         psum_in_valid,
  output logic         psum_in_ready,
  input  psum_t        psum_in_data,
  output logic         psum_out_valid,
  input  logic         psum_out_ready,
  output psum_t        psum_out_data,
  output logic         busy
);
  localparam int N = PE_X * PE_Y;

  logic [N-1:0] ia_v, ia_r, pe_busy;
  logic [N-1:0] wi_v, wi_r, wo_v, wo_r;
  weight_word_t wi_d [N];
  weight_word_t wo_d [N];
  logic [N-1:0] pi_v, pi_r, po_v, po_r;
  psum_t        pi_d [N];
  psum_t        po_d [N];

  // activation bus (multicast on mask)
  assign iact_ready = &(ia_r | ~iact_mask);
  assign ia_v = (iact_valid && iact_ready) ? iact_mask : '0;

  // weight row inputs
  logic [PE_Y-1:0] row_r;
  always_comb for (int y = 0; y < PE_Y; y++) row_r[y] = wi_r[y*PE_X] || !w_row_mask[y];
  assign w_ready = &row_r;

  assign busy = (|pe_busy) || (|wo_v[N-1:0]);

  for (genvar y = 0; y < PE_Y; y++) begin : g_y
    for (genvar x = 0; x < PE_X; x++) begin : g_x
      localparam int I = y * PE_X + x;
      // weight chain
      if (x == 0) begin : g_wl
        assign wi_v[I] = w_valid && w_ready && w_row_mask[y];
        assign wi_d[I] = w_data;
      end else begin : g_wc
        assign wi_v[I] = wo_v[I-1];
        assign wi_d[I] = wo_d[I-1];
        assign wo_r[I-1] = wi_r[I];
      end
      if (x == PE_X - 1) begin : g_wr
        assign wo_r[I] = 1'b1;
      end
      // psum chain
      if (y == 0) begin : g_pb
        assign pi_v[I] = psum_in_valid && (psum_col == 4'(x));
        assign pi_d[I] = psum_in_data;
      end else begin : g_pc
        assign pi_v[I] = po_v[I-PE_X];
        assign pi_d[I] = po_d[I-PE_X];
        assign po_r[I-PE_X] = pi_r[I];
      end
      if (y == PE_Y - 1) begin : g_pt
        assign po_r[I] = psum_out_ready && (psum_col == 4'(x));
      end

      oe_pe #(.IACT_ADDR_DEPTH(IACT_ADDR_DEPTH), .IACT_DATA_DEPTH(IACT_DATA_DEPTH),
              .W_ADDR_DEPTH(W_ADDR_DEPTH), .W_DATA_DEPTH(W_DATA_DEPTH),
              .PSUM_DEPTH(PSUM_DEPTH)) u_pe (
        .clk, .rst_n, .cmd, .cfg,
        .iact_valid(ia_v[I]), .iact_ready(ia_r[I]), .iact_data,
        .w_in_valid(wi_v[I]), .w_in_ready(wi_r[I]), .w_in_data(wi_d[I]),
        .w_out_valid(wo_v[I]), .w_out_ready(wo_r[I]), .w_out_data(wo_d[I]),
        .psum_in_valid(pi_v[I]), .psum_in_ready(pi_r[I]), .psum_in_data(pi_d[I]),
        .psum_out_valid(po_v[I]), .psum_out_ready(po_r[I]), .psum_out_data(po_d[I]),
        .busy(pe_busy[I]));
    end
  end

  // PSum bus: selected column
  always_comb begin
    psum_in_ready  = 1'b0;
    psum_out_valid = 1'b0;
    psum_out_data  = po_d[(PE_Y-1)*PE_X];
    for (int x = 0; x < PE_X; x++) begin
      if (psum_col == 4'(x)) begin
        psum_in_ready  = pi_r[x];
        psum_out_valid = po_v[(PE_Y-1)*PE_X + x];
        psum_out_data  = po_d[(PE_Y-1)*PE_X + x];
      end
    end
  end
endmodule
