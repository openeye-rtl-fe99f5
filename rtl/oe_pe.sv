// oe_pe: sparse processing element.
//
// A PE computes, for each of its n_cols activation columns j and each
// output row m,   psum[j][m] += sum_c W[m][c] * iact[j][c]
// with both operands in compressed sparse column (CSC) form, so that only
// nonzero pairs are ever multiplied. Four scratchpads (oe_spad) hold them:
//   IAct ADDR  : end pointer of every activation column in IAct DATA
//   IAct DATA  : nonzero activation value + input-channel index c
//   W ADDR     : end pointer of the weight column of every input channel c
//   W DATA     : SIMD lanes of (weight, output row m)
// The PSUM DATA RAM is a Live Value Table RAM (oe_lvt_ram) with SIMD+1 write
// and SIMD+1 read ports: one per multiplier lane and one for the output path.
//
// Phases (pe_cmd_t pulses, accepted in PE_IDLE):
//  * load (idle): activation words are appended to the IAct RAMs; weight
//    words are appended to the weight RAMs and forwarded unchanged to the
//    right-hand neighbour through a 2-entry FIFO (w_out_*).
//  * clear: empties all scratchpads and zeroes the PSUM RAM.
//  * start -> PE_COMPUTE: walks the activations; for each nonzero (c, a) it
//    spends one cycle fetching the weight column bounds, one cycle per weight
//    word (SIMD multiply-accumulates), and one cycle to move on; each column
//    end costs one cycle, and one more cycle ends the phase. PSUMs are kept
//    across compute phases until clear, so several passes can accumulate.
//  * out_go -> PE_OUTPUT: for k = 0 .. n_cols*n_m-1 takes one PSUM (or the
//    bias, at the bottom PE of a column) from psum_in, adds PSUM RAM entry k,
//    writes the sum back and sends it to psum_out (towards the PE above).
// The MAC path, the PSUM/BIAS multiplexer in front of the adder and the
// write-back follow the source description; the phase encoding, the
// CSC layout (absolute row index instead of zero run length) and the cycle
// costs are this design's choices. All valid/ready handshakes: a word moves
// when valid and ready are both high at a clock edge.
module oe_pe
  import oe_pkg::*;
#(
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
  // activation bus
  input  logic         iact_valid,
  output logic         iact_ready,
  input  iact_word_t   iact_data,
  // weights from the left neighbour / row input
  input  logic         w_in_valid,
  output logic         w_in_ready,
  input  weight_word_t w_in_data,
  // weights to the right neighbour
  output logic         w_out_valid,
  input  logic         w_out_ready,
  output weight_word_t w_out_data,
  // PSUM / bias from below
  input  logic         psum_in_valid,
  output logic         psum_in_ready,
  input  psum_t        psum_in_data,
  // PSUM to the PE above
  output logic         psum_out_valid,
  input  logic         psum_out_ready,
  output psum_t        psum_out_data,
  output logic         busy
);
  localparam int IAA = $clog2(IACT_ADDR_DEPTH);
  localparam int IDA = $clog2(IACT_DATA_DEPTH);
  localparam int WAA = $clog2(W_ADDR_DEPTH);
  localparam int WDA = $clog2(W_DATA_DEPTH);
  localparam int PA  = $clog2(PSUM_DEPTH);
  localparam int WDW = $bits(w_lane_t) * SIMD;

  pe_state_e state;
  logic [3:0]        j;        // current activation column
  logic [7:0]        p;        // pointer into IAct DATA
  logic [7:0]        q;        // pointer into W DATA
  logic              qset;     // q holds the start of the current weight column
  logic [PA:0]       k;        // output-phase index
  logic [PA:0]       total;

  assign busy  = (state != PE_IDLE);
  assign total = (PA+1)'(cfg.n_cols * cfg.n_m);

  // ---------------- scratchpads ----------------
  logic [DATA_W-1:0] ia_end, wa_end, wa_prev, unused_ia1;
  iact_word_t        ia_ent;
  logic [WDW-1:0]    wd_raw;
  w_lane_t [SIMD-1:0] wd_lanes;
  logic [WDW-1:0]    unused_wd1;

  wire idle_load = (state == PE_IDLE) && !cmd.clear;
  wire ia_we     = iact_valid && iact_ready;
  logic w_fwd_ready;
  wire w_we      = w_in_valid && w_in_ready;

  assign iact_ready = idle_load;
  assign w_in_ready = idle_load && w_fwd_ready;

  logic [IDX_W-1:0] cur_c;
  assign cur_c = ia_ent.idx;

  oe_spad #(.DEPTH(IACT_ADDR_DEPTH), .W(DATA_W)) u_iact_addr (
    .clk, .rst_n, .clear(cmd.clear), .we(ia_we && iact_data.is_addr),
    .wdata(iact_data.val), .full(), .used(),
    .raddr0(IAA'(j)), .rdata0(ia_end), .raddr1('0), .rdata1(unused_ia1));

  iact_word_t ia_rd0, ia_rd1;
  oe_spad #(.DEPTH(IACT_DATA_DEPTH), .W($bits(iact_word_t))) u_iact_data (
    .clk, .rst_n, .clear(cmd.clear), .we(ia_we && !iact_data.is_addr),
    .wdata(iact_data), .full(), .used(),
    .raddr0(IDA'(p)), .rdata0(ia_rd0), .raddr1('0), .rdata1(ia_rd1));
  assign ia_ent = ia_rd0;

  oe_spad #(.DEPTH(W_ADDR_DEPTH), .W(DATA_W)) u_w_addr (
    .clk, .rst_n, .clear(cmd.clear), .we(w_we && w_in_data.is_addr),
    .wdata(w_in_data.lane[0].w), .full(), .used(),
    .raddr0(WAA'(cur_c)), .rdata0(wa_end),
    .raddr1(WAA'(cur_c - 1'b1)), .rdata1(wa_prev));

  oe_spad #(.DEPTH(W_DATA_DEPTH), .W(WDW)) u_w_data (
    .clk, .rst_n, .clear(cmd.clear), .we(w_we && !w_in_data.is_addr),
    .wdata(w_in_data.lane), .full(), .used(),
    .raddr0(WDA'(q)), .rdata0(wd_raw), .raddr1('0), .rdata1(unused_wd1));
  assign wd_lanes = wd_raw;

  // weight forwarding stage
  oe_fifo #(.T(weight_word_t), .DEPTH(2)) u_wfwd (
    .clk, .rst_n, .in_valid(w_we), .in_ready(w_fwd_ready), .in_data(w_in_data),
    .out_valid(w_out_valid), .out_ready(w_out_ready), .out_data(w_out_data), .count());

  // ---------------- compute control ----------------
  logic [DATA_W-1:0] w_start;
  assign w_start = (cur_c == '0) ? '0 : wa_prev;

  wire col_done  = (p == ia_end);
  wire mac_fire  = (state == PE_COMPUTE) && (j != cfg.n_cols) && !col_done && qset && (q < wa_end);

  // ---------------- PSUM RAM and datapath ----------------
  logic [SIMD:0]             lvt_we;
  logic [SIMD:0][PA-1:0]     lvt_waddr, lvt_raddr;
  logic [SIMD:0][PSUM_W-1:0] lvt_wdata, lvt_rdata;

  logic out_fifo_ready;
  wire  out_fire = (state == PE_OUTPUT) && (k != total) && psum_in_valid && out_fifo_ready;
  assign psum_in_ready = (state == PE_OUTPUT) && (k != total) && out_fifo_ready;

  psum_t out_sum;

  always_comb begin
    for (int l = 0; l < SIMD; l++) begin
      logic [8:0]            base;
      logic signed [2*DATA_W-1:0] prod;
      base = 9'(j * cfg.n_m) + 9'(wd_lanes[l].m);
      lvt_raddr[l] = PA'(base);
      lvt_waddr[l] = PA'(base);
      prod = $signed(ia_ent.val) * $signed(wd_lanes[l].w);
      lvt_wdata[l] = lvt_rdata[l] + PSUM_W'(prod);
      lvt_we[l]    = mac_fire && wd_lanes[l].vld;
    end
    // output path: multiplexer selects PSUM/BIAS into the adder
    lvt_raddr[SIMD] = PA'(k);
    lvt_waddr[SIMD] = PA'(k);
    out_sum         = psum_t'(lvt_rdata[SIMD]) + psum_in_data;
    lvt_wdata[SIMD] = out_sum;
    lvt_we[SIMD]    = out_fire;
  end

  oe_lvt_ram #(.DEPTH(PSUM_DEPTH), .W(PSUM_W), .NW(SIMD+1), .NR(SIMD+1)) u_psum (
    .clk, .rst_n, .clear(cmd.clear && state == PE_IDLE), .we(lvt_we), .waddr(lvt_waddr),
    .wdata(lvt_wdata), .raddr(lvt_raddr), .rdata(lvt_rdata));

  oe_fifo #(.T(psum_t), .DEPTH(2)) u_pout (
    .clk, .rst_n, .in_valid(out_fire), .in_ready(out_fifo_ready), .in_data(out_sum),
    .out_valid(psum_out_valid), .out_ready(psum_out_ready), .out_data(psum_out_data), .count());

  // ---------------- state machine ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= PE_IDLE; j <= '0; p <= '0; q <= '0; qset <= 1'b0; k <= '0;
    end else begin
      unique case (state)
        PE_IDLE: begin
          if (cmd.start && !cmd.clear) begin
            state <= PE_COMPUTE; j <= '0; p <= '0; qset <= 1'b0;
          end else if (cmd.out_go && !cmd.clear) begin
            state <= PE_OUTPUT; k <= '0;
          end
        end
        PE_COMPUTE: begin
          if (j == cfg.n_cols)      state <= PE_IDLE;
          else if (col_done)        j <= j + 1'b1;
          else if (!qset) begin     q <= w_start; qset <= 1'b1; end
          else if (q < wa_end)      q <= q + 1'b1;
          else begin                p <= p + 1'b1; qset <= 1'b0; end
        end
        PE_OUTPUT: begin
          if (k == total)           state <= PE_IDLE;
          else if (out_fire)        k <= k + 1'b1;
        end
        default: state <= PE_IDLE;
      endcase
    end
  end
endmodule
