// oe_serial_ctrl: central control logic of the serial front end.
//
// Executes the 64-bit command stream sent by the host, one command after
// the other, and so walks the network layer by layer. Command word fields:
//   [63:60] opcode  [57:56] RAM select (0 IAct, 1 Weights, 2 PSUM)
//   [55:48] cluster [47:32] count n (or, for CFG, the register address)
//   [31:0]  RAM base address (or, for CFG, the register value)
// Opcodes (opcode_e):
//   WRITE_RAM  the next n stream words are written to RAM sel from base on
//   SEND       start streaming n words of RAM sel from base to the clusters;
//              every word carries its destination cluster in bits [63:56]
//              and its payload in the low bits (runs in the background)
//   COLLECT    start writing the next n results of cluster into the PSUM
//              RAM from base on (background); each stored word is tagged
//              with that cluster in bits [63:56], so a later SEND of the
//              same region returns the sums to the same cluster as bias,
//              which lets a layer accumulate over several passes on chip
//   CFG        write one register of the parallel control logic
//   WAIT       wait until all SEND/COLLECT engines are done and, if bit 0 is
//              set, until all clusters are idle as well
//   LAYER      count a finished layer (layer_count)
//   END        raise done; the next command clears it again
// A SEND or COLLECT whose engine is still busy waits. The three RAMs are
// outside this module; the IAct and Weight RAM ports are driven directly,
// the PSUM RAM write port is shared by WRITE_RAM and COLLECT (a WRITE_RAM to
// PSUM waits for the collector) and its read port by SEND and host reads
// (host reads go first). The layer-by-layer FSM follows the source; the
// command set and encoding are this design's own.
// Synthesis reports the IAct/Weight RAM write data and the CFG address and
// data outputs as wired straight to an input: they are fields of cmd_data
// by design (no copy register is needed, the RAMs and the register file
// capture them in the cycle the word is accepted).
module oe_serial_ctrl
  import oe_pkg::*;
#(
  parameter int NC = 4,
  parameter int AW = 14
) (
  input  logic              clk,
  input  logic              rst_n,
  // command stream from the host interface
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  logic [BUS_W-1:0]  cmd_data,
  // RAM ports, index 0 IAct, 1 Weights, 2 PSUM
  output logic [2:0]        ram_we,
  output logic [AW-1:0]     ram_waddr [3],
  output logic [BUS_W-1:0]  ram_wdata [3],
  output logic [2:0]        ram_re,
  output logic [AW-1:0]     ram_raddr [3],
  input  logic [BUS_W-1:0]  ram_rdata [3],
  // host read of the PSUM RAM (granted at once, data one cycle later)
  input  logic              host_re,
  input  logic [AW-1:0]     host_raddr,
  // parallel back end
  output logic              cfg_we,
  output logic [15:0]       cfg_addr,
  output logic [31:0]       cfg_wdata,
  input  logic              all_idle,
  output logic              iact_valid,
  input  logic              iact_ready,
  output logic [CID_W-1:0]  iact_dest,
  output iact_word_t        iact_data,
  output logic              w_valid,
  input  logic              w_ready,
  output logic [CID_W-1:0]  w_dest,
  output weight_word_t      w_data,
  output logic              psum_valid,
  input  logic              psum_ready,
  output logic [CID_W-1:0]  psum_dest,
  output psum_t             psum_data,
  input  logic [NC-1:0]     res_valid,
  output logic [NC-1:0]     res_ready,
  input  psum_t             res_data [NC],
  // status
  output logic              busy,
  output logic              done,
  output logic [15:0]       layer_count
);
  typedef enum logic [1:0] {S_FETCH, S_WRITE, S_WAIT} state_e;
  state_e state;

  opcode_e     op;
  logic [1:0]  sel;
  logic [15:0] n_f;
  assign op  = opcode_e'(cmd_data[63:60]);
  assign sel = cmd_data[57:56];
  assign n_f = cmd_data[47:32];

  // ---------------- stream engines ----------------
  logic [2:0]       sr_busy, sr_start, sr_re, sr_valid, sr_ready, sr_gnt;
  logic [AW-1:0]    sr_raddr [3];
  logic [BUS_W-1:0] sr_data [3];
  for (genvar e = 0; e < 3; e++) begin : g_sr
    oe_stream_reader #(.AW(AW), .W(BUS_W)) u_sr (
      .clk, .rst_n, .start(sr_start[e]), .base(AW'(cmd_data[31:0])), .n(n_f),
      .busy(sr_busy[e]), .re(sr_re[e]), .raddr(sr_raddr[e]), .rgnt(sr_gnt[e]),
      .rdata(ram_rdata[e]), .out_valid(sr_valid[e]), .out_ready(sr_ready[e]),
      .out_data(sr_data[e]));
  end
  assign sr_gnt = {!host_re, 2'b11};

  assign iact_valid = sr_valid[0];
  assign iact_dest  = sr_data[0][63:56];
  assign iact_data  = sr_data[0][$bits(iact_word_t)-1:0];
  assign w_valid    = sr_valid[1];
  assign w_dest     = sr_data[1][63:56];
  assign w_data     = sr_data[1][$bits(weight_word_t)-1:0];
  assign psum_valid = sr_valid[2];
  assign psum_dest  = sr_data[2][63:56];
  assign psum_data  = sr_data[2][PSUM_W-1:0];
  assign sr_ready   = {psum_ready, w_ready, iact_ready};

  // ---------------- result collector ----------------
  logic          col_active;
  logic [CID_W-1:0] col_id;
  logic [15:0]   col_left;
  logic [AW-1:0] col_addr;
  logic          col_fire;
  psum_t         col_val;
  always_comb begin
    res_ready = '0;
    col_fire  = 1'b0;
    col_val   = res_data[0];
    for (int c = 0; c < NC; c++) begin
      if (col_active && col_id == CID_W'(c)) begin
        res_ready[c] = 1'b1;
        col_fire     = res_valid[c];
        col_val      = res_data[c];
      end
    end
  end

  // ---------------- FSM ----------------
  logic [15:0]   wr_left;
  logic [AW-1:0] wr_addr;
  logic [1:0]    wr_sel;
  logic          exec;
  logic          wait_all;

  wire engines_idle = !(|sr_busy) && !col_active;

  always_comb begin
    exec = 1'b0;
    sr_start = '0;
    if (state == S_FETCH && cmd_valid) begin
      unique case (op)
        OP_SEND:    begin exec = (sel != 2'd3) && !sr_busy[sel]; sr_start[sel] = exec; end
        OP_COLLECT: exec = !col_active;
        OP_WRITE_RAM: exec = !(sel == 2'd2 && col_active);
        default:    exec = 1'b1;
      endcase
    end
  end

  wire wr_fire = (state == S_WRITE) && cmd_valid && (wr_left != '0);
  assign cmd_ready = exec || wr_fire;
  assign cfg_we    = exec && op == OP_CFG;
  assign cfg_addr  = cmd_data[47:32];
  assign cfg_wdata = cmd_data[31:0];
  assign busy      = (state != S_FETCH) || !engines_idle;

  // RAM ports
  always_comb begin
    for (int e = 0; e < 3; e++) begin
      ram_we[e]    = wr_fire && wr_sel == 2'(e);
      ram_waddr[e] = wr_addr;
      ram_wdata[e] = cmd_data;
      ram_re[e]    = sr_re[e];
      ram_raddr[e] = sr_raddr[e];
    end
    if (col_fire) begin
      ram_we[2]    = 1'b1;
      ram_waddr[2] = col_addr;
      ram_wdata[2] = {col_id, 56'($signed(col_val))};
    end
    if (host_re) begin
      ram_re[2]    = 1'b1;
      ram_raddr[2] = host_raddr;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_FETCH; done <= 1'b0; layer_count <= '0;
      wr_left <= '0; wr_addr <= '0; wr_sel <= '0; wait_all <= 1'b0;
      col_active <= 1'b0; col_id <= '0; col_left <= '0; col_addr <= '0;
    end else begin
      // collector
      if (col_fire) begin
        col_addr <= col_addr + 1'b1;
        col_left <= col_left - 1'b1;
        if (col_left == 16'd1) col_active <= 1'b0;
      end
      unique case (state)
        S_FETCH: if (exec) begin
          done <= 1'b0;
          unique case (op)
            OP_WRITE_RAM: if (n_f != '0) begin
              state <= S_WRITE; wr_left <= n_f; wr_addr <= AW'(cmd_data[31:0]); wr_sel <= sel;
            end
            OP_COLLECT: if (n_f != '0) begin
              col_active <= 1'b1; col_id <= cmd_data[55:48]; col_left <= n_f;
              col_addr <= AW'(cmd_data[31:0]);
            end
            OP_WAIT:  begin state <= S_WAIT; wait_all <= cmd_data[0]; end
            OP_LAYER: layer_count <= layer_count + 1'b1;
            OP_END:   done <= 1'b1;
            default: ;
          endcase
        end
        S_WRITE: if (wr_fire) begin
          wr_addr <= wr_addr + 1'b1;
          wr_left <= wr_left - 1'b1;
          if (wr_left == 16'd1) state <= S_FETCH;
        end
        S_WAIT: if (engines_idle && (all_idle || !wait_all)) state <= S_FETCH;
        default: state <= S_FETCH;
      endcase
    end
  end
endmodule
