// oe_parallel_ctrl: control logic of the parallel back end.
//
// A register file holding one cluster_cfg_t per cluster (router selects,
// PE masks, PSUM column, PE settings, activation mode) plus the command
// broadcast. The serial control logic writes it through a simple port:
// cfg_addr[15:8] is the cluster index (8'hFF writes all clusters) and
// cfg_addr[3:0] the register (REG_* in oe_pkg). Writing REG_CMD sends a
// one-cycle pe_cmd_t pulse (bit 0 clear, 1 start, 2 out_go) to the
// addressed clusters, one cycle after the write. all_idle is high when no
// cluster is busy and no command pulse is pending, so a controller that
// polls it right after issuing a command never sees a false "idle".
// After reset every router output is unused and all masks are zero.
// That routers are configured centrally follows the source; the register
// map is this design's own.
module oe_parallel_ctrl
  import oe_pkg::*;
#(
  parameter int NC = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          cfg_we,
  input  logic [15:0]   cfg_addr,
  input  logic [31:0]   cfg_wdata,
  input  logic [NC-1:0] cluster_busy,
  output cluster_cfg_t  cfg [NC],
  output pe_cmd_t       cmd [NC],
  output logic          all_idle
);
  logic [NC-1:0] cmd_any;

  always_comb begin
    for (int c = 0; c < NC; c++) cmd_any[c] = |cmd[c];
    all_idle = !(|cluster_busy) && !(|cmd_any);
  end

  for (genvar c = 0; c < NC; c++) begin : g_c
    wire hit = cfg_we && (cfg_addr[15:8] == 8'hFF || cfg_addr[15:8] == 8'(c));
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        cfg[c] <= '0;
        cfg[c].iact_sel <= {5{3'd5}};
        cfg[c].w_sel    <= {2{2'd2}};
        cfg[c].psum_sel <= {4{3'd4}};
        cmd[c] <= '0;
      end else begin
        cmd[c] <= '0;
        if (hit) begin
          unique case (cfg_addr[3:0])
            REG_IACT_SEL:   cfg[c].iact_sel   <= cfg_wdata[14:0];
            REG_W_SEL:      cfg[c].w_sel      <= cfg_wdata[3:0];
            REG_PSUM_SEL:   cfg[c].psum_sel   <= cfg_wdata[11:0];
            REG_IACT_MASK:  cfg[c].iact_mask  <= cfg_wdata;
            REG_W_ROW_MASK: cfg[c].w_row_mask <= cfg_wdata[7:0];
            REG_PSUM_COL:   cfg[c].psum_col   <= cfg_wdata[3:0];
            REG_PE_CFG:     cfg[c].pe_cfg     <= cfg_wdata[$bits(pe_cfg_t)-1:0];
            REG_ACT:        cfg[c].act_mode   <= act_mode_e'(cfg_wdata[1:0]);
            REG_CMD:        cmd[c]            <= '{clear: cfg_wdata[0], start: cfg_wdata[1],
                                                   out_go: cfg_wdata[2]};
            default: ;
          endcase
        end
      end
    end
  end
endmodule
