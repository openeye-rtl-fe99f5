// tb_oe_parallel_ctrl: writes every register of single clusters and by
// broadcast, checks the decoded cluster_cfg_t fields, the reset values, the
// one-cycle command pulses (only at the addressed clusters, one cycle after
// the write) and all_idle, which must stay low while a pulse is pending or
// any cluster reports busy.
module tb_oe_parallel_ctrl;
  import oe_pkg::*;
  localparam int NC = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we = 0; logic [15:0] addr = 0; logic [31:0] wdata = 0;
  logic [NC-1:0] cbusy = 0;
  cluster_cfg_t cfg [NC]; pe_cmd_t cmd [NC]; logic all_idle;
  oe_parallel_ctrl #(.NC(NC)) dut(.clk, .rst_n, .cfg_we(we), .cfg_addr(addr), .cfg_wdata(wdata),
    .cluster_busy(cbusy), .cfg, .cmd, .all_idle);
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic wr(input int cl, input logic [3:0] rg, input logic [31:0] d);
    @(negedge clk); we = 1; addr = {8'(cl), 4'b0, rg}; wdata = d;
    @(negedge clk); we = 0;
  endtask
  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk);
    for (int c = 0; c < NC; c++) begin
      check(cfg[c].iact_sel == {5{3'd5}} && cfg[c].w_sel == {2{2'd2}} && cfg[c].psum_sel == {4{3'd4}},
            "routers unused after reset");
      check(cfg[c].iact_mask == 0 && cmd[c] == '0, "masks clear after reset");
    end
    check(all_idle, "idle after reset");
    for (int c = 0; c < NC; c++) begin
      wr(c, REG_IACT_SEL, 32'(15'h1234 + c));
      wr(c, REG_W_SEL, 32'(c));
      wr(c, REG_PSUM_SEL, 32'(12'h321 + c));
      wr(c, REG_IACT_MASK, 32'hA5A5_0000 + 32'(c));
      wr(c, REG_PE_CFG, 32'(9'h045 + c));
      wr(c, REG_ACT, 32'(c & 1));
    end
    wr(255, REG_W_ROW_MASK, 32'h5);
    wr(255, REG_PSUM_COL, 32'h3);
    for (int c = 0; c < NC; c++) begin
      check(cfg[c].iact_sel == 15'(15'h1234 + c), "iact_sel");
      check(cfg[c].w_sel == 4'(c), "w_sel");
      check(cfg[c].psum_sel == 12'(12'h321 + c), "psum_sel");
      check(cfg[c].iact_mask == 32'hA5A5_0000 + 32'(c), "iact_mask");
      check(cfg[c].pe_cfg == 9'(9'h045 + c), "pe_cfg");
      check(cfg[c].act_mode == act_mode_e'(c & 1), "act_mode");
      check(cfg[c].w_row_mask == 8'h5 && cfg[c].psum_col == 4'h3, "broadcast fields");
    end
    // command pulse to cluster 1 only
    @(negedge clk); we = 1; addr = {8'd1, 4'b0, REG_CMD}; wdata = 32'h2;
    @(negedge clk); we = 0;
    check(cmd[1].start && !cmd[0].start && !cmd[2].start && !all_idle, "start pulse at cluster 1");
    @(negedge clk);
    check(cmd[1] == '0, "pulse lasts one cycle");
    check(all_idle, "idle again");
    cbusy = 3'b100; #1;
    check(!all_idle, "busy cluster blocks all_idle");
    cbusy = 0;
    wr(255, REG_CMD, 32'h5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
