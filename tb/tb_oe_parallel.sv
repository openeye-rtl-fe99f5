// tb_oe_parallel: a 2 x 2 cluster array of 2 x 1 PEs. Activation rows are
// broadcast to all clusters (destination 8'hFF); the weights go to cluster
// 0 only and reach cluster 1 through the east link; cluster 0's results
// travel north through cluster 2 (which adds its own, all-zero, PSUMs)
// and leave there, while cluster 1 returns its results directly. Both
// result streams are compared with a reference computed here.
module tb_oe_parallel;
  import oe_pkg::*;
  localparam int PX = 2, PY = 1, NCOL = 2, NM = 4, CH = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic cfg_we = 0; logic [15:0] cfg_addr = 0; logic [31:0] cfg_wdata = 0; logic all_idle;
  logic iv = 0, ir, wv = 0, wr, pv = 0, pr;
  logic [7:0] idst = 0, wdst = 0, pdst = 0;
  iact_word_t id = '0; weight_word_t wd = '0; psum_t pd = 0;
  logic [3:0] res_v, res_r = 0; psum_t res_d [4];
  oe_parallel #(.CLUSTER_ROWS(2), .CLUSTER_COLS(2), .PE_X(PX), .PE_Y(PY)) dut(.clk, .rst_n,
    .cfg_we, .cfg_addr, .cfg_wdata, .all_idle,
    .iact_valid(iv), .iact_ready(ir), .iact_dest(idst), .iact_data(id),
    .w_valid(wv), .w_ready(wr), .w_dest(wdst), .w_data(wd),
    .psum_valid(pv), .psum_ready(pr), .psum_dest(pdst), .psum_data(pd),
    .res_valid(res_v), .res_ready(res_r), .res_data(res_d));
  int W [NM][CH]; int R [PX][NCOL][CH]; int B [2][PX][NCOL*NM];
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic cfg(input int cl, input logic [3:0] rg, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = {8'(cl), 4'b0, rg}; cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask
  task automatic send_i(input logic [7:0] dst, input iact_word_t x);
    @(posedge clk); #1; idst = dst; id = x; iv = 1;
    forever begin @(negedge clk); if (ir) break; end
    @(posedge clk); #1 iv = 0;
  endtask
  task automatic send_w(input logic [7:0] dst, input weight_word_t x);
    @(posedge clk); #1; wdst = dst; wd = x; wv = 1;
    forever begin @(negedge clk); if (wr) break; end
    @(posedge clk); #1 wv = 0;
  endtask
  task automatic send_p(input logic [7:0] dst, input psum_t x);
    @(posedge clk); #1; pdst = dst; pd = x; pv = 1;
    forever begin @(negedge clk); if (pr) break; end
    @(posedge clk); #1 pv = 0;
  endtask
  task automatic wait_idle();
    repeat (3) @(negedge clk);
    while (!all_idle) @(negedge clk);
  endtask
  initial begin
    repeat (40000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    foreach (W[m, c]) W[m][c] = ($urandom_range(0, 9) < 6) ? $signed($urandom_range(0, 40)) - 20 : 0;
    foreach (R[x, j, c]) R[x][j][c] = ($urandom_range(0, 1) == 1) ? $signed($urandom_range(0, 40)) - 20 : 0;
    foreach (B[g, x, k]) B[g][x][k] = $signed($urandom_range(0, 200)) - 100;
    repeat (3) @(negedge clk); rst_n = 1;
    cfg(255, REG_CMD, 32'h1);
    cfg(255, REG_PE_CFG, {23'b0, 4'(NCOL), 5'(NM)});
    cfg(255, REG_IACT_SEL, {17'b0, 3'd5, 3'd5, 3'd5, 3'd5, 3'd0});
    cfg(255, REG_W_ROW_MASK, 32'h1);
    cfg(0, REG_W_SEL, {28'b0, 2'd0, 2'd0});
    cfg(1, REG_W_SEL, {28'b0, 2'd2, 2'd1});
    cfg(0, REG_PSUM_SEL, {20'b0, 3'd4, 3'd4, 3'd3, 3'd0});
    cfg(1, REG_PSUM_SEL, {20'b0, 3'd3, 3'd4, 3'd4, 3'd0});
    cfg(2, REG_PSUM_SEL, {20'b0, 3'd3, 3'd4, 3'd4, 3'd2});
    begin
      int ptr; ptr = 0;
      for (int c = 0; c < CH; c++) begin
        weight_word_t x; x = '0; x.is_addr = 1;
        for (int m = 0; m < NM; m++) if (W[m][c] != 0) ptr++;
        x.lane[0].w = 8'(ptr); send_w(0, x);
      end
      for (int c = 0; c < CH; c++) for (int m = 0; m < NM; m++) if (W[m][c] != 0) begin
        weight_word_t x; x = '0; x.lane[0] = '{vld: 1'b1, m: 4'(m), w: 8'(W[m][c])}; send_w(0, x);
      end
    end
    for (int x = 0; x < PX; x++) begin
      int ptr; ptr = 0;
      cfg(255, REG_IACT_MASK, 32'(1 << x));
      for (int j = 0; j < NCOL; j++) begin
        for (int c = 0; c < CH; c++) if (R[x][j][c] != 0) ptr++;
        send_i(8'hFF, '{is_addr: 1'b1, val: 8'(ptr), idx: '0});
      end
      for (int j = 0; j < NCOL; j++) for (int c = 0; c < CH; c++) if (R[x][j][c] != 0)
        send_i(8'hFF, '{is_addr: 1'b0, val: 8'(R[x][j][c]), idx: 4'(c)});
      wait_idle();
    end
    cfg(0, REG_CMD, 32'h2); cfg(1, REG_CMD, 32'h2);
    wait_idle();
    cfg(0, REG_CMD, 32'h4); cfg(1, REG_CMD, 32'h4); cfg(2, REG_CMD, 32'h4);
    for (int x = 0; x < PX; x++) begin
      cfg(255, REG_PSUM_COL, 32'(x));
      fork
        for (int k = 0; k < NCOL*NM; k++) begin
          send_p(0, psum_t'(B[0][x][k])); send_p(1, psum_t'(B[1][x][k]));
        end
        for (int k = 0; k < NCOL*NM; k++) begin
          for (int g = 0; g < 2; g++) begin
            int e, ci; e = B[g][x][k]; ci = (g == 0) ? 2 : 1;
            for (int c = 0; c < CH; c++) e += W[k % NM][c] * R[x][k / NM][c];
            forever begin @(negedge clk); res_r[ci] = 1; if (res_v[ci]) break; end
            check(res_d[ci] == psum_t'(e), $sformatf("cluster %0d column %0d entry %0d got %0d exp %0d",
                  ci, x, k, res_d[ci], e));
            @(posedge clk); #1 res_r[ci] = 0;
          end
        end
      join
    end
    wait_idle();
    check(all_idle, "array idle at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
