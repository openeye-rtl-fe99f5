// tb_oe_pe_cluster: a 2 x 2 PE array running one row-stationary step.
// Filter row y goes to PE row y (w_row_mask), input row r is multicast to
// the diagonal x + y == r (iact_mask), then each PE column is read out in
// turn (psum_col) with a bias entering at the bottom; the top output must
// equal bias + the sum over both PE rows, computed here. A broadcast
// weight word with both row bits set checks that the rows stay in step.
module tb_oe_pe_cluster;
  import oe_pkg::*;
  localparam int PX = 2, PY = 2, NCOL = 2, NM = 4, CH = 8, NR = PX + PY - 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  pe_cmd_t cmd = '0; pe_cfg_t cfg;
  logic [PX*PY-1:0] iact_mask = 0; logic [PY-1:0] w_row_mask = 0; logic [3:0] psum_col = 0;
  logic iv = 0, ir, wv = 0, wr, piv = 0, pir, pov, por = 0, busy;
  iact_word_t id = '0; weight_word_t wd = '0; psum_t pid = 0, pod;
  oe_pe_cluster #(.PE_X(PX), .PE_Y(PY)) dut(.clk, .rst_n, .cmd, .cfg, .iact_mask, .w_row_mask,
    .psum_col, .iact_valid(iv), .iact_ready(ir), .iact_data(id), .w_valid(wv), .w_ready(wr),
    .w_data(wd), .psum_in_valid(piv), .psum_in_ready(pir), .psum_in_data(pid),
    .psum_out_valid(pov), .psum_out_ready(por), .psum_out_data(pod), .busy);
  int W [PY][NM][CH]; int R [NR][NCOL][CH]; int B [PX][NCOL*NM];
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic send_i(input iact_word_t x);
    @(posedge clk); #1;
    id = x; iv = 1; forever begin @(negedge clk); if (ir) break; end
    @(posedge clk); #1 iv = 0;
  endtask
  task automatic send_w(input weight_word_t x);
    @(posedge clk); #1;
    wd = x; wv = 1; forever begin @(negedge clk); if (wr) break; end
    @(posedge clk); #1 wv = 0;
  endtask
  task automatic pulse(input pe_cmd_t c);
    @(negedge clk); cmd = c; @(negedge clk); cmd = '0;
  endtask
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    cfg.n_cols = NCOL; cfg.n_m = NM;
    foreach (W[y, m, c]) W[y][m][c] = ($urandom_range(0, 9) < 6) ? $signed($urandom_range(0, 40)) - 20 : 0;
    foreach (R[r, j, c]) R[r][j][c] = ($urandom_range(0, 1) == 1) ? $signed($urandom_range(0, 40)) - 20 : 0;
    foreach (B[x, k]) B[x][k] = $signed($urandom_range(0, 200)) - 100;
    repeat (3) @(negedge clk); rst_n = 1;
    pulse('{clear: 1'b1, start: 1'b0, out_go: 1'b0});
    for (int y = 0; y < PY; y++) begin
      int ptr; ptr = 0;
      w_row_mask = PY'(1 << y);
      for (int c = 0; c < CH; c++) begin
        weight_word_t x; x = '0; x.is_addr = 1;
        for (int m = 0; m < NM; m++) if (W[y][m][c] != 0) ptr++;
        x.lane[0].w = 8'(ptr); send_w(x);
      end
      for (int c = 0; c < CH; c++) for (int m = 0; m < NM; m++) if (W[y][m][c] != 0) begin
        weight_word_t x; x = '0; x.lane[0] = '{vld: 1'b1, m: 4'(m), w: 8'(W[y][m][c])}; send_w(x);
      end
    end
    for (int r = 0; r < NR; r++) begin
      int ptr; ptr = 0;
      iact_mask = '0;
      for (int y = 0; y < PY; y++) for (int x = 0; x < PX; x++) if (x + y == r) iact_mask[y*PX+x] = 1'b1;
      for (int j = 0; j < NCOL; j++) begin
        for (int c = 0; c < CH; c++) if (R[r][j][c] != 0) ptr++;
        send_i('{is_addr: 1'b1, val: 8'(ptr), idx: '0});
      end
      for (int j = 0; j < NCOL; j++) for (int c = 0; c < CH; c++) if (R[r][j][c] != 0)
        send_i('{is_addr: 1'b0, val: 8'(R[r][j][c]), idx: 4'(c)});
    end
    repeat (5) @(negedge clk);
    check(!busy, "idle after loading");
    pulse('{clear: 1'b0, start: 1'b1, out_go: 1'b0});
    check(busy, "busy while computing");
    wait (!busy); @(negedge clk);
    pulse('{clear: 1'b0, start: 1'b0, out_go: 1'b1});
    for (int x = 0; x < PX; x++) begin
      psum_col = 4'(x);
      fork
        for (int k = 0; k < NCOL*NM; k++) begin
          @(posedge clk); #1;
          pid = psum_t'(B[x][k]); piv = 1;
          forever begin @(negedge clk); if (pir) break; end
          @(posedge clk); #1 piv = 0;
        end
        for (int k = 0; k < NCOL*NM; k++) begin
          int e; e = B[x][k];
          for (int y = 0; y < PY; y++) for (int c = 0; c < CH; c++)
            e += W[y][k % NM][c] * R[x+y][k / NM][c];
          forever begin @(negedge clk); por = ($urandom_range(0, 1) == 1); if (pov && por) break; end
          check(pod == psum_t'(e), $sformatf("column %0d entry %0d got %0d exp %0d", x, k, pod, e));
          @(posedge clk); #1 por = 0;
        end
      join
    end
    repeat (4) @(negedge clk);
    check(!busy, "idle after output");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
