// tb_oe_cluster: one cluster with a 2 x 2 PE array, driven through its
// routers. Activations and weights enter on EXT; the weight router also
// copies every weight word east (checked word by word); biases enter on the
// PSUM EXT input; results leave through the activation unit (ReLU) and the
// PSUM router's north output and are compared with a reference computed
// here. An activation stream entering from the north is routed straight to
// the east output and checked as well (neighbour pass-through).
module tb_oe_cluster;
  import oe_pkg::*;
  localparam int PX = 2, PY = 2, NCOL = 2, NM = 4, CH = 8, NR = PX + PY - 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  pe_cmd_t cmd = '0; cluster_cfg_t ccfg; pe_cfg_t cfg;
  logic [PX*PY-1:0] iact_mask = 0; logic [PY-1:0] w_row_mask = 0; logic [3:0] psum_col = 0;
  logic iv = 0, ir, wv = 0, wr, piv = 0, pir, pov, por = 0, busy, eov, eor = 0;
  iact_word_t id = '0; weight_word_t wd = '0, ewd; psum_t pid = 0, pod;
  logic [3:0] nb_iv = 0, nb_ir, nb_ov, nb_or;
  iact_word_t nb_id [4]; iact_word_t nb_od [4];
  logic [1:0] ps_iv = 0, ps_ir, ps_ov, ps_or;
  psum_t ps_id [2]; psum_t ps_od [2];
  logic wwv = 0, wwr;
  weight_word_t wwd = '0;
  weight_word_t wsent [$];
  iact_word_t   nsent [$];
  int w_east_seen = 0, pass_seen = 0;
  always_comb begin
    ccfg = '0;
    ccfg.iact_sel  = {3'd5, 3'd1, 3'd5, 3'd5, 3'd0};   // PE<-EXT, E<-N
    ccfg.w_sel     = {2'd0, 2'd0};                     // PE<-EXT, E<-EXT
    ccfg.psum_sel  = {3'd4, 3'd4, 3'd3, 3'd0};         // PE<-EXT, N<-RES
    ccfg.iact_mask = 32'(iact_mask);
    ccfg.w_row_mask = 8'(w_row_mask);
    ccfg.psum_col  = psum_col;
    ccfg.pe_cfg    = cfg;
    ccfg.act_mode  = ACT_RELU;
  end
  assign pov = ps_ov[0];
  assign pod = ps_od[0];
  assign ps_or = {1'b1, por};
  assign nb_or = 4'b1111;
  oe_cluster #(.PE_X(PX), .PE_Y(PY)) dut(.clk, .rst_n, .cfg(ccfg), .cmd, .busy,
    .ext_iact_valid(iv), .ext_iact_ready(ir), .ext_iact_data(id),
    .ext_w_valid(wv), .ext_w_ready(wr), .ext_w_data(wd),
    .ext_psum_in_valid(piv), .ext_psum_in_ready(pir), .ext_psum_in_data(pid),
    .ext_psum_out_valid(), .ext_psum_out_ready(1'b1), .ext_psum_out_data(),
    .nb_iact_in_valid(nb_iv), .nb_iact_in_ready(nb_ir), .nb_iact_in_data(nb_id),
    .nb_iact_out_valid(nb_ov), .nb_iact_out_ready(nb_or), .nb_iact_out_data(nb_od),
    .w_west_valid(wwv), .w_west_ready(wwr), .w_west_data(wwd),
    .w_east_valid(eov), .w_east_ready(eor), .w_east_data(ewd),
    .nb_psum_in_valid(ps_iv), .nb_psum_in_ready(ps_ir), .nb_psum_in_data(ps_id),
    .nb_psum_out_valid(ps_ov), .nb_psum_out_ready(ps_or), .nb_psum_out_data(ps_od));
  initial begin
    foreach (nb_id[i]) nb_id[i] = '0;
    ps_id[0] = 0; ps_id[1] = 0;
  end
  always @(negedge clk) eor = ($urandom_range(0, 2) != 0);
  always @(posedge clk) if (rst_n) begin
    if (eov && eor) begin
      check(wsent.size() > 0 && ewd == wsent[0], "weight copied east");
      if (wsent.size() > 0) void'(wsent.pop_front());
      w_east_seen++;
    end
    if (nb_iv[0] && nb_ir[0]) nsent.push_back(nb_id[0]);
    if (nb_ov[2]) begin
      check(nsent.size() > 0 && nb_od[2] == nsent[0], "north activation passed east");
      if (nsent.size() > 0) void'(nsent.pop_front());
      pass_seen++;
    end
  end
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
    wsent.push_back(x);
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
      repeat (3) @(negedge clk); while (busy) @(negedge clk);
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
      repeat (3) @(negedge clk); while (busy) @(negedge clk);
      iact_mask = '0;
      for (int y = 0; y < PY; y++) for (int x = 0; x < PX; x++) if (x + y == r) iact_mask[y*PX+x] = 1'b1;
      for (int j = 0; j < NCOL; j++) begin
        for (int c = 0; c < CH; c++) if (R[r][j][c] != 0) ptr++;
        send_i('{is_addr: 1'b1, val: 8'(ptr), idx: '0});
      end
      for (int j = 0; j < NCOL; j++) for (int c = 0; c < CH; c++) if (R[r][j][c] != 0)
        send_i('{is_addr: 1'b0, val: 8'(R[r][j][c]), idx: 4'(c)});
    end
    // activations from the north neighbour pass straight through to the east
    for (int i = 0; i < 10; i++) begin
      @(posedge clk); #1;
      nb_id[0] = '{is_addr: 1'b0, val: 8'($urandom), idx: 4'(i)}; nb_iv[0] = 1;
      forever begin @(negedge clk); if (nb_ir[0]) break; end
      @(posedge clk); #1 nb_iv[0] = 0;
    end
    repeat (8) @(negedge clk);
    check(!busy, "idle after loading");
    check(pass_seen == 10, "all pass-through words seen");
    check(wsent.size() == 0 && w_east_seen > 0, "all weights copied east");
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
          if (e < 0) e = 0;
          forever begin @(negedge clk); por = ($urandom_range(0, 1) == 1); if (pov && por) break; end
          check(pod == psum_t'(e), $sformatf("column %0d entry %0d got %0d exp %0d", x, k, pod, e));
          @(posedge clk); #1 por = 0;
        end
      join
    end
    repeat (6) @(negedge clk);
    check(!busy, "idle after output");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
