// tb_oe_top: end-to-end test of the whole accelerator at its default size
// (2 x 2 clusters of 4 x 3 PEs).
//
// A host model drives the 64-bit Wishbone port with a command program that
// runs one row-stationary convolution-style layer on three clusters:
//  * cluster 0 and cluster 1 share the same three filter rows: the weights
//    are sent once to cluster 0, whose weight router copies them to its PEs
//    and east to cluster 1 (horizontal weight sharing between clusters);
//  * activation rows are multicast diagonally: input row r goes to every PE
//    with x + y == r; cluster 1 works on the rows shifted by PE_X;
//  * cluster 2 works on a second group of input channels; in the output
//    phase the results of cluster 0 (bias + its sums) travel north into
//    cluster 2, which adds its own sums, applies ReLU and returns the result
//    to the PSUM RAM (vertical accumulation between clusters);
//  * cluster 1 adds its own bias and returns its results unchanged.
// The host then reads the results from the PSUM RAM and compares them with
// a reference computed here. It counts how often each mechanism happened
// (diagonal multicast, inter-cluster weight and PSUM transfers, ReLU
// clamping, queue-full stalls on the host port, zero skipping, layer count)
// and fails if any never did.
module tb_oe_top;
  import oe_pkg::*;
  localparam int PX = 4, PY = 3, NCOL = 2, NM = 4, CH = 8, NR = PX + PY - 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  logic wb_cyc = 0, wb_stb = 0, wb_we = 0, wb_ack, busy, done;
  logic [31:0] wb_adr = 0;
  logic [63:0] wb_dat_i = 0, wb_dat_o;

  oe_top dut(.clk, .rst_n, .wb_cyc, .wb_stb, .wb_we, .wb_adr, .wb_dat_i, .wb_dat_o, .wb_ack,
             .busy, .done);

  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------- host bus model ----------------
  int stall_cycles = 0;
  task automatic wb_write(input logic [31:0] adr, input logic [63:0] d);
    int n; n = 0;
    @(negedge clk); wb_cyc = 1; wb_stb = 1; wb_we = 1; wb_adr = adr; wb_dat_i = d;
    forever begin @(posedge clk); #1; if (wb_ack) break; n++; end
    if (n > 0) stall_cycles++;
    wb_cyc = 0; wb_stb = 0; wb_we = 0;
  endtask
  task automatic wb_read(input logic [31:0] adr, output logic [63:0] d);
    @(negedge clk); wb_cyc = 1; wb_stb = 1; wb_we = 0; wb_adr = adr;
    forever begin @(posedge clk); #1; if (wb_ack) break; end
    d = wb_dat_o; wb_cyc = 0; wb_stb = 0;
  endtask

  // ---------------- command program ----------------
  logic [63:0] prog [$];
  function automatic logic [63:0] hdr(opcode_e op, int sel, int cl, int n, int base);
    return {op, 2'b0, 2'(sel), 8'(cl), 16'(n), 32'(base)};
  endfunction
  function automatic void cfg(int cl, logic [3:0] rg, logic [31:0] d);
    prog.push_back({OP_CFG, 4'b0, 8'b0, 8'(cl), 4'b0, rg, d});
  endfunction

  // ---------------- data ----------------
  int W  [2][PY][NM][CH];          // [group][filter row][m][c]; group 1 = cluster 2
  int R  [3][NR + PX][NCOL][CH];   // [cluster 0/1 share, -, 2][input row][col][c]
  int B0 [PX][NCOL*NM], B1 [PX][NCOL*NM];
  int exp2 [PX][NCOL*NM], exp1 [PX][NCOL*NM];
  int zeros = 0, nonzeros = 0;

  function automatic int rnd_sparse(int pct_zero);
    if ($urandom_range(0, 99) < pct_zero) return 0;
    return $signed($urandom_range(0, 40)) - 20;
  endfunction

  // CSC words of one activation row, tagged with dest cluster
  function automatic void iact_words(int grp, int row, int dest, ref logic [63:0] q[$]);
    int ptr; ptr = 0;
    for (int j = 0; j < NCOL; j++) begin
      iact_word_t x;
      for (int c = 0; c < CH; c++) if (R[grp][row][j][c] != 0) ptr++;
      x = '{is_addr: 1'b1, val: 8'(ptr), idx: '0};
      q.push_back({8'(dest), 43'b0, x});
    end
    for (int j = 0; j < NCOL; j++)
      for (int c = 0; c < CH; c++) if (R[grp][row][j][c] != 0) begin
        iact_word_t x; x = '{is_addr: 1'b0, val: 8'(R[grp][row][j][c]), idx: 4'(c)};
        q.push_back({8'(dest), 43'b0, x});
      end
  endfunction
  function automatic void w_words(int grp, int y, int dest, ref logic [63:0] q[$]);
    int ptr; ptr = 0;
    // a column's nonzero weights are packed SIMD to a word; the end
    // pointer counts words
    for (int c = 0; c < CH; c++) begin
      weight_word_t x; int nz; x = '0; x.is_addr = 1'b1; nz = 0;
      for (int m = 0; m < NM; m++) if (W[grp][y][m][c] != 0) nz++;
      ptr += (nz + SIMD - 1) / SIMD;
      x.lane[0].w = 8'(ptr);
      q.push_back({8'(dest), 56'(x)});
    end
    for (int c = 0; c < CH; c++) begin
      weight_word_t x; int l; x = '0; l = 0;
      for (int m = 0; m < NM; m++) if (W[grp][y][m][c] != 0) begin
        x.lane[l] = '{vld: 1'b1, m: 4'(m), w: 8'(W[grp][y][m][c])};
        l++;
        if (l == SIMD) begin q.push_back({8'(dest), 56'(x)}); x = '0; l = 0; end
      end
      if (l != 0) q.push_back({8'(dest), 56'(x)});
    end
  endfunction

  // event counters
  int ev_diag = 0, ev_wfwd = 0, ev_pvert = 0, ev_relu = 0, ev_read = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_par.g_r[0].g_c[0].u_cluster.u_pes.iact_valid &&
        dut.u_par.g_r[0].g_c[0].u_cluster.u_pes.iact_ready &&
        $countones(dut.u_par.g_r[0].g_c[0].u_cluster.cfg.iact_mask) > 1) ev_diag++;
    if (dut.u_par.g_r[0].g_c[1].u_cluster.w_west_valid &&
        dut.u_par.g_r[0].g_c[1].u_cluster.w_west_ready) ev_wfwd++;
    if (dut.u_par.g_r[1].g_c[0].u_cluster.nb_psum_in_valid[1] &&
        dut.u_par.g_r[1].g_c[0].u_cluster.nb_psum_in_ready[1]) ev_pvert++;
    if (dut.u_par.g_r[1].g_c[0].u_cluster.u_act.in_valid &&
        dut.u_par.g_r[1].g_c[0].u_cluster.u_act.in_ready &&
        dut.u_par.g_r[1].g_c[0].u_cluster.u_act.in_data < 0) ev_relu++;
  end

  initial begin
    logic [63:0] iq[$], wq[$], pq[$], d;
    int ia_base [3][NR], ia_n [3][NR], w_base [2][PY], w_n [2][PY];
    int compute_cycles, dense_macs;
    repeat (4) @(posedge clk); #1 rst_n = 1;

    // random layer
    foreach (W[g, y, m, c]) W[g][y][m][c] = rnd_sparse(40);
    foreach (R[g, r, j, c]) begin
      R[g][r][j][c] = rnd_sparse(50);
      if (R[g][r][j][c] == 0) zeros++; else nonzeros++;
    end
    foreach (B0[x, k]) B0[x][k] = $signed($urandom_range(0, 200)) - 100;
    foreach (B1[x, k]) B1[x][k] = $signed($urandom_range(0, 200)) - 100;
    // reference: column x, column j, row m
    for (int x = 0; x < PX; x++)
      for (int j = 0; j < NCOL; j++)
        for (int m = 0; m < NM; m++) begin
          int s0, s1, s2;
          s0 = B0[x][j*NM+m]; s1 = B1[x][j*NM+m]; s2 = 0;
          for (int y = 0; y < PY; y++)
            for (int c = 0; c < CH; c++) begin
              s0 += W[0][y][m][c] * R[0][x+y][j][c];
              s1 += W[0][y][m][c] * R[0][x+y+PX][j][c];
              s2 += W[1][y][m][c] * R[2][x+y][j][c];
            end
          exp1[x][j*NM+m] = s1;
          exp2[x][j*NM+m] = (s0 + s2 < 0) ? 0 : s0 + s2;
        end

    // RAM images
    for (int r = 0; r < NR; r++) begin
      ia_base[0][r] = iq.size(); iact_words(0, r, 0, iq);      ia_n[0][r] = iq.size() - ia_base[0][r];
      ia_base[1][r] = iq.size(); iact_words(0, r + PX, 1, iq); ia_n[1][r] = iq.size() - ia_base[1][r];
      ia_base[2][r] = iq.size(); iact_words(2, r, 2, iq);      ia_n[2][r] = iq.size() - ia_base[2][r];
    end
    for (int y = 0; y < PY; y++) begin
      w_base[0][y] = wq.size(); w_words(0, y, 0, wq); w_n[0][y] = wq.size() - w_base[0][y];
      w_base[1][y] = wq.size(); w_words(1, y, 2, wq); w_n[1][y] = wq.size() - w_base[1][y];
    end
    for (int x = 0; x < PX; x++) for (int k = 0; k < NCOL*NM; k++) pq.push_back({8'd0, 56'(B0[x][k])});
    for (int x = 0; x < PX; x++) for (int k = 0; k < NCOL*NM; k++) pq.push_back({8'd1, 56'(B1[x][k])});

    // program
    cfg(255, REG_CMD, 32'h1);                                       // clear
    cfg(255, REG_PE_CFG, {23'b0, 4'(NCOL), 5'(NM)});
    //             EXT            N  S  E  W : iact_sel per output (PE,N,S,E,W)
    cfg(0, REG_IACT_SEL, {17'b0, 3'd5, 3'd5, 3'd5, 3'd5, 3'd0});
    cfg(1, REG_IACT_SEL, {17'b0, 3'd5, 3'd5, 3'd5, 3'd5, 3'd0});
    cfg(2, REG_IACT_SEL, {17'b0, 3'd5, 3'd5, 3'd5, 3'd5, 3'd0});
    cfg(0, REG_W_SEL, {28'b0, 2'd0, 2'd0});                         // PE<-EXT, E<-EXT
    cfg(1, REG_W_SEL, {28'b0, 2'd2, 2'd1});                         // PE<-W
    cfg(2, REG_W_SEL, {28'b0, 2'd2, 2'd0});                         // PE<-EXT
    // psum_sel per output (PE, N, S, EXT): inputs EXT=0 N=1 S=2 RES=3
    cfg(0, REG_PSUM_SEL, {20'b0, 3'd4, 3'd4, 3'd3, 3'd0});          // PE<-EXT, N<-RES
    cfg(1, REG_PSUM_SEL, {20'b0, 3'd3, 3'd4, 3'd4, 3'd0});          // PE<-EXT, EXT<-RES
    cfg(2, REG_PSUM_SEL, {20'b0, 3'd3, 3'd4, 3'd4, 3'd2});          // PE<-S, EXT<-RES
    cfg(0, REG_ACT, ACT_BYPASS); cfg(1, REG_ACT, ACT_BYPASS); cfg(2, REG_ACT, ACT_RELU);
    prog.push_back(hdr(OP_WRITE_RAM, 0, 0, iq.size(), 0)); foreach (iq[i]) prog.push_back(iq[i]);
    prog.push_back(hdr(OP_WRITE_RAM, 1, 0, wq.size(), 0)); foreach (wq[i]) prog.push_back(wq[i]);
    prog.push_back(hdr(OP_WRITE_RAM, 2, 0, pq.size(), 1000)); foreach (pq[i]) prog.push_back(pq[i]);
    // weights, one filter row at a time
    for (int y = 0; y < PY; y++) begin
      cfg(255, REG_W_ROW_MASK, 32'(1 << y));
      prog.push_back(hdr(OP_SEND, 1, 0, w_n[0][y], w_base[0][y]));
      prog.push_back(hdr(OP_SEND, 1, 0, w_n[1][y], w_base[1][y]));
      prog.push_back(hdr(OP_WAIT, 0, 0, 0, 1));
    end
    // activations, one diagonal at a time
    for (int r = 0; r < NR; r++) begin
      logic [31:0] mask; mask = '0;
      for (int y = 0; y < PY; y++) for (int x = 0; x < PX; x++) if (x + y == r) mask[y*PX+x] = 1'b1;
      cfg(255, REG_IACT_MASK, mask);
      for (int g = 0; g < 3; g++) prog.push_back(hdr(OP_SEND, 0, 0, ia_n[g][r], ia_base[g][r]));
      prog.push_back(hdr(OP_WAIT, 0, 0, 0, 1));
    end
    cfg(255, REG_CMD, 32'h2);                                       // start
    prog.push_back(hdr(OP_WAIT, 0, 0, 0, 1));
    // output: clusters 0 -> 2 (north), collected from cluster 2
    cfg(0, REG_CMD, 32'h4); cfg(2, REG_CMD, 32'h4);
    for (int x = 0; x < PX; x++) begin
      cfg(255, REG_PSUM_COL, 32'(x));
      prog.push_back(hdr(OP_SEND, 2, 0, NCOL*NM, 1000 + x*NCOL*NM));
      prog.push_back(hdr(OP_COLLECT, 0, 2, NCOL*NM, x*NCOL*NM));
      prog.push_back(hdr(OP_WAIT, 0, 0, 0, 0));
    end
    prog.push_back(hdr(OP_WAIT, 0, 0, 0, 1));
    // output: cluster 1 on its own
    cfg(1, REG_CMD, 32'h4);
    for (int x = 0; x < PX; x++) begin
      cfg(255, REG_PSUM_COL, 32'(x));
      prog.push_back(hdr(OP_SEND, 2, 0, NCOL*NM, 1000 + (PX + x)*NCOL*NM));
      prog.push_back(hdr(OP_COLLECT, 0, 1, NCOL*NM, 100 + x*NCOL*NM));
      prog.push_back(hdr(OP_WAIT, 0, 0, 0, 0));
    end
    prog.push_back(hdr(OP_WAIT, 0, 0, 0, 1));
    prog.push_back(hdr(OP_LAYER, 0, 0, 0, 0));
    prog.push_back(hdr(OP_END, 0, 0, 0, 0));

    // run it, measuring the compute phase of cluster 0
    fork
      foreach (prog[i]) wb_write(32'h0010_0000, prog[i]);
      begin
        compute_cycles = 0;
        wait (dut.u_par.g_r[0].g_c[0].u_cluster.u_pes.g_y[0].g_x[0].u_pe.state == PE_COMPUTE);
        while (dut.u_par.g_r[0].g_c[0].u_cluster.u_pes.busy) begin @(posedge clk); #1 compute_cycles++; end
      end
    join
    do wb_read(32'h0, d); while (!d[63]);
    check(d[47:32] == 16'd1, "layer count");

    for (int x = 0; x < PX; x++)
      for (int k = 0; k < NCOL*NM; k++) begin
        logic [63:0] r2, r1;
        wb_read(32'h0020_0000 + 8 * (x*NCOL*NM + k), r2);
        wb_read(32'h0020_0000 + 8 * (100 + x*NCOL*NM + k), r1);
        ev_read += 2;
        check($signed(r2[PSUM_W-1:0]) == exp2[x][k],
              $sformatf("cluster2 result x=%0d k=%0d got %0d exp %0d", x, k, $signed(r2[PSUM_W-1:0]), exp2[x][k]));
        check($signed(r1[PSUM_W-1:0]) == exp1[x][k],
              $sformatf("cluster1 result x=%0d k=%0d got %0d exp %0d", x, k, $signed(r1[PSUM_W-1:0]), exp1[x][k]));
      end

    // dense MACs one PE would need for its two columns: NCOL*CH*NM
    dense_macs = NCOL * CH * NM;
    $display("compute phase %0d cycles (dense MAC count per PE %0d), cycles total %0d",
             compute_cycles, dense_macs, cyc);
    $display("events: diag multicast %0d, weight east %0d, psum north %0d, relu clamp %0d, host stalls %0d, reads %0d, zero iacts skipped %0d",
             ev_diag, ev_wfwd, ev_pvert, ev_relu, stall_cycles, ev_read, zeros);
    check(ev_diag > 0, "diagonal multicast happened");
    check(ev_wfwd > 0, "weights forwarded between clusters");
    check(ev_pvert == PX*NCOL*NM, "psums passed north between clusters");
    check(ev_relu > 0, "ReLU clamped a value");
    check(stall_cycles > 0, "host port stalled on a full queue");
    check(zeros > 0, "zero activations were skipped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
