// tb_oe_mnist_conv23: runs the second and third convolution layers of the
// evaluated MNIST network through the whole accelerator at its default size
// (2 x 2 clusters of 4 x 3 PEs) and checks every output:
//   conv 2: 14x14x16 -> 14x14x32, 3x3 same padding, ReLU
//   conv 3:  7x7x32  ->  7x7x32,  3x3 same padding, ReLU
// Inputs are random 8-bit activations with about half of them zero (as
// after a ReLU); weights are random with a third of them zero.
//
// Mapping (this test's own; the host is responsible for it): a PE holds
// 2 output columns x 16 filters (32 PSUMs) and the taps of 2 input
// channels x 3 horizontal positions, folded into the CSC row index
// (row = 3 * channel-in-group + tap), i.e. at most 12 activations and 96
// weights. Each cluster owns a band of 4 output rows; PE column x is the
// row inside the band, PE row y the filter row, and input row
// 4*band + r - 1 is multicast to the PEs with x + y == r. A layer is thus
// cut into passes over (filter group of 16, channel group of 2, column
// pair). The channel groups of one output block accumulate on chip: the
// first pass takes the filter bias from the PSUM RAM, every later pass
// takes the sums collected by the previous pass (they are tagged with the
// cluster that produced them, so the same region can be sent back), and
// only the last channel group applies ReLU. Output rows and columns past
// the layer edge are computed on zero padding and ignored.
module tb_oe_mnist_conv23;
  import oe_pkg::*;
  localparam int PX = 4, PY = 3, NCOL = 2, NMG = 16, CG = 2, NCL = 4;
  localparam int MAXH = 14, MAXC = 32, MAXM = 32;
  localparam int BIAS_BASE = 12000;

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
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (6000000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------- host bus model ----------------
  task automatic wb_write(input logic [31:0] adr, input logic [63:0] d);
    @(negedge clk); wb_cyc = 1; wb_stb = 1; wb_we = 1; wb_adr = adr; wb_dat_i = d;
    forever begin @(posedge clk); #1; if (wb_ack) break; end
    wb_cyc = 0; wb_stb = 0; wb_we = 0;
  endtask
  task automatic wb_read(input logic [31:0] adr, output logic [63:0] d);
    @(negedge clk); wb_cyc = 1; wb_stb = 1; wb_we = 0; wb_adr = adr;
    forever begin @(posedge clk); #1; if (wb_ack) break; end
    d = wb_dat_o; wb_cyc = 0; wb_stb = 0;
  endtask
  task automatic put(input logic [63:0] w);
    wb_write(32'h0010_0000, w);
  endtask
  function automatic logic [63:0] hdr(opcode_e op, int sel, int cl, int n, int base);
    return {op, 2'b0, 2'(sel), 8'(cl), 16'(n), 32'(base)};
  endfunction
  task automatic cfg(int cl, logic [3:0] rg, logic [31:0] d);
    put({OP_CFG, 4'b0, 8'b0, 8'(cl), 4'b0, rg, d});
  endtask

  // ---------------- layer data ----------------
  int H, C, M, NFG, NCG, HP, WP, NB;
  int act [MAXH][MAXH][MAXC];
  int K [MAXM][MAXC][3][3];
  int bias [MAXM];
  int zeros = 0, nonzeros = 0;

  function automatic int px(int i, int j, int c);
    if (i < 0 || i >= H || j < 0 || j >= H) return 0;
    return act[i][j][c];
  endfunction
  function automatic int ref_out(int i, int j, int m);
    int s; s = bias[m];
    for (int c = 0; c < C; c++)
      for (int ky = 0; ky < 3; ky++) for (int kx = 0; kx < 3; kx++)
        s += K[m][c][ky][kx] * px(i + ky - 1, j + kx - 1, c);
    return s;
  endfunction
  // PSUM RAM address of output (row, col, m): blocks of 16 filters
  function automatic int oaddr(int row, int col, int m);
    return ((row * NFG + m / NMG) * WP + col) * NMG + m % NMG;
  endfunction

  // CSC words of input row i, columns j0, j0+1, channel group cg
  function automatic void iact_words(int i, int j0, int cg, int dest, ref logic [63:0] q[$]);
    int ptr; ptr = 0;
    for (int j = 0; j < NCOL; j++) begin
      iact_word_t x;
      for (int cc = 0; cc < CG; cc++) for (int kx = 0; kx < 3; kx++)
        if (px(i, j0 + j + kx - 1, cg * CG + cc) != 0) ptr++;
      x = '{is_addr: 1'b1, val: 8'(ptr), idx: '0};
      q.push_back({8'(dest), 43'b0, x});
    end
    for (int j = 0; j < NCOL; j++)
      for (int cc = 0; cc < CG; cc++) for (int kx = 0; kx < 3; kx++)
        if (px(i, j0 + j + kx - 1, cg * CG + cc) != 0) begin
          iact_word_t x;
          x = '{is_addr: 1'b0, val: 8'(px(i, j0 + j + kx - 1, cg * CG + cc)), idx: 4'(cc * 3 + kx)};
          q.push_back({8'(dest), 43'b0, x});
        end
  endfunction
  // weights of filter row y, filter group fg, channel group cg, broadcast
  function automatic void w_words(int y, int fg, int cg, ref logic [63:0] q[$]);
    int ptr; ptr = 0;
    for (int cc = 0; cc < CG; cc++) for (int kx = 0; kx < 3; kx++) begin
      weight_word_t x; x = '0; x.is_addr = 1'b1;
      for (int mm = 0; mm < NMG; mm++) if (K[fg*NMG+mm][cg*CG+cc][y][kx] != 0) ptr++;
      x.lane[0].w = 8'(ptr);
      q.push_back({8'hFF, 56'(x)});
    end
    for (int cc = 0; cc < CG; cc++) for (int kx = 0; kx < 3; kx++)
      for (int mm = 0; mm < NMG; mm++) if (K[fg*NMG+mm][cg*CG+cc][y][kx] != 0) begin
        weight_word_t x; x = '0;
        x.lane[0] = '{vld: 1'b1, m: 4'(mm), w: 8'(K[fg*NMG+mm][cg*CG+cc][y][kx])};
        q.push_back({8'hFF, 56'(x)});
      end
  endfunction

  task automatic run_layer(input int h, input int c, input int m);
    logic [63:0] wq[$], d;
    int w_base [2][16][PY], w_n [2][16][PY];
    longint t0;
    int relu_clamps;
    H = h; C = c; M = m; NFG = M / NMG; NCG = C / CG;
    HP = (H + PX - 1) / PX * PX; WP = (H + NCOL - 1) / NCOL * NCOL; NB = HP / PX;
    zeros = 0; nonzeros = 0; relu_clamps = 0; t0 = cyc;
    for (int i = 0; i < H; i++) for (int j = 0; j < H; j++) for (int cc = 0; cc < C; cc++) begin
      act[i][j][cc] = ($urandom_range(0, 1) == 0) ? 0 : $urandom_range(1, 60);
      if (act[i][j][cc] == 0) zeros++; else nonzeros++;
    end
    for (int mm = 0; mm < M; mm++) begin
      bias[mm] = $signed($urandom_range(0, 400)) - 200;
      for (int cc = 0; cc < C; cc++) for (int y = 0; y < 3; y++) for (int x = 0; x < 3; x++)
        K[mm][cc][y][x] = ($urandom_range(0, 2) == 0) ? 0 : $signed($urandom_range(0, 20)) - 10;
    end
    // weights for every (filter group, channel group, filter row) and biases
    for (int fg = 0; fg < NFG; fg++) for (int cg = 0; cg < NCG; cg++) for (int y = 0; y < PY; y++) begin
      w_base[fg][cg][y] = wq.size(); w_words(y, fg, cg, wq); w_n[fg][cg][y] = wq.size() - w_base[fg][cg][y];
    end
    put(hdr(OP_WRITE_RAM, 1, 0, wq.size(), 0)); foreach (wq[i]) put(wq[i]);
    put(hdr(OP_WRITE_RAM, 2, 0, NCL * NFG * NCOL * NMG, BIAS_BASE));
    for (int cl = 0; cl < NCL; cl++) for (int fg = 0; fg < NFG; fg++)
      for (int j = 0; j < NCOL; j++) for (int mm = 0; mm < NMG; mm++)
        put({8'(cl), 56'(bias[fg*NMG+mm])});

    cfg(255, REG_PE_CFG, {23'b0, 4'(NCOL), 5'(NMG)});
    cfg(255, REG_IACT_SEL, {17'b0, 3'd5, 3'd5, 3'd5, 3'd5, 3'd0});  // PE <- EXT
    cfg(255, REG_W_SEL, {28'b0, 2'd2, 2'd0});                        // PE <- EXT
    cfg(255, REG_PSUM_SEL, {20'b0, 3'd3, 3'd4, 3'd4, 3'd0});         // PE <- EXT, EXT <- RES

    for (int fg = 0; fg < NFG; fg++)
      for (int j0 = 0; j0 < WP; j0 += NCOL)
        for (int cg = 0; cg < NCG; cg++) begin
          logic [63:0] iq[$];
          int ia_base [NCL][PX+PY-1], ia_n [NCL][PX+PY-1];
          for (int r = 0; r < PX + PY - 1; r++)
            for (int cl = 0; cl < NB; cl++) begin
              ia_base[cl][r] = iq.size(); iact_words(PX * cl + r - 1, j0, cg, cl, iq);
              ia_n[cl][r] = iq.size() - ia_base[cl][r];
            end
          cfg(255, REG_CMD, 32'h1);                                  // clear
          cfg(255, REG_ACT, (cg == NCG - 1) ? ACT_RELU : ACT_BYPASS);
          put(hdr(OP_WAIT, 0, 0, 0, 1));
          put(hdr(OP_WRITE_RAM, 0, 0, iq.size(), 0)); foreach (iq[i]) put(iq[i]);
          for (int y = 0; y < PY; y++) begin
            cfg(255, REG_W_ROW_MASK, 32'(1 << y));
            put(hdr(OP_SEND, 1, 0, w_n[fg][cg][y], w_base[fg][cg][y]));
            put(hdr(OP_WAIT, 0, 0, 0, 1));
          end
          for (int r = 0; r < PX + PY - 1; r++) begin
            logic [31:0] mask; mask = '0;
            for (int y = 0; y < PY; y++) for (int x = 0; x < PX; x++) if (x + y == r) mask[y*PX+x] = 1'b1;
            cfg(255, REG_IACT_MASK, mask);
            for (int cl = 0; cl < NB; cl++) put(hdr(OP_SEND, 0, 0, ia_n[cl][r], ia_base[cl][r]));
            put(hdr(OP_WAIT, 0, 0, 0, 1));
          end
          for (int cl = 0; cl < NB; cl++) cfg(cl, REG_CMD, 32'h2);   // start
          put(hdr(OP_WAIT, 0, 0, 0, 1));
          for (int cl = 0; cl < NB; cl++) cfg(cl, REG_CMD, 32'h4);   // out_go
          for (int x = 0; x < PX; x++) begin
            cfg(255, REG_PSUM_COL, 32'(x));
            for (int cl = 0; cl < NB; cl++) begin
              int blk; blk = oaddr(PX * cl + x, j0, fg * NMG);
              put(hdr(OP_SEND, 2, 0, NCOL * NMG,
                      (cg == 0) ? BIAS_BASE + (cl * NFG + fg) * NCOL * NMG : blk));
              put(hdr(OP_COLLECT, 0, cl, NCOL * NMG, blk));
              put(hdr(OP_WAIT, 0, 0, 0, 0));
            end
          end
          put(hdr(OP_WAIT, 0, 0, 0, 1));
        end
    put(hdr(OP_LAYER, 0, 0, 0, 0));
    put(hdr(OP_END, 0, 0, 0, 0));
    do wb_read(32'h0, d); while (!d[63]);
    $display("conv %0dx%0dx%0d -> %0d: %0d passes, done after %0d cycles",
             H, H, C, M, NFG * (WP / NCOL) * NCG, cyc - t0);

    for (int i = 0; i < H; i++)
      for (int j = 0; j < H; j++)
        for (int mm = 0; mm < M; mm++) begin
          int e;
          e = ref_out(i, j, mm);
          if (e < 0) begin e = 0; relu_clamps++; end
          wb_read(32'h0020_0000 + 8 * oaddr(i, j, mm), d);
          check($signed(d[PSUM_W-1:0]) == e,
                $sformatf("out[%0d][%0d][%0d] got %0d exp %0d", i, j, mm, $signed(d[PSUM_W-1:0]), e));
        end
    $display("  activations: %0d zero, %0d nonzero; ReLU clamped %0d of %0d outputs",
             zeros, nonzeros, relu_clamps, H * H * M);
    check(relu_clamps > 0 && relu_clamps < H * H * M, "ReLU active on part of the outputs");
  endtask

  initial begin
    repeat (4) @(posedge clk); #1 rst_n = 1;
    run_layer(14, 16, 32);
    run_layer(7, 32, 32);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
