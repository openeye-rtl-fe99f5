// tb_oe_mnist_dense: runs the two fully connected layers of the evaluated
// MNIST network through the whole accelerator at its default size
// (2 x 2 clusters of 4 x 3 PEs) and checks every output:
//   dense 1: 1568 -> 32, ReLU      dense 2: 32 -> 10, no activation
// Inputs are random 8-bit activations with about half of them zero.
//
// Mapping (this test's own; the host is responsible for it): a fully
// connected layer is a PE computation with one activation column: a PE
// holds 6 inputs (CSC rows 0..5) and the weights of those inputs for 16
// outputs (96 weights), PE row y taking input chunk y, so each PE column
// sums 18 inputs on its way up the PSUM chain. All PEs of a row share the
// row's weights, so with a batch of one every column computes the same
// sums; each column still collects its own copy, and all are checked. The
// 16-output groups go to separate clusters, which run in parallel. The
// input chunks of one output group accumulate on chip over passes: the
// first pass takes the bias from the PSUM RAM, later passes take the sums
// the cluster produced in the pass before; only the last pass applies the
// layer's activation (dense 1 needs 88 passes, dense 2 two).
module tb_oe_mnist_dense;
  import oe_pkg::*;
  localparam int PX = 4, PY = 3, NMG = 16, CH = 6, NCL = 4;
  localparam int MAXN = 1568, MAXM = 32;
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
    repeat (3000000) @(posedge clk);
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
  int N, M, NFG, NPASS;
  int x_in [MAXN];
  int Wt [MAXM][MAXN];
  int bias [MAXM];
  int zeros = 0, nonzeros = 0;

  function automatic int xin(int i);
    return (i < N) ? x_in[i] : 0;
  endfunction
  function automatic int wt(int m, int i);
    return (i < N && m < M) ? Wt[m][i] : 0;
  endfunction
  // PSUM RAM address of output m as produced by PE column x
  function automatic int oaddr(int x, int m);
    return ((m / NMG) * PX + x) * NMG + m % NMG;
  endfunction

  // CSC words of input chunk k (6 inputs) as one activation column
  function automatic void iact_words(int k, int dest, ref logic [63:0] q[$]);
    int ptr; iact_word_t x; ptr = 0;
    for (int r = 0; r < CH; r++) if (xin(k * CH + r) != 0) ptr++;
    x = '{is_addr: 1'b1, val: 8'(ptr), idx: '0};
    q.push_back({8'(dest), 43'b0, x});
    for (int r = 0; r < CH; r++) if (xin(k * CH + r) != 0) begin
      x = '{is_addr: 1'b0, val: 8'(xin(k * CH + r)), idx: 4'(r)};
      q.push_back({8'(dest), 43'b0, x});
    end
  endfunction
  // weights of input chunk k for output group fg, to cluster dest
  function automatic void w_words(int k, int fg, int dest, ref logic [63:0] q[$]);
    int ptr; ptr = 0;
    for (int r = 0; r < CH; r++) begin
      weight_word_t x; x = '0; x.is_addr = 1'b1;
      for (int mm = 0; mm < NMG; mm++) if (wt(fg * NMG + mm, k * CH + r) != 0) ptr++;
      x.lane[0].w = 8'(ptr);
      q.push_back({8'(dest), 56'(x)});
    end
    for (int r = 0; r < CH; r++)
      for (int mm = 0; mm < NMG; mm++) if (wt(fg * NMG + mm, k * CH + r) != 0) begin
        weight_word_t x; x = '0;
        x.lane[0] = '{vld: 1'b1, m: 4'(mm), w: 8'(wt(fg * NMG + mm, k * CH + r))};
        q.push_back({8'(dest), 56'(x)});
      end
  endfunction

  task automatic run_layer(input int n, input int m, input bit relu);
    logic [63:0] d;
    longint t0;
    int clamps;
    N = n; M = m; NFG = (M + NMG - 1) / NMG; NPASS = (N + CH * PY - 1) / (CH * PY);
    zeros = 0; nonzeros = 0; clamps = 0; t0 = cyc;
    for (int i = 0; i < N; i++) begin
      x_in[i] = ($urandom_range(0, 1) == 0) ? 0 : $urandom_range(1, 60);
      if (x_in[i] == 0) zeros++; else nonzeros++;
    end
    for (int mm = 0; mm < M; mm++) begin
      bias[mm] = $signed($urandom_range(0, 400)) - 200;
      for (int i = 0; i < N; i++) Wt[mm][i] = ($urandom_range(0, 2) == 0) ? 0 : $signed($urandom_range(0, 16)) - 8;
    end
    put(hdr(OP_WRITE_RAM, 2, 0, NFG * NMG, BIAS_BASE));
    for (int fg = 0; fg < NFG; fg++) for (int mm = 0; mm < NMG; mm++)
      put({8'(fg), 56'((fg * NMG + mm < M) ? bias[fg * NMG + mm] : 0)});

    cfg(255, REG_PE_CFG, {23'b0, 4'd1, 5'(NMG)});
    cfg(255, REG_IACT_SEL, {17'b0, 3'd5, 3'd5, 3'd5, 3'd5, 3'd0});  // PE <- EXT
    cfg(255, REG_W_SEL, {28'b0, 2'd2, 2'd0});                        // PE <- EXT
    cfg(255, REG_PSUM_SEL, {20'b0, 3'd3, 3'd4, 3'd4, 3'd0});         // PE <- EXT, EXT <- RES

    for (int p = 0; p < NPASS; p++) begin
      logic [63:0] iq[$], wq[$];
      int ia_base [PY], ia_n [PY], w_base [NCL][PY], w_n [NCL][PY];
      for (int y = 0; y < PY; y++) begin
        ia_base[y] = iq.size(); iact_words(p * PY + y, 255, iq); ia_n[y] = iq.size() - ia_base[y];
        for (int fg = 0; fg < NFG; fg++) begin
          w_base[fg][y] = wq.size(); w_words(p * PY + y, fg, fg, wq); w_n[fg][y] = wq.size() - w_base[fg][y];
        end
      end
      cfg(255, REG_CMD, 32'h1);                                      // clear
      cfg(255, REG_ACT, (relu && p == NPASS - 1) ? ACT_RELU : ACT_BYPASS);
      put(hdr(OP_WAIT, 0, 0, 0, 1));
      put(hdr(OP_WRITE_RAM, 0, 0, iq.size(), 0)); foreach (iq[i]) put(iq[i]);
      put(hdr(OP_WRITE_RAM, 1, 0, wq.size(), 0)); foreach (wq[i]) put(wq[i]);
      for (int y = 0; y < PY; y++) begin
        cfg(255, REG_W_ROW_MASK, 32'(1 << y));
        for (int fg = 0; fg < NFG; fg++) put(hdr(OP_SEND, 1, 0, w_n[fg][y], w_base[fg][y]));
        put(hdr(OP_WAIT, 0, 0, 0, 1));
        cfg(255, REG_IACT_MASK, 32'((1 << PX) - 1) << (y * PX));  // the whole PE row
        put(hdr(OP_SEND, 0, 0, ia_n[y], ia_base[y]));
        put(hdr(OP_WAIT, 0, 0, 0, 1));
      end
      for (int fg = 0; fg < NFG; fg++) cfg(fg, REG_CMD, 32'h2);     // start
      put(hdr(OP_WAIT, 0, 0, 0, 1));
      for (int fg = 0; fg < NFG; fg++) cfg(fg, REG_CMD, 32'h4);     // out_go
      for (int x = 0; x < PX; x++) begin
        cfg(255, REG_PSUM_COL, 32'(x));
        for (int fg = 0; fg < NFG; fg++) begin
          put(hdr(OP_SEND, 2, 0, NMG, (p == 0) ? BIAS_BASE + fg * NMG : oaddr(x, fg * NMG)));
          put(hdr(OP_COLLECT, 0, fg, NMG, oaddr(x, fg * NMG)));
          put(hdr(OP_WAIT, 0, 0, 0, 0));
        end
      end
      put(hdr(OP_WAIT, 0, 0, 0, 1));
    end
    put(hdr(OP_LAYER, 0, 0, 0, 0));
    put(hdr(OP_END, 0, 0, 0, 0));
    do wb_read(32'h0, d); while (!d[63]);
    $display("dense %0d -> %0d: %0d passes, done after %0d cycles", N, M, NPASS, cyc - t0);

    for (int mm = 0; mm < M; mm++) begin
      int e;
      e = bias[mm];
      for (int i = 0; i < N; i++) e += Wt[mm][i] * x_in[i];
      if (relu && e < 0) begin e = 0; clamps++; end
      for (int x = 0; x < PX; x++) begin
        wb_read(32'h0020_0000 + 8 * oaddr(x, mm), d);
        check($signed(d[PSUM_W-1:0]) == e,
              $sformatf("out[%0d] column %0d got %0d exp %0d", mm, x, $signed(d[PSUM_W-1:0]), e));
      end
    end
    $display("  inputs: %0d zero, %0d nonzero; ReLU clamped %0d of %0d outputs", zeros, nonzeros, clamps, M);
  endtask

  initial begin
    repeat (4) @(posedge clk); #1 rst_n = 1;
    run_layer(1568, 32, 1'b1);
    run_layer(32, 10, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
