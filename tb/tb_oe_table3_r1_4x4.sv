// tb_oe_table3_r1_4x4: the first MNIST convolution layer (28x28x1 -> 16,
// 3x3 same padding, ReLU) on the smallest cluster count of the evaluated
// configurations with the tallest PE array: 1 cluster row x 2 cluster
// columns of 4 x 4 PEs, set through the top's parameters. Every output is
// checked.
//
// The mapping is the one of tb_oe_mnist_conv1 with the array sizes taken
// from the parameters: each of the 2 clusters computes a band of PE_X = 4
// output rows, so the 7 bands take 4 rounds of 14 passes. PE_Y = 4 is
// taller than the 3-row filter: the PEs of the top row receive empty
// activation columns, compute nothing and pass the sums from below
// unchanged.
module tb_oe_table3_r1_4x4;
  import oe_pkg::*;
  localparam int ROWS = 1, COLS = 2, PX = 4, PY = 4, NCOL = 2, NM = 16, HW = 28, NCL = ROWS * COLS;
  localparam int FR = 3, NB = HW / PX, NRND = (NB + NCL - 1) / NCL;
  localparam int BIAS_BASE = 13000, OUT_BASE = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  logic wb_cyc = 0, wb_stb = 0, wb_we = 0, wb_ack, busy, done;
  logic [31:0] wb_adr = 0;
  logic [63:0] wb_dat_i = 0, wb_dat_o;

  oe_top #(.CLUSTER_ROWS(ROWS), .CLUSTER_COLS(COLS), .PE_X(PX), .PE_Y(PY)) dut(.clk, .rst_n, .wb_cyc, .wb_stb, .wb_we, .wb_adr, .wb_dat_i, .wb_dat_o, .wb_ack,
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
  int img [HW][HW];
  int K [NM][3][3];
  int bias [NM];
  int zeros = 0, nonzeros = 0, relu_clamps = 0;

  function automatic int px(int i, int j);
    if (i < 0 || i >= HW || j < 0 || j >= HW) return 0;
    return img[i][j];
  endfunction
  function automatic int ref_out(int i, int j, int m);
    int s; s = bias[m];
    for (int ky = 0; ky < 3; ky++) for (int kx = 0; kx < 3; kx++) s += K[m][ky][kx] * px(i + ky - 1, j + kx - 1);
    return s;
  endfunction

  // CSC words of input row i, output columns j0, j0+1, for cluster dest
  function automatic void iact_words(int i, int j0, int dest, ref logic [63:0] q[$]);
    int ptr; ptr = 0;
    for (int j = 0; j < NCOL; j++) begin
      iact_word_t x;
      for (int kx = 0; kx < 3; kx++) if (px(i, j0 + j + kx - 1) != 0) ptr++;
      x = '{is_addr: 1'b1, val: 8'(ptr), idx: '0};
      q.push_back({8'(dest), 43'b0, x});
    end
    for (int j = 0; j < NCOL; j++)
      for (int kx = 0; kx < 3; kx++) if (px(i, j0 + j + kx - 1) != 0) begin
        iact_word_t x; x = '{is_addr: 1'b0, val: 8'(px(i, j0 + j + kx - 1)), idx: 4'(kx)};
        q.push_back({8'(dest), 43'b0, x});
      end
  endfunction
  // weights of filter row y, all filters, broadcast
  function automatic void w_words(int y, ref logic [63:0] q[$]);
    int ptr; ptr = 0;
    for (int kx = 0; kx < 3; kx++) begin
      weight_word_t x; x = '0; x.is_addr = 1'b1;
      for (int m = 0; m < NM; m++) if (K[m][y][kx] != 0) ptr++;
      x.lane[0].w = 8'(ptr);
      q.push_back({8'hFF, 56'(x)});
    end
    for (int kx = 0; kx < 3; kx++)
      for (int m = 0; m < NM; m++) if (K[m][y][kx] != 0) begin
        weight_word_t x; x = '0; x.lane[0] = '{vld: 1'b1, m: 4'(m), w: 8'(K[m][y][kx])};
        q.push_back({8'hFF, 56'(x)});
      end
  endfunction

  initial begin
    logic [63:0] wq[$], d;
    int w_base [FR], w_n [FR];
    repeat (4) @(posedge clk); #1 rst_n = 1;

    foreach (img[i, j]) begin
      int r2; r2 = (i - 14) * (i - 14) + (j - 13) * (j - 13);
      img[i][j] = (r2 >= 30 && r2 <= 90) ? $urandom_range(40, 127) : 0;
      if (img[i][j] == 0) zeros++; else nonzeros++;
    end
    foreach (K[m, y, x]) K[m][y][x] = ($urandom_range(0, 9) < 3) ? 0 : $signed($urandom_range(0, 40)) - 20;
    foreach (bias[m]) bias[m] = $signed($urandom_range(0, 400)) - 200;

    // weights and biases: written once
    for (int y = 0; y < FR; y++) begin w_base[y] = wq.size(); w_words(y, wq); w_n[y] = wq.size() - w_base[y]; end
    put(hdr(OP_WRITE_RAM, 1, 0, wq.size(), 0)); foreach (wq[i]) put(wq[i]);
    put(hdr(OP_WRITE_RAM, 2, 0, NCL * NCOL * NM, BIAS_BASE));
    for (int c = 0; c < NCL; c++) for (int j = 0; j < NCOL; j++) for (int m = 0; m < NM; m++)
      put({8'(c), 56'(bias[m])});

    // static configuration
    cfg(255, REG_PE_CFG, {23'b0, 4'(NCOL), 5'(NM)});
    cfg(255, REG_IACT_SEL, {17'b0, 3'd5, 3'd5, 3'd5, 3'd5, 3'd0});  // PE <- EXT
    cfg(255, REG_W_SEL, {28'b0, 2'd2, 2'd0});                        // PE <- EXT
    cfg(255, REG_PSUM_SEL, {20'b0, 3'd3, 3'd4, 3'd4, 3'd0});         // PE <- EXT, EXT <- RES
    cfg(255, REG_ACT, ACT_RELU);

    for (int round = 0; round < NRND; round++)
      for (int j0 = 0; j0 < HW; j0 += NCOL) begin
        logic [63:0] iq[$];
        int ia_base [NCL][PX+FR-1], ia_n [NCL][PX+FR-1];
        int e_base, e_n;
        int ncl; ncl = (NB - round * NCL < NCL) ? NB - round * NCL : NCL;
        for (int r = 0; r < PX + FR - 1; r++)
          for (int c = 0; c < ncl; c++) begin
            int band; band = round * NCL + c;
            ia_base[c][r] = iq.size(); iact_words(PX * band + r - 1, j0, c, iq); ia_n[c][r] = iq.size() - ia_base[c][r];
          end
        // PE rows above the filter height get empty columns (no activations)
        e_base = iq.size();
        for (int j = 0; j < NCOL; j++) iq.push_back({8'hFF, 43'b0, 1'b1, 12'b0});
        e_n = iq.size() - e_base;
        cfg(255, REG_CMD, 32'h1);                                    // clear
        put(hdr(OP_WAIT, 0, 0, 0, 1));
        put(hdr(OP_WRITE_RAM, 0, 0, iq.size(), 0)); foreach (iq[i]) put(iq[i]);
        for (int y = 0; y < FR; y++) begin
          cfg(255, REG_W_ROW_MASK, 32'(1 << y));
          put(hdr(OP_SEND, 1, 0, w_n[y], w_base[y]));
          put(hdr(OP_WAIT, 0, 0, 0, 1));
        end
        for (int r = 0; r < PX + FR - 1; r++) begin
          logic [31:0] mask; mask = '0;
          for (int y = 0; y < FR; y++) for (int x = 0; x < PX; x++) if (x + y == r) mask[y*PX+x] = 1'b1;
          cfg(255, REG_IACT_MASK, mask);
          for (int c = 0; c < ncl; c++) put(hdr(OP_SEND, 0, 0, ia_n[c][r], ia_base[c][r]));
          put(hdr(OP_WAIT, 0, 0, 0, 1));
        end
        if (PY > FR) begin
          cfg(255, REG_IACT_MASK, 32'((1 << (PX * PY)) - (1 << (PX * FR))));
          put(hdr(OP_SEND, 0, 0, e_n, e_base));
          put(hdr(OP_WAIT, 0, 0, 0, 1));
        end
        for (int c = 0; c < ncl; c++) cfg(c, REG_CMD, 32'h2);        // start
        put(hdr(OP_WAIT, 0, 0, 0, 1));
        for (int c = 0; c < ncl; c++) cfg(c, REG_CMD, 32'h4);        // out_go
        for (int x = 0; x < PX; x++) begin
          cfg(255, REG_PSUM_COL, 32'(x));
          for (int c = 0; c < ncl; c++) begin
            int row; row = PX * (round * NCL + c) + x;
            put(hdr(OP_SEND, 2, 0, NCOL * NM, BIAS_BASE + c * NCOL * NM));
            put(hdr(OP_COLLECT, 0, c, NCOL * NM, OUT_BASE + (row * HW + j0) * NM));
            put(hdr(OP_WAIT, 0, 0, 0, 0));
          end
        end
        put(hdr(OP_WAIT, 0, 0, 0, 1));
      end
    put(hdr(OP_LAYER, 0, 0, 0, 0));
    put(hdr(OP_END, 0, 0, 0, 0));
    do wb_read(32'h0, d); while (!d[63]);
    $display("layer done after %0d cycles", cyc);
    check(d[47:32] == 16'd1, "layer count");

    for (int i = 0; i < HW; i++)
      for (int j = 0; j < HW; j++)
        for (int m = 0; m < NM; m++) begin
          int e;
          e = ref_out(i, j, m);
          if (e < 0) begin e = 0; relu_clamps++; end
          wb_read(32'h0020_0000 + 8 * (OUT_BASE + (i * HW + j) * NM + m), d);
          check($signed(d[PSUM_W-1:0]) == e,
                $sformatf("out[%0d][%0d][%0d] got %0d exp %0d", i, j, m, $signed(d[PSUM_W-1:0]), e));
        end
    $display("pixels: %0d zero, %0d nonzero; ReLU clamped %0d of %0d outputs; %0d cycles in all",
             zeros, nonzeros, relu_clamps, HW * HW * NM, cyc);
    check(relu_clamps > 0 && relu_clamps < HW * HW * NM, "ReLU active on part of the outputs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
