// tb_oe_pe: self-checking test of one sparse processing element.
// Builds random sparse activation columns and a random sparse weight matrix,
// streams them in CSC form, runs two compute passes (checking that PSUMs
// accumulate across passes and that each pass takes the documented number
// of cycles), then the output phase with random biases and random
// back-pressure, and compares every PSUM with a reference computed here.
// It also checks that the weight stream is forwarded unchanged.
module tb_oe_pe;
  import oe_pkg::*;
  localparam int NC = 2, NM = 4, CH = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc++;

  pe_cmd_t cmd; pe_cfg_t cfg;
  logic iv, ir, wv, wr, wov, wor_, piv, pir, pov, por;
  iact_word_t id; weight_word_t wd, wod; psum_t pid, pod; logic busy;

  oe_pe dut(.clk, .rst_n, .cmd, .cfg, .iact_valid(iv), .iact_ready(ir), .iact_data(id),
    .w_in_valid(wv), .w_in_ready(wr), .w_in_data(wd), .w_out_valid(wov), .w_out_ready(wor_),
    .w_out_data(wod), .psum_in_valid(piv), .psum_in_ready(pir), .psum_in_data(pid),
    .psum_out_valid(pov), .psum_out_ready(por), .psum_out_data(pod), .busy);

  int a [NC][CH]; int w [NM][CH]; int expct [NC*NM];
  weight_word_t wsent[$];

  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic send_iact(input iact_word_t x);
    id = x; iv = 1;
    forever begin @(negedge clk); if (ir) break; end
    @(posedge clk); #1 iv = 0;
  endtask
  task automatic send_w(input weight_word_t x);
    wd = x; wv = 1;
    forever begin @(negedge clk); if (wr) break; end
    wsent.push_back(x);
    @(posedge clk); #1 wv = 0;
  endtask

  // forwarded-weight checker with random back-pressure
  always @(posedge clk) begin
    if (rst_n && wov && wor_) begin
      check(wsent.size() > 0 && wod == wsent[0], "forwarded weight word");
      if (wsent.size() > 0) void'(wsent.pop_front());
    end
    #1 wor_ = ($urandom_range(0,3) != 0);
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int nent, ptr, expcyc, t0, bias [NC*NM];
    cmd = '0; cfg.n_cols = NC; cfg.n_m = NM; iv = 0; wv = 0; piv = 0; por = 0; wor_ = 1;
    id = '0; wd = '0; pid = '0;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    // random sparse data
    foreach (a[j, c]) a[j][c] = ($urandom_range(0,1) == 1) ? $signed($urandom_range(0,255)) - 128 : 0;
    foreach (w[m, c]) w[m][c] = ($urandom_range(0,2) != 0) ? $signed($urandom_range(0,255)) - 128 : 0;
    a[0][0] = 5; w[1][0] = -7; a[1][3] = 0;  // make sure both kinds of entries exist
    #1 cmd.clear = 1; @(posedge clk); #1 cmd.clear = 0;
    // activations: per column an end pointer, then its nonzero entries
    ptr = 0;
    for (int j = 0; j < NC; j++) begin
      for (int c = 0; c < CH; c++) if (a[j][c] != 0) ptr++;
      send_iact('{is_addr: 1'b1, val: 8'(ptr), idx: '0});
    end
    for (int j = 0; j < NC; j++)
      for (int c = 0; c < CH; c++) if (a[j][c] != 0)
        send_iact('{is_addr: 1'b0, val: 8'(a[j][c]), idx: 4'(c)});
    // weights: CSC by input channel
    ptr = 0; expcyc = 0;
    // (the nonzero weights of a channel are packed SIMD to a word)
    for (int c = 0; c < CH; c++) begin
      weight_word_t x; int nz; x = '0; x.is_addr = 1; nz = 0;
      for (int m = 0; m < NM; m++) if (w[m][c] != 0) nz++;
      ptr += (nz + SIMD - 1) / SIMD;
      x.lane[0].w = 8'(ptr); send_w(x);
    end
    for (int c = 0; c < CH; c++) begin
      weight_word_t x; int l; x = '0; l = 0;
      for (int m = 0; m < NM; m++) if (w[m][c] != 0) begin
        x.lane[l] = '{vld: 1'b1, m: 4'(m), w: 8'(w[m][c])}; l++;
        if (l == SIMD) begin send_w(x); x = '0; l = 0; end
      end
      if (l != 0) send_w(x);
    end
    // reference results and cycle counts
    foreach (expct[i]) expct[i] = 0;
    for (int j = 0; j < NC; j++) begin
      expcyc++;
      for (int c = 0; c < CH; c++) if (a[j][c] != 0) begin
        int nw; nw = 0;
        for (int m = 0; m < NM; m++) if (w[m][c] != 0) begin nw++; expct[j*NM+m] += a[j][c]*w[m][c]; end
        expcyc += 2 + (nw + SIMD - 1) / SIMD;
      end
    end
    expcyc++;
    // two compute passes
    for (int pass = 0; pass < 2; pass++) begin
      int n; n = 0;
      #1 cmd.start = 1; @(posedge clk); #1 cmd.start = 0;
      while (busy) begin @(posedge clk); #1 n++; end
      check(n == expcyc, $sformatf("compute cycles %0d expected %0d", n, expcyc));
    end
    repeat (5) @(posedge clk);
    check(wsent.size() == 0, "all weights forwarded");
    // output phase with biases
    foreach (bias[i]) bias[i] = $urandom_range(0, 1000) - 500;
    #1 cmd.out_go = 1; @(posedge clk); #1 cmd.out_go = 0;
    fork
      for (int i = 0; i < NC*NM; i++) begin
        pid = psum_t'(bias[i]); piv = 1;
        forever begin @(negedge clk); if (pir) break; end
        @(posedge clk); #1 piv = 0;
      end
      for (int i = 0; i < NC*NM; i++) begin
        forever begin
          @(negedge clk); por = ($urandom_range(0,1) == 1);
          if (pov && por) break;
        end
        check(pod == psum_t'(2*expct[i] + bias[i]),
              $sformatf("psum %0d got %0d expected %0d", i, pod, 2*expct[i] + bias[i]));
        @(posedge clk); #1 por = 0;
      end
    join
    repeat (3) @(posedge clk);
    check(!busy, "PE idle after output");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
