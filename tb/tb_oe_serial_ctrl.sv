// tb_oe_serial_ctrl: runs a short command program through the central
// control logic with real RAMs (oe_ram) and a model of the parallel back
// end that accepts stream words with random back-pressure and offers result
// words. Checks: WRITE_RAM fills the RAMs; SEND streams exactly those words
// (destination and payload) to the right stream; CFG appears on the
// configuration port; COLLECT writes the results of the chosen cluster into
// the PSUM RAM (read back through the host port); WAIT holds the program
// until the back end reports idle; LAYER counts; END raises done.
module tb_oe_serial_ctrl;
  import oe_pkg::*;
  localparam int NC = 2, AW = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic cmd_valid = 0, cmd_ready; logic [63:0] cmd_data = 0;
  logic [2:0] ram_we, ram_re;
  logic [AW-1:0] ram_waddr [3]; logic [AW-1:0] ram_raddr [3];
  logic [63:0] ram_wdata [3]; logic [63:0] ram_rdata [3];
  logic host_re = 0; logic [AW-1:0] host_raddr = 0;
  logic cfg_we; logic [15:0] cfg_addr; logic [31:0] cfg_wdata; logic all_idle = 1;
  logic iv, ir = 0, wv, wr = 0, pv, pr = 0;
  logic [7:0] idst, wdst, pdst; iact_word_t id; weight_word_t wd; psum_t pd;
  logic [NC-1:0] res_v = 0, res_r; psum_t res_d [NC];
  logic busy, done; logic [15:0] layers;

  oe_serial_ctrl #(.NC(NC), .AW(AW)) dut(.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_data,
    .ram_we, .ram_waddr, .ram_wdata, .ram_re, .ram_raddr, .ram_rdata, .host_re, .host_raddr,
    .cfg_we, .cfg_addr, .cfg_wdata, .all_idle,
    .iact_valid(iv), .iact_ready(ir), .iact_dest(idst), .iact_data(id),
    .w_valid(wv), .w_ready(wr), .w_dest(wdst), .w_data(wd),
    .psum_valid(pv), .psum_ready(pr), .psum_dest(pdst), .psum_data(pd),
    .res_valid(res_v), .res_ready(res_r), .res_data(res_d), .busy, .done, .layer_count(layers));
  for (genvar e = 0; e < 3; e++) begin : g_ram
    oe_ram #(.DEPTH(256), .W(64)) u_ram(.clk, .we(ram_we[e]), .waddr(ram_waddr[e]),
      .wdata(ram_wdata[e]), .re(ram_re[e]), .raddr(ram_raddr[e]), .rdata(ram_rdata[e]));
  end

  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [63:0] prog [$];
  logic [63:0] exp_i [$], exp_w [$], exp_p [$];
  psum_t results [$];
  longint cfg_seen_at = 0, idle_at = 0;
  function automatic logic [63:0] hdr(opcode_e op, int sel, int cl, int n, int base);
    return {op, 2'b0, 2'(sel), 8'(cl), 16'(n), 32'(base)};
  endfunction

  // back-end model
  always @(negedge clk) begin ir = $urandom_range(0, 1); wr = $urandom_range(0, 1); pr = $urandom_range(0, 1); end
  always @(posedge clk) if (rst_n) begin
    if (iv && ir) begin
      check(exp_i.size() > 0 && {idst, id} == {exp_i[0][63:56], exp_i[0][$bits(iact_word_t)-1:0]}, "iact stream word");
      void'(exp_i.pop_front());
    end
    if (wv && wr) begin
      check(exp_w.size() > 0 && {wdst, wd} == {exp_w[0][63:56], exp_w[0][$bits(weight_word_t)-1:0]}, "weight stream word");
      void'(exp_w.pop_front());
    end
    if (pv && pr) begin
      check(exp_p.size() > 0 && {pdst, pd} == {exp_p[0][63:56], exp_p[0][PSUM_W-1:0]}, "psum stream word");
      void'(exp_p.pop_front());
    end
    if (cfg_we) begin
      check(cfg_addr == 16'h0103 && cfg_wdata == 32'hDEAD_BEEF, "cfg write");
      cfg_seen_at = $time;
    end
  end
  // results offered by cluster 1 (cluster 0 offers garbage that must be ignored)
  initial begin
    res_d[0] = 12345; res_d[1] = 0;
    for (int i = 0; i < 6; i++) results.push_back(psum_t'($signed($urandom_range(0, 2000)) - 1000));
  end
  always @(posedge clk) begin
    logic took; took = res_v[1] && res_r[1];
    #1;
    if (took) void'(results.pop_front());
    res_v[0] = 1'b1;
    res_v[1] = (results.size() > 0) && ($urandom_range(0, 1) == 1);
    if (results.size() > 0) res_d[1] = results[0];
  end

  initial begin
    psum_t all_res [$];
    all_res = results;
    repeat (3) @(negedge clk); rst_n = 1;
    all_res = results;
    prog.push_back(hdr(OP_WRITE_RAM, 0, 0, 5, 10));
    for (int i = 0; i < 5; i++) begin logic [63:0] x; x = {8'(i), 56'($urandom)}; prog.push_back(x); exp_i.push_back(x); end
    prog.push_back(hdr(OP_WRITE_RAM, 1, 0, 3, 0));
    for (int i = 0; i < 3; i++) begin logic [63:0] x; x = {8'(7 + i), 56'($urandom)}; prog.push_back(x); exp_w.push_back(x); end
    prog.push_back(hdr(OP_WRITE_RAM, 2, 0, 4, 20));
    for (int i = 0; i < 4; i++) begin logic [63:0] x; x = {8'hFF, 56'($urandom)}; prog.push_back(x); exp_p.push_back(x); end
    prog.push_back(hdr(OP_SEND, 0, 0, 5, 10));
    prog.push_back(hdr(OP_SEND, 1, 0, 3, 0));
    prog.push_back(hdr(OP_SEND, 2, 0, 4, 20));
    prog.push_back(hdr(OP_COLLECT, 0, 1, 6, 50));
    prog.push_back(hdr(OP_WAIT, 0, 0, 0, 1));
    prog.push_back({OP_CFG, 12'b0, 16'h0103, 32'hDEAD_BEEF});
    prog.push_back(hdr(OP_LAYER, 0, 0, 0, 0));
    prog.push_back(hdr(OP_LAYER, 0, 0, 0, 0));
    prog.push_back(hdr(OP_END, 0, 0, 0, 0));
    all_idle = 0;
    fork
      foreach (prog[i]) begin
        @(posedge clk); #1; cmd_data = prog[i]; cmd_valid = 1;
        forever begin @(negedge clk); if (cmd_ready) break; end
        @(posedge clk); #1 cmd_valid = 0;
      end
      begin
        repeat (200) @(negedge clk);
        idle_at = $time; all_idle = 1;
      end
    join
    wait (done); @(negedge clk);
    check(cfg_seen_at > idle_at, "WAIT held the program until the back end was idle");
    check(exp_i.size() == 0 && exp_w.size() == 0 && exp_p.size() == 0, "all stream words sent");
    check(layers == 2, "layer count");
    check(!busy, "not busy at the end");
    for (int i = 0; i < 6; i++) begin
      @(negedge clk); host_re = 1; host_raddr = AW'(50 + i);
      @(negedge clk); host_re = 0;
      check($signed(ram_rdata[2][PSUM_W-1:0]) == all_res[i] && ram_rdata[2][63:56] == 8'h01,
            $sformatf("collected result %0d", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
