// tb_oe_router: a 3-input, 3-output router with outputs 0 and 1 both fed
// by input 1 (multicast) and output 2 by input 0; input 2 is unused. Random
// words and random back-pressure; every output must deliver exactly its
// source's words in order, the unused input must never be accepted, and
// after reconfiguration output 2 must follow input 2.
module tb_oe_router;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [2:0][1:0] sel;
  logic [2:0] iv = 0, ir, ov, orr = 0;
  logic [7:0] id [3];
  logic [7:0] od [3];
  logic [7:0] q [3][$];
  int got [3];
  oe_router #(.T(logic [7:0]), .N_IN(3), .N_OUT(3)) dut(.clk, .rst_n, .sel, .in_valid(iv),
    .in_ready(ir), .in_data(id), .out_valid(ov), .out_ready(orr), .out_data(od));
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  // sources: hold valid until accepted; record accepted words per output
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < 3; i++) if (iv[i] && ir[i])
      for (int o = 0; o < 3; o++) if (sel[o] == 2'(i)) q[o].push_back(id[i]);
    for (int o = 0; o < 3; o++) if (ov[o] && orr[o]) begin
      check(q[o].size() > 0 && od[o] == q[o][0], $sformatf("output %0d word", o));
      if (q[o].size() > 0) void'(q[o].pop_front());
      got[o]++;
    end
    check(!(ir[2] && sel[2] != 2'd2), "unused input never ready");
  end
  always @(posedge clk) begin
    logic [2:0] fired;
    fired = iv & ir;
    #1;
    for (int i = 0; i < 3; i++) if (!iv[i] || fired[i]) begin
      iv[i] = ($urandom_range(0, 1) == 1); id[i] = 8'($urandom);
    end
  end
  always @(negedge clk) orr = 3'($urandom);
  initial begin
    sel = {2'd0, 2'd1, 2'd1};
    foreach (got[o]) got[o] = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (300) @(negedge clk);
    check(got[0] > 20 && got[1] > 20 && got[2] > 20, "all outputs carried traffic");
    check(got[0] - got[1] <= 2 && got[1] - got[0] <= 2, "multicast outputs stay in step");
    // drain, then reroute output 2 to input 2
    rst_n = 0; @(negedge clk);
    foreach (q[o]) q[o].delete();
    sel = {2'd2, 2'd1, 2'd1}; got[2] = 0; iv = 0; @(negedge clk); rst_n = 1;
    repeat (200) @(negedge clk);
    check(got[2] > 20, "rerouted output carried traffic");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
