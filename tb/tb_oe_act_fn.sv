// tb_oe_act_fn: streams random signed partial sums through the activation
// unit in both modes with random back-pressure and checks every output
// (ReLU: negatives become zero; bypass: unchanged) and the order.
module tb_oe_act_fn;
  import oe_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  act_mode_e mode = ACT_RELU;
  logic iv = 0, ir, ov, orr = 0;
  psum_t id = 0, od;
  psum_t sent [$];
  int clamped = 0;
  oe_act_fn dut(.clk, .rst_n, .mode, .in_valid(iv), .in_ready(ir), .in_data(id),
    .out_valid(ov), .out_ready(orr), .out_data(od));
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (rst_n && ov && orr) begin
    psum_t e; e = sent.pop_front();
    if (mode == ACT_RELU && e < 0) begin e = 0; clamped++; end
    check(od == e, $sformatf("output %0d expected %0d", od, e));
  end
  always @(negedge clk) orr = ($urandom_range(0, 2) != 0);
  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    for (int m = 0; m < 2; m++) begin
      mode = (m != 0) ? ACT_BYPASS : ACT_RELU;
      for (int i = 0; i < 100; i++) begin
        @(posedge clk); #1;
        id = psum_t'($signed($urandom_range(0, 2000)) - 1000); iv = 1;
        forever begin @(negedge clk); if (ir) break; end
        sent.push_back(id);
        @(posedge clk); #1 iv = 0;
      end
      wait (sent.size() == 0); @(negedge clk);
    end
    check(clamped > 0, "ReLU clamped values");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
