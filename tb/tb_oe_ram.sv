// tb_oe_ram: random writes and reads of the serial-front-end RAM, checking
// the one-cycle read latency against an associative-array model.
module tb_oe_ram;
  localparam int D = 1024;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we = 0, re = 0;
  logic [9:0] waddr = 0, raddr = 0;
  logic [63:0] wdata = 0, rdata;
  logic [63:0] model [int];
  oe_ram #(.DEPTH(D), .W(64)) dut(.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 64; i++) begin
      @(negedge clk); we = 1; waddr = 10'(i * 13); wdata = {$urandom, $urandom};
      model[i * 13] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 64; i++) begin
      logic [63:0] held;
      re = 1; raddr = 10'(i * 13);
      @(negedge clk); re = 0;
      check(rdata == model[i * 13], $sformatf("read %0d", i));
      held = rdata;
      @(negedge clk);
      check(rdata == held, "output held while re low");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
