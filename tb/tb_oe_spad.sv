// tb_oe_spad: checks the append-only scratchpad: writes land at consecutive
// addresses, both asynchronous read ports return them, writes beyond DEPTH
// are refused (full), and clear rewinds the write pointer.
module tb_oe_spad;
  localparam int D = 8, W = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic clear = 0, we = 0, full;
  logic [W-1:0] wdata = 0, r0, r1;
  logic [3:0] used;
  logic [2:0] a0 = 0, a1 = 0;
  logic [W-1:0] model [D];
  oe_spad #(.DEPTH(D), .W(W)) dut(.clk, .rst_n, .clear, .we, .wdata, .full, .used,
    .raddr0(a0), .rdata0(r0), .raddr1(a1), .rdata1(r1));
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    for (int pass = 0; pass < 2; pass++) begin
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      check(used == 0 && !full, "empty after clear");
      for (int i = 0; i < D + 2; i++) begin
        wdata = W'($urandom); we = 1;
        if (i < D) model[i] = wdata;
        @(negedge clk);
      end
      we = 0;
      check(full && used == D, "full after DEPTH writes");
      for (int i = 0; i < D; i++) begin
        a0 = 3'(i); a1 = 3'(D - 1 - i); #1;
        check(r0 == model[i], $sformatf("port0 addr %0d", i));
        check(r1 == model[D-1-i], $sformatf("port1 addr %0d", D-1-i));
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
