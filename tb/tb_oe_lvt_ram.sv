// tb_oe_lvt_ram: random writes on two write ports (never to the same
// address in one cycle) and reads on three read ports, compared with a
// plain array model; then clear must make every entry read as zero.
module tb_oe_lvt_ram;
  localparam int D = 16, W = 20, NW = 2, NR = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic clear = 0;
  logic [NW-1:0] we = 0;
  logic [NW-1:0][3:0] waddr = 0;
  logic [NW-1:0][W-1:0] wdata = 0;
  logic [NR-1:0][3:0] raddr = 0;
  logic [NR-1:0][W-1:0] rdata;
  int model [D];
  oe_lvt_ram #(.DEPTH(D), .W(W), .NW(NW), .NR(NR)) dut(.clk, .rst_n, .clear, .we, .waddr,
    .wdata, .raddr, .rdata);
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    foreach (model[i]) model[i] = 0;
    for (int t = 0; t < 400; t++) begin
      for (int r = 0; r < NR; r++) begin
        raddr[r] = 4'($urandom_range(0, D-1)); #0;
      end
      #1;
      for (int r = 0; r < NR; r++)
        check(rdata[r] == W'(model[raddr[r]]), $sformatf("read port %0d addr %0d", r, raddr[r]));
      we = 2'($urandom_range(0, 3));
      waddr[0] = 4'($urandom_range(0, D-1));
      do waddr[1] = 4'($urandom_range(0, D-1)); while (waddr[1] == waddr[0]);
      wdata[0] = W'($urandom); wdata[1] = W'($urandom);
      @(negedge clk);
      for (int w = 0; w < NW; w++) if (we[w]) model[waddr[w]] = int'(wdata[w]);
      we = 0;
    end
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int i = 0; i < D; i++) begin
      raddr[0] = 4'(i); #1; check(rdata[0] == 0, "zero after clear");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
