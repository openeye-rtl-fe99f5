// tb_oe_wb_slave: Wishbone accesses to the host interface. Writes to the
// command region must come out of the command queue in order; with the
// consumer stopped the queue fills and further writes must wait for ack;
// status reads must return the status inputs; PSUM RAM reads must issue a
// read at the addressed word and return the RAM data two cycles later.
module tb_oe_wb_slave;
  import oe_pkg::*;
  localparam int AW = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic cyc = 0, stb = 0, we = 0, ack; logic [31:0] adr = 0; logic [63:0] dat_i = 0, dat_o;
  logic cmd_valid, cmd_ready = 0; logic [63:0] cmd_data;
  logic host_re; logic [AW-1:0] host_raddr; logic [63:0] host_rdata;
  logic st_busy = 1, st_done = 0; logic [15:0] st_layers = 16'h0042;
  oe_wb_slave #(.AW(AW), .QDEPTH(4)) dut(.clk, .rst_n, .wb_cyc(cyc), .wb_stb(stb), .wb_we(we),
    .wb_adr(adr), .wb_dat_i(dat_i), .wb_dat_o(dat_o), .wb_ack(ack), .cmd_valid, .cmd_ready,
    .cmd_data, .host_re, .host_raddr, .host_rdata, .st_busy, .st_done, .st_layers);
  // RAM model: one cycle latency, data = f(address)
  always @(posedge clk) if (host_re) host_rdata <= {32'hC0DE_0000, 22'b0, host_raddr};
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic access(input logic w, input logic [31:0] a, input logic [63:0] d,
                        output logic [63:0] r, output int lat);
    @(negedge clk); cyc = 1; stb = 1; we = w; adr = a; dat_i = d; lat = 0;
    forever begin @(posedge clk); #1; lat++; if (ack) break; end
    r = dat_o; cyc = 0; stb = 0; we = 0;
    @(posedge clk);  // ack is a one-cycle registered pulse; let it fall
  endtask
  initial begin
    repeat (3000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic [63:0] r, sent [$]; int lat;
    repeat (3) @(negedge clk); rst_n = 1;
    access(0, 32'h0, 0, r, lat);
    check(r[63] == 0 && r[62] == 1 && r[47:32] == 16'h0042 && lat == 1, "status read");
    // fill the 4-deep queue with the consumer stopped, then one more write
    fork
      begin
        for (int i = 0; i < 6; i++) begin
          logic [63:0] x; x = {$urandom, $urandom}; sent.push_back(x);
          access(1, 32'h0010_0000, x, r, lat);
          if (i < 4) check(lat == 1, "write acked at once while queue has room");
          if (i == 4) check(lat > 5, "write waits while queue is full");
        end
      end
      begin
        repeat (30) @(negedge clk);
        for (int i = 0; i < 6; i++) begin
          forever begin @(negedge clk); cmd_ready = 1; if (cmd_valid) break; end
          check(cmd_data == sent[i], $sformatf("queued word %0d", i));
          @(posedge clk); #1 cmd_ready = 0;
        end
      end
    join
    for (int i = 0; i < 4; i++) begin
      logic [31:0] a; a = 32'h0020_0000 + 32'(8 * ((i * 341) % 1024));
      access(0, a, 0, r, lat);
      check(r == {32'hC0DE_0000, 22'b0, 10'((i * 341) % 1024)} && lat == 2, $sformatf("PSUM read %0d", i));
    end
    st_done = 1; st_busy = 0;
    access(0, 32'h0, 0, r, lat);
    check(r[63] == 1 && r[62] == 0, "done visible in status");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
