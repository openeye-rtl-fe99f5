// oe_lvt_ram: multi-ported PSUM data RAM built with a Live Value Table.
//
// NW write ports and NR read ports are made from NW*NR banks, each with a
// single write and a single read port (what an FPGA block RAM offers). Write
// port w writes its value into all NR banks of row w. The Live Value Table
// (LVT) remembers, per address, which write port wrote it last; read port r
// reads bank [lvt[addr]][r]. A "live" bit per address extends the LVT so
// that clear makes every entry read as zero in one cycle, which is how the
// PE starts a fresh accumulation. Reads are asynchronous, writes take effect
// at the clock edge; two ports writing one address in the same cycle is not
// allowed (an assertion checks it). The LVT scheme follows the source
// description; the clear bit and asynchronous reads are this design's own.
module oe_lvt_ram #(
  parameter int DEPTH = 32,
  parameter int W     = 20,
  parameter int NW    = 2,
  parameter int NR    = 2
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic [NW-1:0]            we,
  input  logic [NW-1:0][$clog2(DEPTH)-1:0] waddr,
  input  logic [NW-1:0][W-1:0]     wdata,
  input  logic [NR-1:0][$clog2(DEPTH)-1:0] raddr,
  output logic [NR-1:0][W-1:0]     rdata
);
  localparam int LW = (NW > 1) ? $clog2(NW) : 1;

  logic [W-1:0]  bank [NW][NR][DEPTH];
  logic [LW-1:0] lvt  [DEPTH];
  logic [DEPTH-1:0] live;

  for (genvar w = 0; w < NW; w++) begin : g_w
    for (genvar r = 0; r < NR; r++) begin : g_r
      always_ff @(posedge clk) if (we[w]) bank[w][r][waddr[w]] <= wdata[w];
    end
  end

  always_ff @(posedge clk) begin
    for (int w = 0; w < NW; w++) if (we[w]) lvt[waddr[w]] <= LW'(w);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) live <= '0;
    else begin
      logic [DEPTH-1:0] nxt;
      nxt = clear ? '0 : live;
      for (int w = 0; w < NW; w++) if (we[w]) nxt[waddr[w]] = 1'b1;
      live <= nxt;
    end
  end

  always_comb begin
    for (int r = 0; r < NR; r++) begin
      logic [LW-1:0] sel;
      sel = lvt[raddr[r]];
      rdata[r] = live[raddr[r]] ? bank[sel][r][raddr[r]] : '0;
    end
  end

  // Two write ports must not hit the same address in one cycle.
  always_ff @(posedge clk) begin
    for (int a = 0; a < NW; a++)
      for (int b = a + 1; b < NW; b++)
        assert (!(rst_n && we[a] && we[b] && waddr[a] == waddr[b]))
          else $error("oe_lvt_ram: write ports %0d and %0d collide", a, b);
  end
endmodule
