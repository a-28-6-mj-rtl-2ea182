// global_memory: 192 KB on-chip global memory, two banks (GMEM 0 and 1 in
// the chip layout). A word is 16 lanes of 12 bits (one activation vector,
// 24 bytes), so each 96 KB bank holds 4096 words; address bit 12 selects
// the bank. Each bank has one read and one write port; a write and a read
// of different banks, or of the same bank, may happen in the same cycle.
// Reads are synchronous (data the cycle after re). Capacity and the two
// banks are the paper's; word width and ports are this design's.
module global_memory
  import sd_pkg::*;
#(
  parameter int unsigned KBYTES = 192,
  parameter int unsigned LANES  = 16,
  localparam int unsigned WBYTES = LANES * ACT_W / 8,
  localparam int unsigned DEPTH  = KBYTES * 1024 / WBYTES,
  localparam int unsigned AW     = $clog2(DEPTH)
) (
  input  logic                        clk,
  input  logic                        we,
  input  logic [AW-1:0]               waddr,
  input  logic [LANES-1:0][ACT_W-1:0] wdata,
  input  logic                        re,
  input  logic [AW-1:0]               raddr,
  output logic [LANES-1:0][ACT_W-1:0] rdata
);
  localparam int unsigned BDEPTH = DEPTH / 2;
  typedef logic [LANES-1:0][ACT_W-1:0] word_t;

  word_t bank0 [BDEPTH];
  word_t bank1 [BDEPTH];
  word_t rd0, rd1;
  logic  rsel;

  always_ff @(posedge clk) begin
    if (we && !waddr[AW-1]) bank0[waddr[AW-2:0]] <= wdata;
    if (we &&  waddr[AW-1]) bank1[waddr[AW-2:0]] <= wdata;
    if (re) begin
      rd0  <= bank0[raddr[AW-2:0]];
      rd1  <= bank1[raddr[AW-2:0]];
      rsel <= raddr[AW-1];
    end
  end
  assign rdata = rsel ? rd1 : rd0;

  initial assert (DEPTH == (1 << AW)) else $error("global_memory: depth must be a power of two");
endmodule
