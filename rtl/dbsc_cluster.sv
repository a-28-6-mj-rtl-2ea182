// dbsc_cluster: four DBSCs and an aggregation core.
// All four cores run the same pass command at the same time, each on the
// data in its own IMEM/WMEM (a different input-channel slice); reading the
// cluster output reads the same OMEM word of every core and adds them in the
// aggregation core. Write ports are shared and steered by core_sel.
// Timing: agg_re at cycle t -> OMEM words at t+1 -> out_valid/out_data at
// t+2. done is the AND of the four cores' done pulses (they run in lockstep).
// The cluster composition (4 DBSCs + aggregation core) is the paper's; the
// shared command and the steering are this design's.
// Lint reports rst_n as used both synchronously and asynchronously: that
// comes from the assertion inside each dbsc and is harmless.
module dbsc_cluster
  import sd_pkg::*;
#(
  parameter int unsigned NCORE      = 4,
  parameter int unsigned IMEM_DEPTH = 256,
  parameter int unsigned WSETS      = 9,
  parameter int unsigned OMEM_DEPTH = 256,
  localparam int unsigned OW        = PSUM_W + $clog2(NCORE)
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic [$clog2(NCORE)-1:0]             core_sel,
  input  logic                                 imem_we,
  input  logic [$clog2(IMEM_DEPTH)-1:0]        imem_waddr,
  input  logic [PE_ROWS-1:0][ACT_W-1:0]        imem_wdata,
  input  logic                                 wmem_we,
  input  logic [$clog2(WSETS)-1:0]             wmem_wset,
  input  logic [3:0]                           wmem_wrow,
  input  logic signed [PE_COLS-1:0][WGT_W-1:0] wmem_wdata,
  input  logic                                 start,
  input  stat_mode_e                           mode,
  input  prec_e                                prec,
  input  logic                                 acc,
  input  logic [$clog2(WSETS)-1:0]             wset,
  input  logic [$clog2(IMEM_DEPTH)-1:0]        in_base,
  input  logic [$clog2(OMEM_DEPTH)-1:0]        out_base,
  input  logic [$clog2(OMEM_DEPTH):0]          n_steps,
  output logic                                 busy,
  output logic                                 done,
  input  logic                                 agg_re,
  input  logic [$clog2(OMEM_DEPTH)-1:0]        agg_raddr,
  output logic                                 out_valid,
  output logic signed [PE_COLS-1:0][OW-1:0]    out_data
);
  logic [NCORE-1:0] busy_c, done_c;
  logic signed [NCORE-1:0][PE_COLS-1:0][PSUM_W-1:0] om;

  for (genvar k = 0; k < NCORE; k++) begin : g_core
    dbsc #(.IMEM_DEPTH(IMEM_DEPTH), .WSETS(WSETS), .OMEM_DEPTH(OMEM_DEPTH)) u_dbsc (
      .clk, .rst_n,
      .imem_we   (imem_we && core_sel == k),
      .imem_waddr, .imem_wdata,
      .wmem_we   (wmem_we && core_sel == k),
      .wmem_wset, .wmem_wrow, .wmem_wdata,
      .start, .mode, .prec, .acc, .wset, .in_base, .out_base, .n_steps,
      .busy      (busy_c[k]),
      .done      (done_c[k]),
      .omem_re   (agg_re),
      .omem_raddr(agg_raddr),
      .omem_rdata(om[k])
    );
  end

  assign busy = |busy_c;
  assign done = &done_c;

  logic rd_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_q <= 1'b0;
    else        rd_q <= agg_re;
  end

  aggregation_core #(.NCORE(NCORE), .LANES(PE_COLS)) u_agg (
    .clk, .rst_n,
    .in_valid (rd_q),
    .psum_in  (om),
    .out_valid,
    .sum_out  (out_data)
  );
endmodule
