// dbsc: dual-mode bit-slice core.
// A 16x16 PE array with its own input memory (IMEM, 6 KB), weight memory
// (WMEM, 2.25 KB) and output memory (OMEM, 12 KB), plus a small sequencer
// that runs one pass of N steps:
//   WS pass (transformer/FFN): load the 16x16 weights of WMEM set `wset`
//     into the PEs, then stream IMEM words in_base .. in_base+N-1; step t
//     adds its 16 column sums into OMEM word out_base+t.
//   IS pass (CNN): load IMEM word in_base into the PEs, then stream weight
//     sets (wset+t) mod 9; step t adds into OMEM word out_base+t.
// With acc = 0 every step of the pass overwrites its OMEM word instead of
// adding to it.
// prec selects INT12 or INT6 for the whole pass (INT6 activations in the
// low 6 bits of the IMEM lanes).
// Memory shapes (own choice, sized to the paper's capacities exactly):
//   IMEM 256 words x 16 lanes x 12 b = 6 KB
//   WMEM   9 sets  x 16x16 x 8 b     = 2.25 KB (a 3x3 kernel's taps)
//   OMEM 256 words x 16 lanes x 24 b = 12 KB, saturating accumulation
// All memories read synchronously (SRAM-like). Pipeline: read (1 cycle) ->
// PE array and column register (1) -> OMEM read-add-write (1). done pulses
// N + 5 cycles after the cycle in which start is taken (busy low = idle). The external write ports
// fill IMEM/WMEM between passes; OMEM is read through the aggregation port.
// rst_n also disables the protocol assertion below; lint reports that as a
// synchronous use of the asynchronous reset, which is harmless.
module dbsc
  import sd_pkg::*;
#(
  parameter int unsigned IMEM_DEPTH = 256,
  parameter int unsigned WSETS      = 9,
  parameter int unsigned OMEM_DEPTH = 256
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  // IMEM write port
  input  logic                                 imem_we,
  input  logic [$clog2(IMEM_DEPTH)-1:0]        imem_waddr,
  input  logic [PE_ROWS-1:0][ACT_W-1:0]        imem_wdata,
  // WMEM write port: one PE row (16 weights, one per column) at a time
  input  logic                                 wmem_we,
  input  logic [$clog2(WSETS)-1:0]             wmem_wset,
  input  logic [3:0]                           wmem_wrow,
  input  logic signed [PE_COLS-1:0][WGT_W-1:0] wmem_wdata,
  // pass command
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
  // OMEM read port (registered, 1 cycle)
  input  logic                                 omem_re,
  input  logic [$clog2(OMEM_DEPTH)-1:0]        omem_raddr,
  output logic signed [PE_COLS-1:0][PSUM_W-1:0] omem_rdata
);
  localparam int unsigned IA = $clog2(IMEM_DEPTH);
  localparam int unsigned WA = $clog2(WSETS);
  localparam int unsigned OA = $clog2(OMEM_DEPTH);

  typedef logic [PE_ROWS-1:0][ACT_W-1:0]                     iword_t;
  typedef logic signed [PE_COLS-1:0][PE_ROWS-1:0][WGT_W-1:0] wset_t;   // [col][row]
  typedef logic signed [PE_COLS-1:0][PSUM_W-1:0]             oword_t;

  iword_t imem [IMEM_DEPTH];
  wset_t  wmem [WSETS];
  oword_t omem [OMEM_DEPTH];

  // ---------------- sequencer ----------------
  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_STREAM, S_DRAIN} state_e;
  state_e      st;
  stat_mode_e  mode_q;
  prec_e       prec_q;
  logic        acc_q;
  logic [WA-1:0] wcur;
  logic [IA-1:0] icur;
  logic [OA-1:0] ocur;
  logic [OA:0]   left;
  logic [2:0]    drain;

  // read request of this cycle
  logic        rd_v, rd_load;
  logic [IA-1:0] rd_iaddr;
  logic [WA-1:0] rd_waddr;
  logic [OA-1:0] rd_oaddr;

  always_comb begin
    rd_v = 1'b0; rd_load = 1'b0;
    rd_iaddr = icur; rd_waddr = wcur; rd_oaddr = ocur;
    unique case (st)
      S_LOAD:   begin rd_v = 1'b1; rd_load = 1'b1; end
      S_STREAM: rd_v = 1'b1;
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; mode_q <= MODE_WS; prec_q <= PREC_HI; acc_q <= 1'b0;
      wcur <= '0; icur <= '0; ocur <= '0; left <= '0; drain <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          mode_q <= mode; prec_q <= prec; acc_q <= acc;
          wcur <= wset; icur <= in_base; ocur <= out_base;
          left   <= n_steps;
          st     <= S_LOAD;
        end
        S_LOAD: begin
          // stationary operand read issued this cycle
          st <= (left == '0) ? S_DRAIN : S_STREAM;
          drain <= 3'd4;
        end
        S_STREAM: begin
          if (mode_q == MODE_WS) icur <= icur + 1'b1;
          else wcur <= (wcur == WA'(WSETS - 1)) ? '0 : wcur + 1'b1;
          ocur <= ocur + 1'b1;
          left <= left - 1'b1;
          if (left == 1) begin st <= S_DRAIN; drain <= 3'd3; end
        end
        S_DRAIN: begin
          drain <= drain - 1'b1;
          if (drain == 3'd1) begin st <= S_IDLE; done <= 1'b1; end
        end
        default: st <= S_IDLE;
      endcase
    end
  end
  assign busy = (st != S_IDLE);

  // ---------------- memories ----------------
  iword_t imem_q;
  wset_t  wmem_q;
  always_ff @(posedge clk) begin
    if (imem_we) imem[imem_waddr] <= imem_wdata;
    if (wmem_we) begin
      for (int c = 0; c < int'(PE_COLS); c++) wmem[wmem_wset][c][wmem_wrow] <= wmem_wdata[c];
    end
    if (rd_v) begin
      imem_q <= imem[rd_iaddr];
      wmem_q <= wmem[rd_waddr];
    end
  end

  // pipeline stage 1: operands at the PE array
  logic        s1_v, s1_load, s1_first;
  logic [OA-1:0] s1_oaddr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v <= 1'b0; s1_load <= 1'b0; s1_first <= 1'b0; s1_oaddr <= '0;
    end else begin
      s1_v     <= rd_v && !rd_load;
      s1_load  <= rd_load;
      s1_first <= !acc_q;
      s1_oaddr <= rd_oaddr;
    end
  end

  oword_t col;
  dbsc_pe_array #(.ROWS(PE_ROWS), .COLS(PE_COLS)) u_array (
    .clk, .rst_n,
    .mode(mode_q), .prec(prec_q),
    .load(s1_load),
    .en  (s1_v),
    .x_in(imem_q),
    .w_in(wmem_q),
    .psum(col)
  );

  // pipeline stage 2: column sums registered; OMEM old value read
  logic        s2_v, s2_first;
  logic [OA-1:0] s2_oaddr;
  oword_t      old_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_v <= 1'b0; s2_first <= 1'b0; s2_oaddr <= '0;
    end else begin
      s2_v <= s1_v; s2_first <= s1_first; s2_oaddr <= s1_oaddr;
    end
  end
  always_ff @(posedge clk) begin
    if (s1_v) old_q <= omem[s1_oaddr];
  end

  // stage 3: saturating accumulate and write back; OMEM read port
  function automatic logic signed [PSUM_W-1:0] sat_add(logic signed [PSUM_W-1:0] a,
                                                       logic signed [PSUM_W-1:0] b);
    logic signed [PSUM_W:0] s;
    s = {a[PSUM_W-1], a} + {b[PSUM_W-1], b};
    if (s[PSUM_W] != s[PSUM_W-1]) return s[PSUM_W] ? {1'b1, {(PSUM_W-1){1'b0}}}
                                                   : {1'b0, {(PSUM_W-1){1'b1}}};
    return s[PSUM_W-1:0];
  endfunction

  // a step writing the address the previous step wrote reads a stale value;
  // forward the last written word in that case
  logic          wb_v;
  logic [OA-1:0] wb_addr;
  oword_t        wb_data, base, wb_data_n;
  always_comb begin
    base = (wb_v && wb_addr == s2_oaddr) ? wb_data : old_q;
    for (int c = 0; c < int'(PE_COLS); c++)
      wb_data_n[c] = s2_first ? col[c] : sat_add(base[c], col[c]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wb_v <= 1'b0; wb_addr <= '0; wb_data <= '0;
    end else begin
      wb_v <= s2_v; wb_addr <= s2_oaddr; wb_data <= wb_data_n;
    end
  end

  always_ff @(posedge clk) begin
    if (s2_v) omem[s2_oaddr] <= wb_data_n;
    if (omem_re) omem_rdata <= omem[omem_raddr];
  end

  assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("dbsc: start while busy");
endmodule
