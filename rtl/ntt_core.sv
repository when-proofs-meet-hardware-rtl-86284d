// ntt_core: memory-based constant-geometry NTT engine.
//
// Computes X_k = sum_i x_i * w^(i*k) over N = 2^log_n points, where
// w = omega^(2^(LOGN_MAX-log_n)) and omega is the root whose powers the
// twiddle memory holds (load inverse powers for an inverse transform; the
// 1/N factor is applied by an element-wise unit).  Input is in natural
// order; output is in bit-reversed order (the result stream un-reverses it).
//
// Every one of the log_n stages has the same (Pease constant-geometry)
// access pattern: butterfly b of step r takes elements j and j + N/2
// (j = r*NBF + b), multiplies the second by the twiddle
// omega^bitrev(j mod 2^s) (bit reversal over LOGN_MAX-1 bits) and writes
// the sum and difference to elements 2j and 2j+1.  Stage 0 reads the
// external source buffer (the prefetch buffer), intermediate stages
// ping-pong between the internal ping and pong buffers, and the last stage
// writes the external sink buffer (the result buffer), so the prefetch
// buffer is free again after one stage and the result buffer is only
// needed at the end.
//
// Timing: NBF butterflies each take one pair per cycle; a stage takes
// N/(2*NBF) issue cycles plus a 2-cycle pipeline drain, so a transform
// takes log_n * (N/(2*NBF) + 2) cycles from start to done.  log_n must be
// at least log2(NBF) + 1.
//
// From the paper: memory-based architecture, ping-pong buffers, constant
// geometry, parallel butterflies fed by a twiddle memory.  The exact
// constant-geometry variant, the twiddle indexing and the drain between
// stages are this design's choices.
module ntt_core
  import zk_pkg::*;
#(
  parameter int unsigned LOGN_MAX = 17,
  parameter int unsigned NBF      = 4,
  localparam int unsigned LOGB    = $clog2(NBF),
  localparam int unsigned RAW     = LOGN_MAX - LOGB,
  localparam int unsigned TW_AW   = LOGN_MAX - 1,
  localparam int unsigned LNW     = $clog2(LOGN_MAX + 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [LNW-1:0]           log_n,
  output logic                     busy,
  output logic                     done,
  output logic                     src_free,   // pulse: source buffer no longer read
  // twiddle load port
  input  logic                     tw_wr_en,
  input  logic [TW_AW-1:0]         tw_wr_addr,
  input  fe_t                      tw_wr_data,
  // external source (prefetch buffer) row read port
  output logic [1:0][RAW-1:0]      src_rd_row,
  input  fe_t  [1:0][NBF-1:0]      src_rd_data,
  // external sink (result buffer) row write port
  output logic [1:0]               snk_wr_en,
  output logic [1:0][RAW-1:0]      snk_wr_row,
  output fe_t  [1:0][NBF-1:0]      snk_wr_data
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  state_e state;

  logic [LNW-1:0]  ln_q, stage;
  logic [RAW-1:0]  row, rows_per_stage;   // rows_per_stage = N / (2*NBF)
  logic [1:0]      drain_cnt;

  // pipeline tags: p1 = read data valid, p2 = butterfly output valid
  logic            v1, v2;
  logic [RAW-1:0]  row1, row2;
  logic [LNW-1:0]  stg1, stg2;

  // internal ping/pong buffers
  logic [1:0][RAW-1:0]  ping_rd_row, pong_rd_row;
  fe_t  [1:0][NBF-1:0]  ping_rd_data, pong_rd_data;
  logic [1:0]           ping_wr_en, pong_wr_en;
  fe_t  [1:0][NBF-1:0]  wr_data;
  logic [1:0][RAW-1:0]  wr_row;
  fe_t                  ping_s_rd, pong_s_rd;

  // twiddles
  logic [NBF-1:0][TW_AW-1:0] tw_addr;
  fe_t  [NBF-1:0]            tw_data;

  // butterflies
  fe_t  [NBF-1:0] bf_a, bf_b, bf_x, bf_y;
  logic [NBF-1:0] bf_v;

  ntt_buffer #(.LOGN_MAX(LOGN_MAX), .LANES(NBF)) u_ping (
    .clk, .rd_row(ping_rd_row), .rd_data(ping_rd_data),
    .wr_en(ping_wr_en), .wr_row(wr_row), .wr_data(wr_data),
    .s_wr_en(1'b0), .s_wr_addr('0), .s_wr_data('0),
    .s_rd_addr('0), .s_rd_data(ping_s_rd));

  ntt_buffer #(.LOGN_MAX(LOGN_MAX), .LANES(NBF)) u_pong (
    .clk, .rd_row(pong_rd_row), .rd_data(pong_rd_data),
    .wr_en(pong_wr_en), .wr_row(wr_row), .wr_data(wr_data),
    .s_wr_en(1'b0), .s_wr_addr('0), .s_wr_data('0),
    .s_rd_addr('0), .s_rd_data(pong_s_rd));

  twiddle_mem #(.LOGN_MAX(LOGN_MAX), .NRD(NBF)) u_tw (
    .clk, .wr_en(tw_wr_en), .wr_addr(tw_wr_addr), .wr_data(tw_wr_data),
    .rd_addr(tw_addr), .rd_data(tw_data));

  for (genvar b = 0; b < NBF; b++) begin : g_bf
    ntt_butterfly u_bf (
      .clk, .rst_n, .in_valid(v1), .a(bf_a[b]), .b(bf_b[b]), .w(tw_data[b]),
      .out_valid(bf_v[b]), .x(bf_x[b]), .y(bf_y[b]));
  end

  function automatic logic [TW_AW-1:0] bitrev(input logic [TW_AW-1:0] v);
    for (int i = 0; i < TW_AW; i++) bitrev[i] = v[TW_AW-1-i];
  endfunction

  // ---------------- issue: addresses for the current row ----------------
  always_comb begin
    src_rd_row[0]  = row;
    src_rd_row[1]  = row + rows_per_stage;
    ping_rd_row    = src_rd_row;
    pong_rd_row    = src_rd_row;
    for (int b = 0; b < NBF; b++) begin
      logic [TW_AW-1:0] j, mask;
      j          = TW_AW'({row, LOGB'(b)});
      mask       = TW_AW'((32'd1 << stage) - 32'd1);
      tw_addr[b] = bitrev(j & mask);
    end
  end

  // ---------------- read data select (stage of the p1 operation) --------
  always_comb begin
    for (int b = 0; b < NBF; b++) begin
      if (stg1 == '0) begin
        bf_a[b] = src_rd_data[0][b];  bf_b[b] = src_rd_data[1][b];
      end else if (stg1[0]) begin     // odd stage reads ping (written by even stage)
        bf_a[b] = ping_rd_data[0][b]; bf_b[b] = ping_rd_data[1][b];
      end else begin
        bf_a[b] = pong_rd_data[0][b]; bf_b[b] = pong_rd_data[1][b];
      end
    end
  end

  // ---------------- write back (stage of the p2 operation) --------------
  always_comb begin
    logic last;
    for (int b = 0; b < NBF; b++) begin
      // element 2j   -> row 2*row2 + (2b / NBF), lane (2b) mod NBF
      // element 2j+1 -> same row, next lane
      wr_data[(2*b)/NBF][(2*b)%NBF]     = bf_x[b];
      wr_data[(2*b)/NBF][(2*b)%NBF + 1] = bf_y[b];
    end
    wr_row[0]   = {row2[RAW-2:0], 1'b0};
    wr_row[1]   = {row2[RAW-2:0], 1'b1};
    last        = (stg2 == ln_q - 1'b1);
    snk_wr_row  = wr_row;
    snk_wr_data = wr_data;
    snk_wr_en   = {2{v2 && last}};
    ping_wr_en  = {2{v2 && !last && !stg2[0]}};
    pong_wr_en  = {2{v2 && !last &&  stg2[0]}};
  end

  assign busy     = (state != S_IDLE);
  assign src_free = (state == S_DRAIN) && (stage == '0) && (drain_cnt == 2'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; ln_q <= '0; stage <= '0; row <= '0; rows_per_stage <= '0;
      drain_cnt <= '0; v1 <= 1'b0; v2 <= 1'b0; row1 <= '0; row2 <= '0;
      stg1 <= '0; stg2 <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      // pipeline tags
      v1   <= (state == S_RUN);
      row1 <= row;   stg1 <= stage;
      v2   <= v1;
      row2 <= row1;  stg2 <= stg1;
      unique case (state)
        S_IDLE: if (start) begin
          ln_q           <= log_n;
          rows_per_stage <= RAW'((RAW + 1)'(1) << (log_n - 1'b1 - LNW'(LOGB)));
          stage          <= '0;
          row            <= '0;
          state          <= S_RUN;
        end
        S_RUN: begin
          if (row == rows_per_stage - 1'b1) begin
            row       <= '0;
            drain_cnt <= '0;
            state     <= S_DRAIN;
          end else begin
            row <= row + 1'b1;
          end
        end
        S_DRAIN: begin
          drain_cnt <= drain_cnt + 1'b1;
          if (drain_cnt == 2'd1) begin
            if (stage == ln_q - 1'b1) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              stage <= stage + 1'b1;
              state <= S_RUN;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The stage count must leave at least one row per half.
  assert property (@(posedge clk) disable iff (!rst_n)
                   start && state == S_IDLE |-> log_n > LNW'(LOGB) && log_n <= LNW'(LOGN_MAX));
endmodule
