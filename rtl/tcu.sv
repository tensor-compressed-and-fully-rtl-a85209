// tcu: Tensor Contraction Unit, an 8x8 transposable systolic array of BMEs
// with its operand feeders and sequencer.
//
// One command computes a 32x32 FP32 output tile (ROWS*4 x COLS*4)
//   C[4r+i][4c+j] = C0 + sum_kb sum_k A'_(r,kb)[i][k] * W'_(c,kb)[j][k]
//                         * 2^(Ea + Ew)
// where A_(r,kb) is the SMX block at address a_addr+kb of row bank r and
// W_(c,kb) the block at w_addr+kb of column bank c; ' marks an optional
// transpose (trans_a / trans_w). C0 is zero, or a tile read from the partial
// sum buffer when acc_load is set, so long reductions can be split.
//
// Phases of a command:
//   INIT    (acc_load only) COLS*4 shifts load C0 from the psum buffer into the
//           DPE shift chains from the west edge; 1 extra cycle of read latency.
//   COMPUTE one beat per cycle. For every block step kb the slice pairs
//           (sa, sw) are issued, sa < slices(a_prec), sw < slices(w_prec):
//           INT4xINT4 takes 1 cycle per block step, INT8xINT8 4, INT12xINT8 6.
//           Row r's beat enters BME(r,0) delayed by r cycles and column c's
//           beat enters BME(0,c) delayed by c cycles, so they meet in BME(r,c).
//   FLUSH   ROWS+COLS cycles until the last beat has passed the array.
//   DRAIN   COLS*4 shifts move the tile east out of the array into the psum
//           buffer (ROWS x 4 floats per cycle) while zeros enter from the west,
//           leaving the array cleared for the next command.
// Latency from start to done: [COLS*4+1 if acc_load] + kblocks*na*nw
//   + 1 + ROWS+COLS + COLS*4 + 1 cycles.
//
// Psum buffer layout: row bank r, entry base+col holds C[4r+i][col] in lane i.
//
// From the paper: 8x8 BMEs, transposable array, bit-serial precision scaling
// (INT8xINT8 in four cycles), partial sum buffer beside the rows. Own choices:
// output-stationary dataflow, west/north operand entry with skew registers,
// separate row and column memory banks, the shift-chain drain, the phase
// sequencing and that INIT and DRAIN are not overlapped with computation.
module tcu
  import pinta_pkg::*;
#(
  parameter int ROWS = 8,
  parameter int COLS = 8
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  tcu_cmd_t                     cmd,
  output logic                         busy,
  output logic                         done,
  // operand reads from on-chip memory (1-cycle latency)
  output logic                         a_rd_en,
  output logic [MEM_AW-1:0]            a_rd_addr,
  input  smx_block_t [ROWS-1:0]        a_rd_data,
  output logic                         w_rd_en,
  output logic [MEM_AW-1:0]            w_rd_addr,
  input  smx_block_t [COLS-1:0]        w_rd_data,
  // partial sum buffer (1-cycle read latency)
  output logic                         psb_rd_en,
  output logic [PSB_AW-1:0]            psb_rd_addr,
  input  fp32_t [ROWS-1:0][BLK-1:0]    psb_rd_data,
  output logic                         psb_wr_en,
  output logic [PSB_AW-1:0]            psb_wr_addr,
  output fp32_t [ROWS-1:0][BLK-1:0]    psb_wr_data,
  // observation: beats issued (one per compute cycle)
  output logic                         beat_issued
);

  localparam int CHAIN = COLS * BLK;
  localparam int CW    = $clog2(CHAIN + 2);

  typedef enum logic [2:0] {S_IDLE, S_INIT, S_COMP, S_FLUSH, S_DRAIN, S_DONE} state_e;
  state_e   state;
  tcu_cmd_t c;
  logic [CW-1:0]     cnt;
  logic [MEM_AW-1:0] kb;
  logic [1:0]        sa, sw;
  logic [7:0]        fcnt;
  logic [1:0]        na, nw;

  assign na   = nslices(c.a_prec);
  assign nw   = nslices(c.w_prec);
  assign busy = (state != S_IDLE);
  assign done = (state == S_DONE);

  // ---------------------------------------------------------------- sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      c     <= '0;
      cnt   <= '0;
      kb    <= '0;
      sa    <= '0;
      sw    <= '0;
      fcnt  <= '0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          c     <= cmd;
          cnt   <= '0;
          kb    <= '0;
          sa    <= '0;
          sw    <= '0;
          state <= cmd.acc_load ? S_INIT : S_COMP;
        end
        S_INIT: begin
          cnt <= cnt + 1'b1;
          if (cnt == CW'(CHAIN)) state <= S_COMP;
        end
        S_COMP: begin
          if (sw != nw - 2'd1) sw <= sw + 2'd1;
          else begin
            sw <= '0;
            if (sa != na - 2'd1) sa <= sa + 2'd1;
            else begin
              sa <= '0;
              kb <= kb + 1'b1;
              if (kb == c.kblocks - 1'b1) begin
                state <= S_FLUSH;
                fcnt  <= '0;
              end
            end
          end
        end
        S_FLUSH: begin
          fcnt <= fcnt + 1'b1;
          if (fcnt == 8'(ROWS + COLS)) begin
            state <= S_DRAIN;
            cnt   <= '0;
          end
        end
        S_DRAIN: begin
          cnt <= cnt + 1'b1;
          if (cnt == CW'(CHAIN - 1)) state <= S_DONE;
        end
        S_DONE:  state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // INIT: read entry psb_ld + CHAIN-1-t in cycle t, shift it in at t+1.
  logic init_shift, drain_shift, shift_en;
  assign init_shift  = (state == S_INIT) && (cnt != '0);
  assign drain_shift = (state == S_DRAIN);
  assign shift_en    = init_shift | drain_shift;

  assign psb_rd_en   = (state == S_INIT) && (cnt < CW'(CHAIN));
  assign psb_rd_addr = c.psb_ld + PSB_AW'(CHAIN - 1) - PSB_AW'(cnt);
  assign psb_wr_en   = drain_shift;
  assign psb_wr_addr = c.psb_st + PSB_AW'(CHAIN - 1) - PSB_AW'(cnt);

  // ------------------------------------------------------------ operand feed
  assign beat_issued = (state == S_COMP);
  assign a_rd_en     = beat_issued;
  assign w_rd_en     = beat_issued;
  assign a_rd_addr   = c.a_addr + kb;
  assign w_rd_addr   = c.w_addr + kb;

  // Side information of the beat whose memory data arrives this cycle.
  logic       v_d;
  logic [1:0] sa_d, sw_d;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_d  <= 1'b0;
      sa_d <= '0;
      sw_d <= '0;
    end else begin
      v_d  <= beat_issued;
      sa_d <= sa;
      sw_d <= sw;
    end
  end

  function automatic beat_t make_beat(smx_block_t b, logic v, logic tr,
                                      logic [1:0] s, logic [1:0] n);
    beat_t r;
    r.valid = v;
    r.trans = tr;
    r.top   = (s == n - 2'd1);
    r.slice = s;
    r.exp   = b.exp;
    for (int e = 0; e < BLK_ELEMS; e++) r.nib[e] = get_slice(b.m[e], s);
    return r;
  endfunction

  beat_t row_beat [ROWS];
  beat_t col_beat [COLS];
  beat_t row_skew [ROWS];   // after r delay registers
  beat_t col_skew [COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_row_feed
    assign row_beat[r] = make_beat(a_rd_data[r], v_d, c.trans_a, sa_d, na);
    if (r == 0) begin : g_nodly
      assign row_skew[r] = row_beat[r];
    end else begin : g_dly
      beat_t dly [r];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) for (int q = 0; q < r; q++) dly[q] <= '0;
        else begin
          dly[0] <= row_beat[r];
          for (int q = 1; q < r; q++) dly[q] <= dly[q-1];
        end
      end
      assign row_skew[r] = dly[r-1];
    end
  end

  for (genvar cc = 0; cc < COLS; cc++) begin : g_col_feed
    assign col_beat[cc] = make_beat(w_rd_data[cc], v_d, c.trans_w, sw_d, nw);
    if (cc == 0) begin : g_nodly
      assign col_skew[cc] = col_beat[cc];
    end else begin : g_dly
      beat_t dly [cc];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) for (int q = 0; q < cc; q++) dly[q] <= '0;
        else begin
          dly[0] <= col_beat[cc];
          for (int q = 1; q < cc; q++) dly[q] <= dly[q-1];
        end
      end
      assign col_skew[cc] = dly[cc-1];
    end
  end

  // ------------------------------------------------------------------ array
  beat_t               a_h [ROWS][COLS+1];
  beat_t               w_v [ROWS+1][COLS];
  fp32_t [BLK-1:0]     ps  [ROWS][COLS+1];

  for (genvar r = 0; r < ROWS; r++) begin : g_r
    assign a_h[r][0] = row_skew[r];
    assign ps[r][0]  = init_shift ? psb_rd_data[r] : '0;
    for (genvar cc = 0; cc < COLS; cc++) begin : g_c
      if (r == 0) begin : g_top
        assign w_v[0][cc] = col_skew[cc];
      end
      fp32_t [BLK-1:0][BLK-1:0] acc_unused;
      bme u_bme (
        .clk      (clk),
        .rst_n    (rst_n),
        .a_in     (a_h[r][cc]),
        .w_in     (w_v[r][cc]),
        .a_out    (a_h[r][cc+1]),
        .w_out    (w_v[r+1][cc]),
        .shift_en (shift_en),
        .psum_in  (ps[r][cc]),
        .psum_out (ps[r][cc+1]),
        .acc      (acc_unused)
      );
    end
    assign psb_wr_data[r] = ps[r][COLS];
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   start && !busy |-> cmd.kblocks != '0)
    else $error("tcu: kblocks must be at least 1");

endmodule
