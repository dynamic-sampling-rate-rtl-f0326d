// freq_analysis_unit: the Frequency Analysis Unit (FAU) of Dynamic Sampling
// Rate. After a tile has been rendered and upsampled, the FAU computes the
// 16x16 2D DCT of the tile's luminance, finds MaxC, steps the tile's
// sampling-rate state machine and writes the new state to the Sampling Rate
// Table, to be used when the same tile is rendered in the next frame.
//
// Dataflow (numbers are the steps of the unit's block diagram):
//   (1) rows of the tile are read from the Color Buffer and converted to
//       luminance; (2) the shared Kernel Matrix row K[k] feeds the four 1D DCT
//       compute units, which each hold one input row; (3) every cycle each unit
//       produces coefficient k of its row and the four results are written to
//       the DCT Buffer as part of four columns; (4) for the second pass the
//       DCT Buffer rows go back through the input multiplexer to the units and
//       (5) the results are written back, now as part of four rows;
//   (6) during the second pass every coefficient is folded into MaxC;
//   (7) the tile's current state is read from the SRT at start and
//   (8) the state chosen by sr_fsm is written back at the end.
//
// Schedule: each pass handles 4 groups of 4 rows. A group takes 5 cycles to
// load its rows (registered reads) and 16 cycles to compute, so a pass takes
// 84 cycles; `done` rises on the 169th rising clock edge after the one that
// accepts `start`. The Color Buffer is only read in the first pass; `cb_done`
// pulses after its last read so that the buffer can be handed to the next
// tile while the second pass runs. The two-pass row/column DCT, four compute
// units, MaxC, the FSM and the SRT update are the paper's; the schedule, the
// luminance input and the fixed-point formats are this design's choices.
//
// Interface: `start` with `tile_id` is accepted when `busy` is low.
// `done` pulses for one cycle with the result on the `res_*` outputs.
module freq_analysis_unit
  import dsr_pkg::*;
#(
  parameter int unsigned NUM_TILES = 8100,
  localparam int unsigned AW       = $clog2(NUM_TILES)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  dsr_params_t   params,
  // control
  input  logic          start,
  input  logic [AW-1:0] tile_id,
  output logic          busy,
  output logic          cb_done,
  output logic          done,
  // Color Buffer row read port (data the cycle after the request)
  output logic          cb_rd_en,
  output logic [IDX_W-1:0] cb_rd_addr,
  input  color_row_t    cb_rd_row,
  // Sampling Rate Table port (read data the cycle after the request)
  output logic          srt_rd_en,
  output logic          srt_wr_en,
  output logic [AW-1:0] srt_addr,
  output sr_level_e     srt_wr_data,
  input  sr_level_e     srt_rd_data,
  // result of the last analysed tile
  output logic [AW-1:0] res_tile,
  output sr_level_e     res_old_level,
  output sr_level_e     res_new_level,
  output sr_decision_e  res_decision,
  output mag_t          res_maxc_reduce,
  output mag_t          res_maxc_increase
);

  localparam int unsigned N = TILE_DIM;
  localparam int unsigned U = NUM_UNITS;
  localparam int unsigned GW = $clog2(N / U);

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_COMP, S_DECIDE} state_e;

  state_e             state;
  logic               pass;            // 0: rows of the image, 1: second pass
  logic [GW-1:0]      grp;             // group of U rows
  logic [2:0]         ld_cnt;          // 0..U: load step within a group
  logic [IDX_W-1:0]   k;               // output coefficient index
  logic [AW-1:0]      tile;
  logic               lvl_pending;
  sr_level_e          cur_level;

  coef_t [U-1:0][N-1:0] xrow;          // rows held by the compute units
  kern_t [N-1:0]        k_row;
  coef_t [U-1:0]        y;
  coef_t [N-1:0]        dbuf_row;
  coef_t [N-1:0]        in_row;        // output of the input multiplexer

  diag_t [U-1:0]      diag;
  diag_t              d_reduce, d_increase;
  mag_t               maxc_r, maxc_i;
  sr_level_e          nxt_level;
  sr_decision_e       decision;

  logic               loading, computing;
  logic [IDX_W-1:0]   ld_row;

  assign busy      = (state != S_IDLE);
  assign loading   = (state == S_LOAD) && (ld_cnt < 3'(U));
  assign computing = (state == S_COMP);
  assign ld_row    = {grp, ld_cnt[1:0]};

  // (1)/(4) input multiplexer: luminance of a Color Buffer row, or a row of
  // the DCT Buffer.
  always_comb begin
    for (int n = 0; n < N; n++) begin
      if (!pass) in_row[n] = coef_t'({luma(cb_rd_row[n].r, cb_rd_row[n].g, cb_rd_row[n].b), COEF_FRAC'(0)});
      else       in_row[n] = dbuf_row[n];
    end
  end

  assign cb_rd_en   = loading && !pass;
  assign cb_rd_addr = ld_row;

  // (2) Kernel Matrix, shared by all units.
  dct_kernel_rom #(.N(N)) u_kernel (.row(k), .k_row(k_row));

  for (genvar u = 0; u < U; u++) begin : g_unit
    dct_compute_unit #(.N(N), .IN_W(COEF_W), .OUT_W(COEF_W)) u_cu (
      .x(xrow[u]), .k_row(k_row), .y(y[u]));
    assign diag[u] = diag_t'(k) + diag_t'({grp, 2'(u)});
  end

  // (3)/(5) DCT Buffer.
  dct_buffer #(.N(N), .LANES(U), .W(COEF_W)) u_dbuf (
    .clk    (clk),
    .wr_en  (computing),
    .wr_cols(!pass),
    .wr_idx (k),
    .wr_grp (grp),
    .wr_data(y),
    .rd_en  (loading && pass),
    .rd_addr(ld_row),
    .rd_row (dbuf_row));

  // (6) MaxC over the second-pass coefficients.
  maxc_unit #(.LANES(U)) u_maxc (
    .clk          (clk),
    .rst_n        (rst_n),
    .clear        (start && !busy),
    .in_valid     (computing && pass),
    .coef         (y),
    .diag         (diag),
    .d_reduce     (d_reduce),
    .d_increase   (d_increase),
    .maxc_reduce  (maxc_r),
    .maxc_increase(maxc_i));

  // (7) decision.
  sr_fsm u_fsm (
    .cur          (cur_level),
    .maxc_reduce  (maxc_r),
    .maxc_increase(maxc_i),
    .params       (params),
    .d_reduce     (d_reduce),
    .d_increase   (d_increase),
    .nxt          (nxt_level),
    .decision     (decision));

  // (8) SRT port: read at start, write at the decision.
  assign srt_rd_en   = start && !busy;
  assign srt_wr_en   = (state == S_DECIDE);
  assign srt_addr    = (state == S_IDLE) ? tile_id : tile;
  assign srt_wr_data = nxt_level;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      pass        <= 1'b0;
      grp         <= '0;
      ld_cnt      <= '0;
      k           <= '0;
      tile        <= '0;
      lvl_pending <= 1'b0;
      cur_level   <= SR_1X;
      cb_done     <= 1'b0;
      done        <= 1'b0;
      xrow        <= '0;
      res_tile          <= '0;
      res_old_level     <= SR_1X;
      res_new_level     <= SR_1X;
      res_decision      <= DEC_MAINTAIN;
      res_maxc_reduce   <= '0;
      res_maxc_increase <= '0;
    end else begin
      cb_done <= 1'b0;
      done    <= 1'b0;
      if (lvl_pending) begin
        cur_level   <= srt_rd_data;
        lvl_pending <= 1'b0;
      end
      unique case (state)
        S_IDLE: begin
          if (start) begin
            tile        <= tile_id;
            lvl_pending <= 1'b1;
            pass        <= 1'b0;
            grp         <= '0;
            ld_cnt      <= '0;
            state       <= S_LOAD;
          end
        end
        S_LOAD: begin
          if (ld_cnt != 0) xrow[ld_cnt[1:0] - 2'd1] <= in_row;
          if (ld_cnt == 3'(U)) begin
            ld_cnt <= '0;
            k      <= '0;
            state  <= S_COMP;
            if (!pass && grp == GW'(N / U - 1)) cb_done <= 1'b1;
          end else begin
            ld_cnt <= ld_cnt + 3'd1;
          end
        end
        S_COMP: begin
          k <= k + 1'b1;
          if (k == IDX_W'(N - 1)) begin
            grp <= grp + 1'b1;
            if (grp == GW'(N / U - 1)) begin
              if (!pass) begin
                pass  <= 1'b1;
                state <= S_LOAD;
              end else begin
                state <= S_DECIDE;
              end
            end else begin
              state <= S_LOAD;
            end
          end
        end
        S_DECIDE: begin
          res_tile          <= tile;
          res_old_level     <= cur_level;
          res_new_level     <= nxt_level;
          res_decision      <= decision;
          res_maxc_reduce   <= maxc_r;
          res_maxc_increase <= maxc_i;
          done              <= 1'b1;
          state             <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
