// mixpe_accel: MixPE accelerator top level.
//
// Runs a group-quantized mixed-precision GEMM  Y = X * W^T  where X (m x k) is
// INT8 (PREC_A8) or FP16 (PREC_A16), W (n x k) is UINT4 with one FP16 scale and
// one UINT4 zero point per output channel and group of GROUP weights, and Y is
// FP32. Following the paper, each group is first multiplied directly in low
// precision by the shift&add MixPE array (step 1), the group result is then
// dequantized once (step 2) and added to the running output (step 3):
//   Y[i][j] = sum_G s_G,j * (sum_{k in G} Q[j][k]*X[i][k] - z_G,j * sum_{k in G} X[i][k])
//
// Blocks (the arrangement of the paper's architecture figure): global buffer,
// activation buffer (left edge), weight buffer (top edge), ROWS x COLS
// output-stationary array, output buffer; plus a group activation-sum unit and
// a dequantization unit that the paper leaves to "other units", and the
// sequencer below, which is this design's own (the paper shows none).
//
// Sequencer, per output tile (ROWS rows of X by COLS rows of W) and per group:
//   LOAD_X  ROWS*GROUP/EPW words  global buffer -> activation buffer
//   LOAD_W  COLS*GROUP/8 words    global buffer -> weight buffer
//   LOAD_Q  COLS words            global buffer -> scale/zero registers
//   COMP    GROUP+ROWS+COLS cycles of skewed streaming through the array
//   DEQ     ROWS*COLS cycles, one output element dequantized per cycle
// and after the last group of a tile
//   STORE   ROWS*COLS words       output buffer -> global buffer.
// Phases do not overlap (no double buffering: the paper describes none).
//
// Interface: port A of the global buffer is brought out (ext_*), so off-chip
// memory or a host can load tensors and read results; start (one-cycle pulse
// while idle) launches the job described by cfg, busy is high while it runs
// and done pulses for one cycle at the end. stat_groups and stat_tiles count
// the groups and output tiles processed since reset.
module mixpe_accel
  import mixpe_pkg::*;
#(
  parameter prec_e       PREC     = PREC_A8,
  parameter int unsigned ROWS     = 4,
  parameter int unsigned COLS     = 4,
  parameter int unsigned GROUP    = 128,
  parameter int unsigned GB_DEPTH = 65536,
  localparam int unsigned GB_AW   = $clog2(GB_DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  // external port of the global buffer
  input  logic              ext_en,
  input  logic              ext_we,
  input  logic [GB_AW-1:0]  ext_addr,
  input  logic [WORD_W-1:0] ext_wdata,
  output logic [WORD_W-1:0] ext_rdata,
  // job control
  input  logic              start,
  input  gemm_cfg_t         cfg,
  output logic              busy,
  output logic              done,
  output logic [31:0]       stat_groups,
  output logic [31:0]       stat_tiles
);

  localparam int unsigned AW     = act_width(PREC);     // activation bits
  localparam int unsigned EPW_X  = WORD_W / AW;         // activations per word
  localparam int unsigned EPW_W  = WORD_W / WBITS;      // weights per word
  localparam int unsigned GX     = GROUP / EPW_X;       // words per row per group
  localparam int unsigned GW     = GROUP / EPW_W;       // words per column per group
  localparam int unsigned NOUT   = ROWS * COLS;
  localparam int unsigned T_COMP = GROUP + ROWS + COLS;
  localparam int unsigned CW     = 16;                  // phase counter width
  localparam int unsigned OIW    = (NOUT > 1) ? $clog2(NOUT) : 1;
  localparam int unsigned XLW    = (ROWS > 1) ? $clog2(ROWS) : 1;
  localparam int unsigned WLW    = (COLS > 1) ? $clog2(COLS) : 1;
  localparam int unsigned XAW    = (GX > 1) ? $clog2(GX) : 1;
  localparam int unsigned WAW    = (GW > 1) ? $clog2(GW) : 1;
  localparam int unsigned IW     = $clog2(GROUP);
  localparam int unsigned LLW    = (XLW > WLW) ? XLW : WLW;
  localparam int unsigned LAW    = (XAW > WAW) ? XAW : WAW;

  typedef enum logic [2:0] {
    S_IDLE, S_LOAD_X, S_LOAD_W, S_LOAD_Q, S_COMP, S_DEQ, S_STORE
  } state_e;

  typedef enum logic [1:0] {D_NONE, D_X, D_W, D_Q} dest_e;

  state_e    state;
  gemm_cfg_t cfg_q;
  logic [CW-1:0] cnt;
  logic [15:0]   tile_m, tile_n, grp;

  // ---------------------------------------------------------------- buffers
  logic              gb_en, gb_we;
  logic [GB_AW-1:0]  gb_addr;
  logic [WORD_W-1:0] gb_wdata, gb_rdata;

  global_buffer #(.DEPTH(GB_DEPTH), .WORD_W(WORD_W)) u_gbuf (
    .clk,
    .a_en(ext_en), .a_we(ext_we), .a_addr(ext_addr), .a_wdata(ext_wdata), .a_rdata(ext_rdata),
    .b_en(gb_en),  .b_we(gb_we),  .b_addr(gb_addr),  .b_wdata(gb_wdata),  .b_rdata(gb_rdata)
  );

  // a read issued in one cycle is written to its destination in the next
  dest_e             ld_dest;
  logic [LLW-1:0]    ld_lane;
  logic [LAW-1:0]    ld_addr;

  logic          xb_rd_en  [ROWS];
  logic [IW-1:0] xb_rd_idx [ROWS];
  logic [AW-1:0] xb_rd     [ROWS];
  logic          wb_rd_en  [COLS];
  logic [IW-1:0] wb_rd_idx [COLS];
  logic [WBITS-1:0] wb_rd  [COLS];

  lane_buffer #(.LANES(ROWS), .ELEMS(GROUP), .EW(AW), .WORD_W(WORD_W)) u_act_buf (
    .clk,
    .wr_en  (ld_dest == D_X),
    .wr_lane(XLW'(ld_lane)),
    .wr_addr(XAW'(ld_addr)),
    .wr_data(gb_rdata),
    .rd_en  (xb_rd_en),
    .rd_idx (xb_rd_idx),
    .rd_data(xb_rd)
  );

  lane_buffer #(.LANES(COLS), .ELEMS(GROUP), .EW(WBITS), .WORD_W(WORD_W)) u_wgt_buf (
    .clk,
    .wr_en  (ld_dest == D_W),
    .wr_lane(WLW'(ld_lane)),
    .wr_addr(WAW'(ld_addr)),
    .wr_data(gb_rdata),
    .rd_en  (wb_rd_en),
    .rd_idx (wb_rd_idx),
    .rd_data(wb_rd)
  );

  qparam_t qreg [COLS];
  always_ff @(posedge clk)
    if (ld_dest == D_Q) qreg[WLW'(ld_lane)] <= qparam_t'(gb_rdata);

  // ------------------------------------------------------ array + group sum
  logic          a_valid [ROWS], a_first [ROWS];
  logic [PSUM_W-1:0] psum [ROWS][COLS];
  logic [PSUM_W-1:0] sumx [ROWS];

  mixpe_array #(.PREC(PREC), .ROWS(ROWS), .COLS(COLS)) u_array (
    .clk, .rst_n,
    .act_in   (xb_rd),
    .act_valid(a_valid),
    .act_first(a_first),
    .w_in     (wb_rd),
    .psum
  );

  act_group_sum #(.PREC(PREC), .ROWS(ROWS)) u_gsum (
    .clk, .rst_n,
    .act_in   (xb_rd),
    .act_valid(a_valid),
    .act_first(a_first),
    .sum      (sumx)
  );

  // skewed read schedule: lane l reads element t - l at cycle t; the flags are
  // delayed by one cycle to line up with the synchronous buffer read
  for (genvar r = 0; r < ROWS; r++) begin : g_xsched
    logic in_win;
    assign in_win = (state == S_COMP) && (int'(cnt) >= r) && (int'(cnt) < r + GROUP);
    assign xb_rd_en[r]  = in_win;
    assign xb_rd_idx[r] = IW'(int'(cnt) - r);
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        a_valid[r] <= 1'b0;
        a_first[r] <= 1'b0;
      end else begin
        a_valid[r] <= in_win;
        a_first[r] <= in_win && (int'(cnt) == r);
      end
    end
  end
  for (genvar c = 0; c < COLS; c++) begin : g_wsched
    assign wb_rd_en[c]  = (state == S_COMP) && (int'(cnt) >= c) && (int'(cnt) < c + GROUP);
    assign wb_rd_idx[c] = IW'(int'(cnt) - c);
  end

  // ------------------------------------------------ dequant + output buffer
  logic [OIW-1:0] deq_idx, deq_out_idx;
  logic           deq_valid, deq_out_valid;
  logic [31:0]    deq_out, ob_acc, ob_store;
  logic [XLW-1:0] deq_r;
  logic [WLW-1:0] deq_c;

  assign deq_valid = (state == S_DEQ);
  assign deq_idx   = OIW'(cnt);
  assign deq_r     = XLW'(cnt / COLS);
  assign deq_c     = WLW'(cnt % COLS);

  dequant_unit #(.PREC(PREC), .IDX_W(OIW)) u_deq (
    .clk, .rst_n,
    .in_valid   (deq_valid),
    .in_idx     (deq_idx),
    .psum       (psum[deq_r][deq_c]),
    .sumx       (sumx[deq_r]),
    .scale      (qreg[deq_c].scale),
    .zero       (qreg[deq_c].zero),
    .first_group(grp == '0),
    .acc        (ob_acc),
    .out_valid  (deq_out_valid),
    .out_idx    (deq_out_idx),
    .out        (deq_out)
  );

  output_buffer #(.ENTRIES(NOUT), .DW(32)) u_obuf (
    .clk,
    .we     (deq_out_valid),
    .waddr  (deq_out_idx),
    .wdata  (deq_out),
    .raddr_a(deq_idx),
    .rdata_a(ob_acc),
    .raddr_b(OIW'(cnt)),
    .rdata_b(ob_store)
  );

  // --------------------------------------------------------------- sequencer
  logic [CW-1:0] n_x, n_w, n_q, n_c, n_o;   // length of each phase
  logic [15:0]   n_groups, n_tm, n_tn;
  logic          last_cnt;
  logic [31:0]   row_i, col_j;              // global row / channel of a lane

  assign n_x      = CW'(ROWS * GX);
  assign n_w      = CW'(COLS * GW);
  assign n_q      = CW'(COLS);
  assign n_c      = CW'(T_COMP);
  assign n_o      = CW'(NOUT);
  assign n_groups = cfg_q.k / 16'(GROUP);
  assign n_tm     = cfg_q.m / 16'(ROWS);
  assign n_tn     = cfg_q.n / 16'(COLS);

  always_comb begin
    unique case (state)
      S_LOAD_X: last_cnt = (cnt == n_x - 1);
      S_LOAD_W: last_cnt = (cnt == n_w - 1);
      S_LOAD_Q: last_cnt = (cnt == n_q - 1);
      S_COMP:   last_cnt = (cnt == n_c - 1);
      S_DEQ:    last_cnt = (cnt == n_o - 1);
      S_STORE:  last_cnt = (cnt == n_o - 1);
      default:  last_cnt = 1'b0;
    endcase
  end

  // global-buffer port B: address of the word this phase touches at cnt
  always_comb begin
    gb_en    = 1'b0;
    gb_we    = 1'b0;
    gb_addr  = '0;
    gb_wdata = ob_store;
    row_i    = '0;
    col_j    = '0;
    unique case (state)
      S_LOAD_X: begin
        row_i   = 32'(tile_m) * ROWS + 32'(cnt / CW'(GX));
        gb_en   = 1'b1;
        gb_addr = GB_AW'(cfg_q.x_base + row_i * (32'(cfg_q.k) / EPW_X)
                         + 32'(grp) * GX + 32'(cnt % CW'(GX)));
      end
      S_LOAD_W: begin
        col_j   = 32'(tile_n) * COLS + 32'(cnt / CW'(GW));
        gb_en   = 1'b1;
        gb_addr = GB_AW'(cfg_q.w_base + col_j * (32'(cfg_q.k) / EPW_W)
                         + 32'(grp) * GW + 32'(cnt % CW'(GW)));
      end
      S_LOAD_Q: begin
        col_j   = 32'(tile_n) * COLS + 32'(cnt);
        gb_en   = 1'b1;
        gb_addr = GB_AW'(cfg_q.q_base + col_j * 32'(n_groups) + 32'(grp));
      end
      S_STORE: begin
        row_i   = 32'(tile_m) * ROWS + 32'(cnt / CW'(COLS));
        col_j   = 32'(tile_n) * COLS + 32'(cnt % CW'(COLS));
        gb_en   = 1'b1;
        gb_we   = 1'b1;
        gb_addr = GB_AW'(cfg_q.o_base + row_i * 32'(cfg_q.n) + col_j);
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ld_dest <= D_NONE;
      ld_lane <= '0;
      ld_addr <= '0;
    end else begin
      unique case (state)
        S_LOAD_X: begin
          ld_dest <= D_X;
          ld_lane <= LLW'(cnt / CW'(GX));
          ld_addr <= LAW'(cnt % CW'(GX));
        end
        S_LOAD_W: begin
          ld_dest <= D_W;
          ld_lane <= LLW'(cnt / CW'(GW));
          ld_addr <= LAW'(cnt % CW'(GW));
        end
        S_LOAD_Q: begin
          ld_dest <= D_Q;
          ld_lane <= LLW'(cnt);
          ld_addr <= '0;
        end
        default: ld_dest <= D_NONE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      cfg_q       <= '0;
      cnt         <= '0;
      tile_m      <= '0;
      tile_n      <= '0;
      grp         <= '0;
      done        <= 1'b0;
      stat_groups <= '0;
      stat_tiles  <= '0;
    end else begin
      done <= 1'b0;
      if (state != S_IDLE) cnt <= last_cnt ? '0 : cnt + 1'b1;
      unique case (state)
        S_IDLE: if (start) begin
          cfg_q  <= cfg;
          cnt    <= '0;
          tile_m <= '0;
          tile_n <= '0;
          grp    <= '0;
          state  <= S_LOAD_X;
        end
        S_LOAD_X: if (last_cnt) state <= S_LOAD_W;
        S_LOAD_W: if (last_cnt) state <= S_LOAD_Q;
        S_LOAD_Q: if (last_cnt) state <= S_COMP;
        S_COMP:   if (last_cnt) state <= S_DEQ;
        S_DEQ: if (last_cnt) begin
          stat_groups <= stat_groups + 1;
          if (grp == n_groups - 1) begin
            grp   <= '0;
            state <= S_STORE;
          end else begin
            grp   <= grp + 1'b1;
            state <= S_LOAD_X;
          end
        end
        S_STORE: if (last_cnt) begin
          stat_tiles <= stat_tiles + 1;
          if (tile_n == n_tn - 1) begin
            tile_n <= '0;
            if (tile_m == n_tm - 1) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              tile_m <= tile_m + 1'b1;
              state  <= S_LOAD_X;
            end
          end else begin
            tile_n <= tile_n + 1'b1;
            state  <= S_LOAD_X;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // a job must tile exactly and fit the counters
  assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_IDLE && start) |-> (cfg.m != 0 && cfg.n != 0 && cfg.k != 0 &&
                                    32'(cfg.m) % ROWS == 0 && 32'(cfg.n) % COLS == 0 && 32'(cfg.k) % GROUP == 0))
    else $error("mixpe_accel: job dimensions must be non-zero multiples of the tile and group sizes");

endmodule
