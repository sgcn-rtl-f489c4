// combination_engine: one combination engine of SGCN (paper Fig. 6, Sec.
// V.E-F, Fig. 14-15): input feature buffer, weight buffer, output-stationary
// systolic array, ReLU and BEICSR compressor.
//
// Work unit: a strip of up to ROWS vertices whose aggregated features
// (A~ . X^l, dense, FEAT wide) the aggregation engine has written into one of
// the two banks of the input feature buffer. For every column block cb of
// COLS output features the engine
//   1. reads the residual S^l[v][cb*COLS +: COLS] of every row from DRAM and
//      presets the systolic array with it (residual addition for free),
//   2. streams A~.X^l (rows) and W^l (columns) through the array for
//      FEAT + ROWS + COLS - 2 cycles,
//   3. drains the array row-parallel into the compressor, which applies ReLU
//      and builds the BEICSR slices of X^{l+1} (flushed to DRAM per unit
//      slice), while the same pre-activation values S^{l+1} are collected,
//   4. writes S^{l+1}[v][cb*COLS +: COLS] densely to DRAM.
// The array drains row i as j = COLS-1 ... 0, so column j of the array is
// wired to output feature cb*COLS + (COLS-1-j); the compressor then sees the
// features in ascending order.
//
// The weight buffer holds all of W^l (FEAT x FEAT) and is filled once per
// layer by `load_w`. The input buffer has two banks so that aggregation of
// the next strip overlaps combination of this one.
//
// Interfaces: input-buffer write port (one slice row of C words per cycle,
// bank, row, slice), strip submit per bank (`sub_valid`, `sub_bank`,
// `sub_base`, `sub_rows`) and `bank_free`; one cacheline read port (W, S^l)
// and one cacheline write port (S^{l+1}, X^{l+1}); configuration bases.
// Memory map (dense row-major S, W; BEICSR X) is this design's choice; the
// paper gives the dataflow, the array size and the compressor.
module combination_engine
  import sgcn_pkg::*;
#(
  parameter int unsigned ROWS = 32,
  parameter int unsigned COLS = 32,
  parameter int unsigned FEAT = 256,     // input = output feature width
  parameter int unsigned C    = 96
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration
  input  addr_t             w_base,
  input  addr_t             s_in_base,
  input  addr_t             s_out_base,
  input  addr_t             x_out_base,
  input  logic              load_w,          // pulse: (re)load W^l
  output logic              w_loaded,
  // input feature buffer
  input  logic              ib_we,
  input  logic              ib_bank,
  input  logic [$clog2(ROWS)-1:0] ib_row,
  input  logic [7:0]        ib_slice,
  input  word_t             ib_data [C],
  input  logic              sub_valid,
  input  logic              sub_bank,
  input  logic [VID_W-1:0]  sub_base,
  input  logic [$clog2(ROWS+1)-1:0] sub_rows,
  output logic [1:0]        bank_free,
  output logic              busy,
  // memory
  output logic              rd_req_valid,
  input  logic              rd_req_ready,
  output addr_t             rd_req_addr,
  input  logic              rd_resp_valid,
  input  line_t             rd_resp_data,
  output logic              wr_valid,
  input  logic              wr_ready,
  output addr_t             wr_addr,
  output line_t             wr_data,
  // statistics
  output logic [31:0]       strips_done,
  output logic [31:0]       x_lines_written,
  output logic [31:0]       x_nonzeros
);
  localparam int unsigned NSL   = (FEAT + C - 1) / C;       // slices per row
  localparam int unsigned NCB   = FEAT / COLS;              // column blocks
  localparam int unsigned WLINES = FEAT * FEAT / LINE_WORDS;
  localparam int unsigned BLK_LINES = COLS / LINE_WORDS;    // lines per row block
  localparam int unsigned RB    = $clog2(ROWS);
  localparam int unsigned RW    = $clog2(ROWS + 1);
  localparam int unsigned CYC   = FEAT + ROWS + COLS - 2;

  typedef enum logic [3:0] {
    S_IDLE, S_WLOAD, S_SLOAD, S_INIT, S_COMP, S_DRAIN, S_SWRITE, S_FIN
  } state_e;
  state_e state;

  // buffers: the input feature buffer is one small RAM per array row (one
  // unit slice per word, 2 banks x NSL slices); the weight buffer is a RAM of
  // cachelines in W's row-major order, read BLK_LINES lines per cycle.
  line_t wmem [WLINES];
  logic [ROWS-1:0][COLS-1:0][DATA_W-1:0] sbuf;   // residual S^l block (packed: flip-flops)
  logic [ROWS-1:0][COLS-1:0][DATA_W-1:0] sout;   // S^{l+1} block being drained

  // strip queue, one entry per bank
  logic [1:0]        pend;
  logic [VID_W-1:0]  pbase [2];
  logic [RW-1:0]     prows [2];
  logic              cur_bank;
  logic [VID_W-1:0]  base_q;
  logic [RW-1:0]     rows_q;

  logic [$clog2(NCB+1)-1:0]   cb;
  logic [$clog2(CYC+2)-1:0]   k;
  logic [31:0]                li;         // line counter for loads / writes
  logic                       rd_pend, rd_out;

  // ---------------- input buffer ----------------
  localparam int unsigned SW = $clog2(2 * NSL);
  logic [C*DATA_W-1:0] ib_line;
  logic [C*DATA_W-1:0] ib_rd [ROWS];
  logic [SW-1:0]       ib_wsel, ib_rsel;
  always_comb begin
    for (int p = 0; p < C; p++) ib_line[p*DATA_W +: DATA_W] = ib_data[p];
  end
  assign ib_wsel = SW'(int'(ib_bank) * NSL + int'(ib_slice));
  assign ib_rsel = SW'(int'(cur_bank) * NSL + (int'(k) / C) % NSL);

  for (genvar r = 0; r < ROWS; r++) begin : g_ib
    logic [C*DATA_W-1:0] m [2*NSL];
    always_ff @(posedge clk) begin
      if (ib_we && ib_row == RB'(r)) m[ib_wsel] <= ib_line;
    end
    assign ib_rd[r] = m[ib_rsel];
  end

  // weight lines for step k, column block cb: W[k][cb*COLS +: COLS]
  logic [COLS*DATA_W-1:0] w_blk;
  always_comb begin
    for (int b = 0; b < BLK_LINES; b++)
      w_blk[b*LINE_W +: LINE_W] =
        wmem[((int'(k) % FEAT) * FEAT + int'(cb) * COLS) / LINE_WORDS + b];
  end

  // ---------------- systolic array ----------------
  logic  sa_load, sa_en, sa_shift;
  word_t sa_init [ROWS][COLS];
  word_t sa_a    [ROWS];
  word_t sa_w    [COLS];
  word_t sa_out  [ROWS];

  always_comb begin
    for (int i = 0; i < ROWS; i++)
      for (int j = 0; j < COLS; j++) sa_init[i][j] = sbuf[i][COLS-1-j];
    for (int i = 0; i < ROWS; i++)
      sa_a[i] = (int'(k) < FEAT && RW'(i) < rows_q) ? ib_rd[i][(int'(k) % C)*DATA_W +: DATA_W] : '0;
    for (int j = 0; j < COLS; j++)
      sa_w[j] = (int'(k) < FEAT) ? w_blk[(COLS-1-j)*DATA_W +: DATA_W] : '0;
  end

  systolic_array #(.ROWS(ROWS), .COLS(COLS)) u_sa (
    .clk(clk), .rst_n(rst_n), .load(sa_load), .init(sa_init), .en(sa_en),
    .a_col(sa_a), .w_row(sa_w), .shift(sa_shift), .out_col(sa_out));

  // ---------------- ReLU + compressor ----------------
  logic  cp_start, cp_in_valid, cp_in_ready, cp_last;
  logic  cp_wr_valid, cp_wr_ready;
  addr_t cp_wr_addr;
  line_t cp_wr_data;

  compressor #(.ROWS(ROWS), .C(C)) u_cmp (
    .clk(clk), .rst_n(rst_n), .start(cp_start), .xout_base(x_out_base),
    .strip_base(base_q), .nslices(16'(NSL)), .nrows(rows_q),
    .in_valid(cp_in_valid), .in_ready(cp_in_ready), .in_val(sa_out), .in_last(cp_last),
    .wr_valid(cp_wr_valid), .wr_ready(cp_wr_ready), .wr_addr(cp_wr_addr), .wr_data(cp_wr_data),
    .lines_written(x_lines_written), .nonzeros(x_nonzeros));

  // drain step: one value per row, only when the compressor can take it
  logic drain_step;
  assign drain_step  = (state == S_DRAIN) && cp_in_ready;
  assign sa_load     = (state == S_INIT);
  assign sa_en       = (state == S_COMP);
  assign sa_shift    = drain_step;
  assign cp_in_valid = drain_step;
  assign cp_last     = (int'(cb) == NCB - 1) && (int'(k) == COLS - 1);

  // ---------------- memory ports ----------------
  logic [RB-1:0] srow;
  logic [7:0]    sl;
  assign srow = RB'(li / BLK_LINES);
  assign sl   = 8'(li % BLK_LINES);

  always_comb begin
    rd_req_addr = '0;
    if (state == S_WLOAD) rd_req_addr = w_base + addr_t'(li) * LINE_BYTES;
    else rd_req_addr = s_in_base +
           addr_t'(((base_q + VID_W'(srow)) * FEAT + VID_W'(cb) * COLS) * 4) +
           addr_t'(sl) * LINE_BYTES;
  end
  assign rd_req_valid = rd_out;

  // writes: compressor first, dense S^{l+1} rows in S_SWRITE
  line_t s_line;
  always_comb begin
    for (int q = 0; q < LINE_WORDS; q++)
      s_line[q*DATA_W +: DATA_W] = sout[srow][int'(sl) * LINE_WORDS + q];
  end
  assign wr_valid    = cp_wr_valid || (state == S_SWRITE && RW'(srow) < rows_q && !cp_wr_valid);
  assign wr_addr     = cp_wr_valid ? cp_wr_addr
                     : s_out_base + addr_t'(((base_q + VID_W'(srow)) * FEAT + VID_W'(cb) * COLS) * 4)
                                  + addr_t'(sl) * LINE_BYTES;
  assign wr_data     = cp_wr_valid ? cp_wr_data : s_line;
  assign cp_wr_ready = wr_ready;

  assign busy = (state != S_IDLE) || (pend != 2'b00);

  always_ff @(posedge clk) begin
    if (state == S_WLOAD && rd_pend && rd_resp_valid) wmem[li[$clog2(WLINES)-1:0]] <= rd_resp_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; pend <= '0; bank_free <= 2'b11; cur_bank <= 1'b0;
      base_q <= '0; rows_q <= '0; cb <= '0; k <= '0; li <= '0;
      rd_pend <= 1'b0; rd_out <= 1'b0; w_loaded <= 1'b0; cp_start <= 1'b0;
      strips_done <= '0;
      for (int b = 0; b < 2; b++) begin pbase[b] <= '0; prows[b] <= '0; end
      for (int i = 0; i < ROWS; i++)
        begin sbuf[i] <= '0; sout[i] <= '0; end
    end else begin
      cp_start <= 1'b0;
      if (sub_valid) begin
        pend[sub_bank]  <= 1'b1;
        bank_free[sub_bank] <= 1'b0;
        pbase[sub_bank] <= sub_base;
        prows[sub_bank] <= sub_rows;
      end
      // read handshake (W and S^l loads)
      if (rd_out && rd_req_ready) begin rd_out <= 1'b0; rd_pend <= 1'b1; end

      unique case (state)
        S_IDLE: begin
          if (load_w) begin
            state <= S_WLOAD; li <= '0; w_loaded <= 1'b0;
          end else if (pend[cur_bank] && w_loaded) begin
            base_q <= pbase[cur_bank]; rows_q <= prows[cur_bank];
            cb <= '0; li <= '0; cp_start <= 1'b1;
            state <= S_SLOAD;
          end
        end
        S_WLOAD: begin
          if (!rd_out && !rd_pend) rd_out <= 1'b1;
          if (rd_pend && rd_resp_valid) begin
            rd_pend <= 1'b0;
            if (li + 1 == WLINES) begin w_loaded <= 1'b1; state <= S_IDLE; end
            li <= li + 1;
          end
        end
        S_SLOAD: begin
          if (RW'(srow) >= rows_q || li == ROWS * BLK_LINES) begin
            // rows beyond the strip contribute nothing
            for (int i = 0; i < ROWS; i++)
              if (RW'(i) >= rows_q) for (int j = 0; j < COLS; j++) sbuf[i][j] <= '0;
            state <= S_INIT;
          end else begin
            if (!rd_out && !rd_pend) rd_out <= 1'b1;
            if (rd_pend && rd_resp_valid) begin
              rd_pend <= 1'b0;
              for (int q = 0; q < LINE_WORDS; q++)
                sbuf[srow][int'(sl) * LINE_WORDS + q] <= rd_resp_data[q*DATA_W +: DATA_W];
              li <= li + 1;
            end
          end
        end
        S_INIT: begin k <= '0; state <= S_COMP; end
        S_COMP: begin
          if (int'(k) == CYC - 1) begin k <= '0; state <= S_DRAIN; end
          else k <= k + 1'b1;
        end
        S_DRAIN: if (drain_step) begin
          for (int i = 0; i < ROWS; i++) sout[i][int'(k) % COLS] <= sa_out[i];
          if (int'(k) == COLS - 1) begin k <= '0; li <= '0; state <= S_SWRITE; end
          else k <= k + 1'b1;
        end
        S_SWRITE: begin
          if (RW'(srow) >= rows_q || li == ROWS * BLK_LINES) begin
            if (int'(cb) == NCB - 1) state <= S_FIN;
            else begin cb <= cb + 1'b1; li <= '0; state <= S_SLOAD; end
          end else if (!cp_wr_valid && wr_ready) li <= li + 1;
        end
        S_FIN: if (cp_in_ready && !cp_wr_valid) begin
          pend[cur_bank]      <= 1'b0;
          bank_free[cur_bank] <= 1'b1;
          cur_bank    <= ~cur_bank;
          strips_done <= strips_done + 1;
          state       <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
