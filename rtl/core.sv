// core: one ReRAM processing-in-memory core.
//
// Contents (as in the architecture): 8 crossbar subarrays of 128 x 128 2-bit
// cells, each with its 1-bit DACs and 128 sample & hold circuits, 8 ADCs of
// 8 bits, 4 shift & add units, a 2 KB input register and an output register.
//
// What it computes: the input register holds 1024 16-bit values, 128 per
// subarray. Each subarray row holds 16 weights of 16 bit (8 bitlines each),
// so one operation gives 8 x 16 = 128 dot products of length 128:
//   P[s][j] = sum_r x[s*128+r] * w_s[r][j]
// with unsigned inputs and signed weights (stored with a +2^15 bias).
//
// How: the inputs are applied bit-serially, bit t = 0..15 on the wordlines.
// A crossbar read (one clock) is followed by the S&H capturing all 128
// bitlines of every subarray; the 8 ADCs then convert one column each per
// clock (128 clocks) while the wordlines already carry the next bit and the
// crossbar reads it. Capture of bit t+1 happens on the clock that converts
// the last column of bit t, so an operation takes 2 + 16*128 clocks of read
// and conversion, 2 clocks of drain and 128 clocks to copy the 128 partial
// sums into the output register; done pulses 2181 clocks after start. At the 1.28 GS/s ADC rate one input bit takes 100 ns.
//
// Interface: ir_* writes up to BUS_WORDS input words per clock from the tile
// bus; prog_* writes one subarray row; start/busy/done run an operation;
// or_raddr/or_rdata read the partial sums (address s*16+j, data one clock
// later). Which input goes to which subarray, the sequencer and the output
// register width (40 bit) are this design's choices.
module core import pim_pkg::*; #(
  parameter int SUBS      = 8,
  parameter int ROWS      = 128,
  parameter int COLS      = 128,
  parameter int SA_UNITS  = 4,
  parameter int BUS_WORDS = 24,
  localparam int NEURONS  = COLS / SLICES,
  localparam int IR_WORDS = SUBS * ROWS,
  localparam int OR_WORDS = SUBS * NEURONS,
  localparam int LANES    = SUBS / SA_UNITS,
  localparam int IRA_W    = $clog2(IR_WORDS),
  localparam int ORA_W    = $clog2(OR_WORDS),
  localparam int CW       = $clog2(COLS)
) (
  input  logic                               clk,
  input  logic                               rst_n,
  // input register write (tile bus)
  input  logic                               ir_we,
  input  logic [IRA_W-1:0]                   ir_base,
  input  logic [BUS_WORDS-1:0][DATA_W-1:0]   ir_wdata,
  input  logic [BUS_WORDS-1:0]               ir_wmask,
  // weight programming
  input  logic                               prog_en,
  input  logic [$clog2(SUBS)-1:0]            prog_sub,
  input  logic [$clog2(ROWS)-1:0]            prog_row,
  input  logic [COLS*CELL_BITS-1:0]          prog_data,
  // operation
  input  logic                               start,
  output logic                               busy,
  output logic                               done,
  // output register read
  input  logic [ORA_W-1:0]                   or_raddr,
  output logic signed [PSUM_W-1:0]           or_rdata
);
  typedef enum logic [2:0] {S_IDLE, S_READ, S_SAMP, S_CONV, S_DRAIN, S_WRITE} state_e;
  state_e state;

  // input register stored as 16 bit planes: plane t holds bit t of all words
  logic [IR_WORDS-1:0] ir_plane [DATA_W];
  logic [SUBS-1:0][ROWS-1:0]              wl;
  logic [SUBS-1:0][COLS-1:0][BL_W-1:0]    bl, held;
  logic [SUBS-1:0][ADC_BITS-1:0]          code;
  logic [SUBS-1:0]                        code_valid;
  logic [SUBS-1:0][7:0]                   popcnt_h, popcnt_d;
  logic [3:0]                             bit_q, bit_d;
  logic [CW-1:0]                          col, col_d;
  logic [ORA_W:0]                         widx;
  logic [1:0]                             drain;
  logic                                   read, sample, conv, sa_clear;
  logic signed [PSUM_W-1:0]               psum [SA_UNITS][LANES][NEURONS];

  // ---------------- input register ----------------
  always_ff @(posedge clk)
    if (ir_we)
      for (int i = 0; i < BUS_WORDS; i++)
        if (ir_wmask[i] && int'(ir_base) + i < IR_WORDS)
          for (int b = 0; b < DATA_W; b++) ir_plane[b][int'(ir_base) + i] <= ir_wdata[i][b];

  // ---------------- analog array ----------------
  for (genvar s = 0; s < SUBS; s++) begin : g_sub
    reram_subarray #(.ROWS(ROWS), .COLS(COLS), .CELL_BITS(CELL_BITS), .BL_W(BL_W)) u_sub (
      .clk, .prog_en(prog_en && prog_sub == s), .prog_row, .prog_data,
      .read, .wl(wl[s]), .bl(bl[s]));
    sample_hold #(.COLS(COLS), .BL_W(BL_W)) u_sh (.clk, .sample, .bl(bl[s]), .held(held[s]));
    adc #(.COLS(COLS), .BL_W(BL_W), .BITS(ADC_BITS)) u_adc (
      .clk, .rst_n, .conv, .col, .held(held[s]), .code(code[s]), .code_valid(code_valid[s]));
  end

  // ---------------- shift & add ----------------
  for (genvar u = 0; u < SA_UNITS; u++) begin : g_sa
    core_shift_add #(.LANES(LANES), .NEURONS(NEURONS)) u_sa (
      .clk, .rst_n, .clear(sa_clear), .valid(code_valid[u*LANES]), .col(col_d), .bit_idx(bit_d),
      .code(code[u*LANES +: LANES]), .popcnt(popcnt_d[u*LANES +: LANES]), .psum(psum[u]));
  end

  // ---------------- output register ----------------
  logic [$clog2(SUBS)-1:0]    w_sub;
  logic [$clog2(NEURONS)-1:0] w_nrn;
  assign w_sub = widx[ORA_W-1:$clog2(NEURONS)];
  assign w_nrn = widx[$clog2(NEURONS)-1:0];

  logic [0:0][ORA_W-1:0]  or_ra;
  logic [0:0][PSUM_W-1:0] or_rd;
  assign or_ra    = or_raddr;
  assign or_rdata = or_rd[0];
  edram_buffer #(.WORDS(OR_WORDS), .WIDTH(PSUM_W), .RPORTS(1)) u_or (
    .clk, .we(state == S_WRITE), .waddr(widx[ORA_W-1:0]),
    .wdata(psum[int'(w_sub) / LANES][int'(w_sub) % LANES][w_nrn]), .raddr(or_ra), .rdata(or_rd));

  // ---------------- sequencer ----------------
  assign sample   = (state == S_SAMP) || (state == S_CONV && col == CW'(COLS - 1) && bit_q != 4'd15);
  assign read     = (state == S_READ) || (state == S_CONV && col == '0);
  assign conv     = (state == S_CONV);
  assign sa_clear = start && state == S_IDLE;
  assign busy     = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state <= S_IDLE; bit_q <= '0; col <= '0; widx <= '0; drain <= '0; done <= 1'b0;
      wl <= '0; popcnt_h <= '0; popcnt_d <= '0; bit_d <= '0; col_d <= '0;
    end else begin
      done <= 1'b0;
      if (conv) begin
        bit_d    <= bit_q;
        col_d    <= col;
        popcnt_d <= popcnt_h;
      end
      if (sample)
        for (int s = 0; s < SUBS; s++) popcnt_h[s] <= 8'($countones(wl[s]));
      unique case (state)
        S_IDLE: if (start) begin
          wl <= ir_plane[0];
          bit_q <= '0;
          state <= S_READ;
        end
        S_READ: begin
          state <= S_SAMP;
        end
        S_SAMP: begin
          wl <= ir_plane[1];
          col   <= '0;
          state <= S_CONV;
        end
        S_CONV: begin
          col <= col + 1'b1;
          if (col == CW'(COLS - 1)) begin
            if (bit_q == 4'd15) begin
              state <= S_DRAIN;
              drain <= '0;
              wl    <= '0;
            end else begin
              bit_q <= bit_q + 1'b1;
              if (bit_q != 4'd14)
                wl <= ir_plane[bit_q + 4'd2];
            end
          end
        end
        S_DRAIN: begin
          drain <= drain + 1'b1;
          if (drain == 2'd1) begin
            state <= S_WRITE;
            widx  <= '0;
          end
        end
        S_WRITE: begin
          widx <= widx + 1'b1;
          if (widx == (ORA_W+1)'(OR_WORDS - 1)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end

  assert property (@(posedge clk) disable iff (!rst_n) start |-> state == S_IDLE)
    else $error("core: start while busy");
endmodule
