// tile: one tile of the node and its connection to the tile's router.
//
// Contents (as in the architecture): 12 PIM cores, a 64 KB eDRAM tile
// memory, a 384-bit tile bus, one shift & add unit, two sigmoid units, a max
// pooling unit and a 2 KB output register.
//
// One tile operation computes one output pixel of a layer mapped on the
// tile ("one intra-layer pipeline step"):
//  LOAD    each core's 1024-word input register is filled from tile memory
//          over the tile bus, 24 words (3 memory rows of 128 bit) per clock,
//          43 clocks per core, starting at memory row in_base[k] + p*stride
//          (p = pixel counter);
//  COMPUTE all cores run one bit-serial crossbar operation (2181 clocks);
//  REDUCE  for each of n_groups x 16 outputs the shift & add unit sums the
//          partial sums of G consecutive subarray slices (slice q = core*8 +
//          sub), one per clock; the sum is scaled to Q8.8, passed through a
//          sigmoid unit (even outputs: unit 0, odd: unit 1) and, if pooling
//          is on, through the max pooling unit against the running maximum
//          kept in the output register, then written there;
//  SEND    when pooling is off, or on the 4th pixel of a 2 x 2 window, the
//          outputs are sent as 128-bit flits (8 words each) to the tile
//          memory of the destination tile, row dest_row + out_pix*flits + i.
// Flits arriving from the router are written into tile memory.
// In auto mode the tile starts itself through layer_sync as soon as enough
// values of the previous layer have arrived (inter-layer pipelining) and
// keeps one image at a time (batch pipelining).
//
// Configuration (cfg_op):
//  CFG_REG  addr 0..11 in_base[k]; 16 {n_groups[14:8], G[6:0]};
//           17 {auto[2], send[1], pool[0]}; 18 {dest_row[21:10], y[9:5], x[4:0]};
//           19 stride; 20 {l[23:20], h[19:10], w[9:0]}; 21 n; 22 clear counters
//  CFG_PROG addr {core[13:10], sub[9:7], row[6:0]}: one subarray row (256 bit)
//  CFG_MEM  addr = memory row, data[127:0]
//  CFG_START start one operation (manual mode)
// rd_addr/rd_data read the output register (one clock).
//
// The contents and sizes follow the architecture; the operation order, the
// memory layout, the configuration map and the Q8.8 scaling are this
// design's choices.
module tile import pim_pkg::*; #(
  parameter int CORES     = 12,
  parameter int SUBS      = 8,
  parameter int ROWS      = 128,
  parameter int COLS      = 128,
  parameter int MEM_ROWS  = 4096,     // 64 KB of 128-bit rows
  parameter int TOR_WORDS = 1024,     // 2 KB output register
  parameter int BUS_W     = 384,
  parameter int SIG_UNITS = 2,
  localparam int BUS_WORDS = BUS_W / DATA_W,          // 24
  localparam int ROWS_PER_BEAT = BUS_W / FLIT_W,      // 3
  localparam int NEURONS  = COLS / SLICES,            // 16
  localparam int IR_WORDS = SUBS * ROWS,              // 1024
  localparam int BEATS    = (IR_WORDS + BUS_WORDS - 1) / BUS_WORDS,  // 43
  localparam int SLICES_T = CORES * SUBS,             // 96
  localparam int MA_W     = $clog2(MEM_ROWS),
  localparam int TA_W     = $clog2(TOR_WORDS)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // host configuration
  input  logic                  cfg_valid,
  input  cfg_op_e               cfg_op,
  input  logic [15:0]           cfg_addr,
  input  logic [CFG_DATA_W-1:0] cfg_data,
  output logic                  busy,
  output logic                  done,
  input  logic [TA_W-1:0]       rd_addr,
  output logic [DATA_W-1:0]     rd_data,
  // router
  output logic                  inj_valid,
  output flit_t                 inj_flit,
  input  logic                  inj_ready,
  input  logic                  ej_valid,
  input  flit_t                 ej_flit,
  output logic                  ej_ready,
  // events (one clock pulses) for testbenches
  output logic                  ev_wait,      // auto mode, idle, inputs not complete
  output logic                  ev_pool_hold, // pooled pixel not sent (window open)
  output logic                  ev_sent       // a flit was sent
);
  typedef enum logic [2:0] {T_IDLE, T_LOAD, T_START, T_COMP, T_RED, T_SEND} tstate_e;
  typedef enum logic [1:0] {R_ISSUE, R_WAIT, R_FIN} rstate_e;
  tstate_e state;
  rstate_e rstate;

  // ---------------- configuration ----------------
  logic [MA_W-1:0]    in_base [CORES];
  logic [6:0]         grp, n_groups;
  logic               pool_en, send_en, auto_en;
  logic [COORD_W-1:0] dest_x, dest_y;
  logic [MA_W-1:0]    dest_row, stride;
  logic [9:0]         lw, lh;
  logic [3:0]         ll;
  logic [11:0]        ln;
  logic [MA_W-1:0]    pix, out_pix;
  logic [1:0]         win;
  logic               cfg_start;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      for (int k = 0; k < CORES; k++) in_base[k] <= '0;
      grp <= 7'd1; n_groups <= 7'd1; pool_en <= 1'b0; send_en <= 1'b0; auto_en <= 1'b0;
      dest_x <= '0; dest_y <= '0; dest_row <= '0; stride <= '0;
      lw <= 10'd1; lh <= 10'd1; ll <= 4'd1; ln <= 12'd1;
    end else if (cfg_valid && cfg_op == CFG_REG) begin
      if (cfg_addr < 16'(CORES)) in_base[cfg_addr[3:0]] <= cfg_data[MA_W-1:0];
      unique case (cfg_addr)
        16'd16: begin grp <= cfg_data[6:0]; n_groups <= cfg_data[14:8]; end
        16'd17: begin pool_en <= cfg_data[0]; send_en <= cfg_data[1]; auto_en <= cfg_data[2]; end
        16'd18: begin dest_x <= cfg_data[4:0]; dest_y <= cfg_data[9:5]; dest_row <= cfg_data[21:10]; end
        16'd19: stride <= cfg_data[MA_W-1:0];
        16'd20: begin lw <= cfg_data[9:0]; lh <= cfg_data[19:10]; ll <= cfg_data[23:20]; end
        16'd21: ln <= cfg_data[11:0];
        default: ;
      endcase
    end
  assign cfg_start = cfg_valid && cfg_op == CFG_START;

  // ---------------- inter-layer / batch pipelining ----------------
  logic sync_go, auto_start, ej_take;
  logic [23:0] cyc_wait, val_wait;
  logic [15:0] img_done;
  assign auto_start = auto_en && state == T_IDLE && sync_go;
  layer_sync u_sync (
    .clk, .rst_n, .w(lw), .h(lh), .l(ll), .n(ln),
    .value_cnt(ej_take ? 4'(WPF) : 4'd0), .pix_start(auto_start), .go(sync_go),
    .cycles_wait(cyc_wait), .values_wait(val_wait), .images_done(img_done));
  assign ev_wait = auto_en && state == T_IDLE && !sync_go;

  // ---------------- tile memory (64 KB) ----------------
  logic                                   mem_we;
  logic [MA_W-1:0]                        mem_wa;
  logic [FLIT_W-1:0]                      mem_wd;
  logic [ROWS_PER_BEAT-1:0][MA_W-1:0]     mem_ra;
  logic [ROWS_PER_BEAT-1:0][FLIT_W-1:0]   mem_rd;
  logic                                   host_mem;

  assign host_mem = cfg_valid && cfg_op == CFG_MEM;
  assign ej_ready = !host_mem;
  assign ej_take  = ej_valid && ej_ready;
  assign mem_we   = host_mem || ej_take;
  assign mem_wa   = host_mem ? cfg_addr[MA_W-1:0] : ej_flit.row;
  assign mem_wd   = host_mem ? cfg_data[FLIT_W-1:0] : ej_flit.data;

  edram_buffer #(.WORDS(MEM_ROWS), .WIDTH(FLIT_W), .RPORTS(ROWS_PER_BEAT)) u_mem (
    .clk, .we(mem_we), .waddr(mem_wa), .wdata(mem_wd), .raddr(mem_ra), .rdata(mem_rd));

  // ---------------- cores on the tile bus ----------------
  logic [$clog2(CORES)-1:0]         ld_core, bus_core;
  logic [$clog2(BEATS)-1:0]         ld_beat, bus_beat;
  logic                             bus_valid, ld_last;
  logic [BUS_W-1:0]                 bus;          // the 384-bit tile bus
  logic [CORES-1:0]                 core_busy, core_done, core_seen;
  logic [6:0]                       or_ra;
  logic signed [PSUM_W-1:0]         or_rd [CORES];
  logic                             core_start;

  always_comb
    for (int i = 0; i < ROWS_PER_BEAT; i++)
      mem_ra[i] = in_base[ld_core] + pix * stride + MA_W'(int'(ld_beat) * ROWS_PER_BEAT + i);
  assign bus     = mem_rd;
  assign ld_last = (int'(ld_core) == CORES - 1) && (int'(ld_beat) == BEATS - 1);

  for (genvar k = 0; k < CORES; k++) begin : g_core
    logic [BUS_WORDS-1:0] mask;
    always_comb
      for (int i = 0; i < BUS_WORDS; i++) mask[i] = (int'(bus_beat) * BUS_WORDS + i) < IR_WORDS;
    core #(.SUBS(SUBS), .ROWS(ROWS), .COLS(COLS), .BUS_WORDS(BUS_WORDS)) u_core (
      .clk, .rst_n,
      .ir_we(bus_valid && bus_core == k), .ir_base(10'(int'(bus_beat) * BUS_WORDS)),
      .ir_wdata(bus), .ir_wmask(mask),
      .prog_en(cfg_valid && cfg_op == CFG_PROG && cfg_addr[13:10] == k),
      .prog_sub(cfg_addr[9:7]), .prog_row(cfg_addr[6:0]), .prog_data(cfg_data[COLS*CELL_BITS-1:0]),
      .start(core_start), .busy(core_busy[k]), .done(core_done[k]),
      .or_raddr(or_ra), .or_rdata(or_rd[k]));
  end

  // ---------------- reduction datapath ----------------
  logic [DATA_W-1:0]        tor [TOR_WORDS];     // 2 KB output register
  logic [6:0]               q, g;                // slice in group, group
  logic [3:0]               j;                   // neuron
  logic [$clog2(SLICES_T)-1:0] qs, qs_d;
  logic                     rd_v, rd_first, rd_last;
  logic                     tsa_load, tsa_add;
  logic signed [PSUM_W-1:0] tsa_sum;
  logic [TA_W-1:0]          o;                   // output index g*16+j
  logic signed [DATA_W-1:0] scaled;
  logic [SIG_UNITS-1:0][DATA_W-1:0] sig_y;
  logic [DATA_W-1:0]        act, pooled;
  logic                     emit;

  assign qs    = ($clog2(SLICES_T))'(int'(g) * int'(grp) + int'(q));
  assign or_ra = {qs[2:0], j};
  assign o     = TA_W'({g, j});
  assign tsa_load = rd_v && rd_first;
  assign tsa_add  = rd_v && !rd_first;

  tile_shift_add u_tsa (.clk, .rst_n, .load(tsa_load), .add(tsa_add),
                        .psum(or_rd[qs_d[$clog2(SLICES_T)-1:3]]), .sum(tsa_sum));

  // Q16.16 sum to Q8.8 with saturation
  always_comb begin
    logic signed [PSUM_W-1:0] sh;
    sh = tsa_sum >>> FRAC_W;
    if (sh > PSUM_W'(32767))       scaled = 16'sh7fff;
    else if (sh < -PSUM_W'(32768)) scaled = -16'sh8000;
    else                           scaled = sh[DATA_W-1:0];
  end

  for (genvar u = 0; u < SIG_UNITS; u++) begin : g_sig
    sigmoid_unit u_sig (.x(scaled), .y(sig_y[u]));
  end
  assign act = sig_y[int'(o) % SIG_UNITS];
  max_pool u_mp (.first(win == 2'd0), .x(act), .prev(tor[o]), .y(pooled));

  assign emit = !pool_en || win == 2'd3;

  // ---------------- send ----------------
  logic [TA_W-1:0] n_out;
  logic [TA_W-4:0] fidx, n_flits;
  assign n_out   = TA_W'(int'(n_groups) * NEURONS);
  assign n_flits = (TA_W-3)'((int'(n_out) + WPF - 1) / WPF);

  always_comb begin
    inj_flit.x   = dest_x;
    inj_flit.y   = dest_y;
    inj_flit.row = dest_row + out_pix * MA_W'(n_flits) + MA_W'(fidx);
    for (int i = 0; i < WPF; i++)
      inj_flit.data[i*DATA_W +: DATA_W] = (int'(fidx) * WPF + i < int'(n_out)) ? tor[int'(fidx) * WPF + i] : '0;
  end
  assign inj_valid = (state == T_SEND);
  assign ev_sent   = inj_valid && inj_ready;

  // ---------------- sequencer ----------------
  assign core_start = (state == T_START) && !bus_valid;
  assign busy = (state != T_IDLE);

  always_ff @(posedge clk) begin
    rd_data <= tor[rd_addr];
    if (state == T_RED && rstate == R_FIN) tor[o] <= pool_en ? pooled : act;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state <= T_IDLE; rstate <= R_ISSUE; done <= 1'b0; ev_pool_hold <= 1'b0;
      ld_core <= '0; ld_beat <= '0; bus_valid <= 1'b0; bus_core <= '0; bus_beat <= '0;
      core_seen <= '0; q <= '0; g <= '0; j <= '0; qs_d <= '0;
      rd_v <= 1'b0; rd_first <= 1'b0; rd_last <= 1'b0; fidx <= '0;
      pix <= '0; out_pix <= '0; win <= '0;
    end else begin
      done         <= 1'b0;
      ev_pool_hold <= 1'b0;
      bus_valid    <= (state == T_LOAD);
      bus_core     <= ld_core;
      bus_beat     <= ld_beat;
      rd_v         <= (state == T_RED && rstate == R_ISSUE);
      rd_first     <= (q == '0);
      rd_last      <= (q == grp - 1'b1);
      qs_d         <= qs;
      if (cfg_valid && cfg_op == CFG_REG && cfg_addr == 16'd22) begin
        pix <= '0; out_pix <= '0; win <= '0;
      end
      unique case (state)
        T_IDLE: if (cfg_start || auto_start) begin
          state   <= T_LOAD;
          ld_core <= '0;
          ld_beat <= '0;
        end
        T_LOAD: begin
          if (ld_last) state <= T_START;
          if (int'(ld_beat) == BEATS - 1) begin
            ld_beat <= '0;
            ld_core <= ld_core + 1'b1;
          end else ld_beat <= ld_beat + 1'b1;
        end
        T_START: if (!bus_valid) begin   // wait for the last bus beat
          state     <= T_COMP;
          core_seen <= '0;
        end
        T_COMP: begin
          core_seen <= core_seen | core_done;
          if ((core_seen | core_done) == '1) begin
            state  <= T_RED;
            rstate <= R_ISSUE;
            q <= '0; g <= '0; j <= '0;
          end
        end
        T_RED: unique case (rstate)
          R_ISSUE: begin
            if (q == grp - 1'b1) begin
              q      <= '0;
              rstate <= R_WAIT;
            end else q <= q + 1'b1;
          end
          R_WAIT: if (rd_v && rd_last) rstate <= R_FIN;   // last add happens now
          R_FIN: begin
            rstate <= R_ISSUE;
            if (j == 4'd15) begin
              j <= '0;
              if (g == n_groups - 1'b1) begin
                g <= '0;
                pix <= pix + 1'b1;
                if (pool_en) win <= win + 1'b1;
                if (send_en && emit) begin
                  state <= T_SEND;
                  fidx  <= '0;
                end else begin
                  state        <= T_IDLE;
                  done         <= 1'b1;
                  ev_pool_hold <= pool_en && !emit;
                end
              end else g <= g + 1'b1;
            end else j <= j + 1'b1;
          end
          default: rstate <= R_ISSUE;
        endcase
        T_SEND: if (inj_ready) begin
          if (fidx == n_flits - 1'b1) begin
            state   <= T_IDLE;
            done    <= 1'b1;
            out_pix <= out_pix + 1'b1;
          end else fidx <= fidx + 1'b1;
        end
        default: state <= T_IDLE;
      endcase
    end

  assert property (@(posedge clk) disable iff (!rst_n) state == T_RED |-> int'(grp) * int'(n_groups) <= SLICES_T && int'(n_groups) * NEURONS <= TOR_WORDS && grp != 0)
    else $error("tile: bad reduction configuration (G=%0d, n_groups=%0d)", grp, n_groups);
endmodule
