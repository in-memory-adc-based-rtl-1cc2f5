// nladc_imc_macro: SRAM in-memory-computing macro with a reconfigurable
// in-memory nonlinear ADC (IM NL-ADC).
//
// A 256 x 128 array of dual-9T cells computes 128 signed dot products of a
// 256-element input vector at once: inputs arrive as PWM pulses on the read
// word lines and each column integrates sum_k W_k X_k as a bit-line voltage
// difference, V_MAC, which the S1 switches then hold on C_BL. A 129th column
// of identical replica cells generates one shared ramp V_ADC whose step sizes
// are set by how many cells each step turns on, so the reference levels can be
// placed nonlinearly (e.g. at the midpoints between K-means centers). All 128
// sense amplifiers compare their V_MAC with V_ADC after every step, the ripple
// counters count the comparisons that the MAC value passes, and a table maps
// each count (floor index) back to its quantized center.
//
// Datapath: rwl_driver -> dual9t_array (MAC) and nladc_ref_column (ramp),
// sharing the word lines -> 128 x sense_amp -> 128 x ripple_counter ->
// nladc_center_lut. Control: imc_phase_seq runs precharge, MAC, hold and ramp;
// nladc_ramp_ctrl sequences the ramp steps. A small loader writes multi-bit
// weights through weight_encoder, one physical row per cycle.
//
// Interface:
//  * Weights: w_we with logical row w_row and one signed weight per column
//    (w_data). A w_bits-bit weight takes K = 1/3/7 physical rows and K cycles;
//    w_ready is low while the loader writes. Logical rows past 256/K are
//    ignored. Reference-column cells are written one at a time (ref_we).
//  * Configuration (static during an operation): in_bits 1..7, w_bits 2..4,
//    adc_bits 1..7, n_init (cells of the initial ramp), pulse_w (cycles per
//    ramp pulse), the ramp step table (step_we) and the code table (lut_we).
//  * Operation: start with x[] valid; busy until done (one cycle). code[] and
//    data[] are valid from done until the next start.
// Latency: counted from the edge that samples start, done is high in cycle
// (2^in_bits - 1) + (2^adc_bits - 1)(pulse_w + 2) + 7.
//
// Follows the design: array and column sizes, shared word lines and replica
// column, PWM inputs, S1 hold, SA per column, ripple counters, code-to-center
// mapping, 1-7 bit inputs and outputs, 2-4 bit weights. Own choices: a single
// clock (both clock domains of the design run at 200 MHz), the row-level
// weight port and the loader, and all cycle-level timing.
module nladc_imc_macro
  import nladc_pkg::*;
#(
  parameter int NROWS = ROWS,
  parameter int NCOLS = COLS
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // weight load
  input  logic                         w_we,
  input  logic [7:0]                   w_row,
  input  logic signed [MAX_W_BITS-1:0] w_data [NCOLS],
  output logic                         w_ready,
  input  logic                         ref_we,
  input  logic [$clog2(NROWS)-1:0]     ref_row,
  input  cell_t                        ref_cell,
  // configuration
  input  logic [2:0]                   in_bits,
  input  logic [2:0]                   w_bits,
  input  logic [2:0]                   adc_bits,
  input  logic [CELL_W-1:0]            n_init,
  input  logic [PW_W-1:0]              pulse_w,
  input  logic                         step_we,
  input  logic [MAX_BITS-1:0]          step_addr,
  input  logic [CELL_W-1:0]            step_cells,
  input  logic                         lut_we,
  input  logic [MAX_BITS-1:0]          lut_addr,
  input  logic signed [DATA_W-1:0]     lut_data,
  // operation
  input  logic                         start,
  input  logic signed [IN_W-1:0]       x [NROWS],
  output logic                         busy,
  output logic                         done,
  output logic [CNT_W-1:0]             code [NCOLS],
  output logic signed [DATA_W-1:0]     data [NCOLS]
);

  localparam int RW = $clog2(NROWS);

  // ---------------------------------------------------------------- weights
  logic                         ld_busy;
  logic [2:0]                   ld_j, ld_last;
  logic [9:0]                   ld_base;
  logic signed [MAX_W_BITS-1:0] ld_w [NCOLS];
  logic [2:0]                   ld_wbits;
  cell_t                        enc_cells [NCOLS][MAX_CELLS_PER_W];
  cell_t                        arr_wr_data [NCOLS];
  logic [9:0]                   ld_row;
  logic                         arr_wr_en;

  logic [2:0] k;
  assign k       = (w_bits == 3'd4) ? 3'd7 : (w_bits == 3'd3) ? 3'd3 : 3'd1;
  assign w_ready = !ld_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ld_busy  <= 1'b0;
      ld_j     <= '0;
      ld_last  <= '0;
      ld_base  <= '0;
      ld_wbits <= 3'd2;
      for (int c = 0; c < NCOLS; c++) ld_w[c] <= '0;
    end else if (!ld_busy) begin
      if (w_we) begin
        ld_busy  <= 1'b1;
        ld_j     <= '0;
        ld_last  <= k - 1'b1;
        ld_base  <= 10'(w_row) * 10'(k);
        ld_wbits <= w_bits;
        for (int c = 0; c < NCOLS; c++) ld_w[c] <= w_data[c];
      end
    end else begin
      ld_j <= ld_j + 1'b1;
      if (ld_j == ld_last) ld_busy <= 1'b0;
    end
  end

  for (genvar c = 0; c < NCOLS; c++) begin : g_enc
    weight_encoder u_enc (.w(ld_w[c]), .w_bits(ld_wbits), .cells(enc_cells[c]));
    assign arr_wr_data[c] = enc_cells[c][ld_j];
  end

  // A group is written only if all of its rows exist.
  assign ld_row    = ld_base + 10'(ld_j);
  assign arr_wr_en = ld_busy && (ld_base + 10'(ld_last) < 10'(NROWS));

  // ---------------------------------------------------------------- control
  logic pch_mac, pch_adc, s1, pwm_start, pwm_busy, ramp_start, ramp_done;
  logic rcnt_clr_n, sa_strobe, adc_en, ramp_busy;
  logic [NROWS-1:0] adc_p, adc_n, rwl_p, rwl_n;

  imc_phase_seq u_seq (
    .clk, .rst_n, .start, .pwm_busy, .ramp_done,
    .pch_mac, .pch_adc, .s1, .pwm_start, .ramp_start, .rcnt_clr_n,
    .busy, .done
  );

  nladc_ramp_ctrl #(.NROWS(NROWS)) u_ramp (
    .clk, .rst_n,
    .cfg_we(step_we), .cfg_addr(step_addr), .cfg_cells(step_cells),
    .start(ramp_start), .adc_bits, .n_init, .pulse_w,
    .adc_en, .adc_p, .adc_n, .sa_strobe,
    .busy(ramp_busy), .done(ramp_done)
  );

  rwl_driver #(.NROWS(NROWS)) u_rwl (
    .clk, .rst_n, .pwm_start, .x, .in_bits, .w_bits, .pwm_busy,
    .adc_en, .adc_p, .adc_n, .rwl_p, .rwl_n
  );

  // ---------------------------------------------------------------- analog
  logic signed [VW-1:0] v_mac [NCOLS];
  logic signed [VW-1:0] v_adc;

  dual9t_array #(.NROWS(NROWS), .NCOLS(NCOLS)) u_array (
    .clk, .wr_en(arr_wr_en), .wr_row(ld_row[RW-1:0]), .wr_data(arr_wr_data),
    .rwl_p, .rwl_n, .pch(pch_mac), .s1, .v_mac
  );

  nladc_ref_column #(.NROWS(NROWS)) u_refcol (
    .clk, .wr_en(ref_we), .wr_row(ref_row), .wr_cell(ref_cell),
    .rwl_p, .rwl_n, .pch_adc, .v_adc
  );

  // --------------------------------------------------- compare and count
  logic [NCOLS-1:0] v_on;

  for (genvar c = 0; c < NCOLS; c++) begin : g_col
    sense_amp u_sa (
      .clk, .rst_n, .strobe(sa_strobe), .v_mac(v_mac[c]), .v_adc, .v_on(v_on[c])
    );
    ripple_counter #(.WIDTH(CNT_W)) u_rcnt (
      .clr_n(rcnt_clr_n), .cnt_in(v_on[c]), .q(code[c])
    );
  end

  nladc_center_lut #(.NCOLS(NCOLS)) u_lut (
    .clk, .rst_n, .we(lut_we), .waddr(lut_addr), .wdata(lut_data),
    .code, .data
  );

  // ------------------------------------------------------------- rules
  // start only while idle; weight rows only while the loader is ready.
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("start while busy");
  a_w_ready: assert property (@(posedge clk) disable iff (!rst_n) w_we |-> w_ready)
    else $error("weight write while the loader is busy");
  // The ramp pulses the shared word lines: S1 must be open so V_MAC is held.
  a_s1_open: assert property (@(posedge clk) disable iff (!rst_n) ramp_busy |-> !s1)
    else $error("S1 closed during the ramp");

endmodule
