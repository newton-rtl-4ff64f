// ima: In-situ Multiply-Accumulate unit, the crossbar compute engine of a tile.
//
// Eight mats (each XPM crossbars + shared DAC + one tunable ADC) hang off a
// three-level HTree of shift-and-add nodes (shifts 2, 4, 8), which rebuilds
// the full-weight column dot product from the eight 2-bit weight slices. The
// IMA takes 128 16-bit inputs (written into the input register over the tile
// bus) and serves one network layer only. Two modes:
//
// MODE_STD (16 iterations): mat s holds slice s of every weight; crossbar x of
//   the mat holds neurons 128x..128x+127, so 128*XPM neurons are computed.
//   Iteration i applies input bit i to all mats; every bitline of every
//   crossbar is converted by the adaptive ADC with the window of
//   newton_pkg::adc_window(s, i), so bits that cannot reach result bits
//   [25:10] are never resolved and an early comparison flags saturation.
//   The output register accumulates root << i per neuron and the result is
//   bits [25:10] of the sum, or 0xFFFF if any ADC or the sum overflowed.
//
// MODE_KARATSUBA (8 + 9 iterations), 128 neurons. With W = 2^8 W1 + W0 and
//   X = 2^8 X1 + X0: crossbar 0 of mats 0-3 holds the 4 slices of W0, crossbar
//   0 of mats 4-7 those of W1, crossbar 1 of mats 0-4 the 5 slices of the
//   9-bit W0+W1; crossbar 1 of mats 5-7 is unused. Iterations 0-7 apply X0 bits
//   to mats 0-3 and X1 bits to mats 4-7 in parallel; the two mid-level HTree
//   nodes give W0*X0 and W1*X1 terms. Iterations 8-16 apply the bits of
//   X0+X1 (from the bit-serial pre-adder) to mats 0-4 and the root gives
//   the (W0+W1)(X0+X1) term. The output register keeps the three
//   sub-products and forms
//     WX = 2^16 W1X1 + 2^8 ((W1+W0)(X1+X0) - W1X1 - W0X0) + W0X0
//   then scales and clamps as above. ADCs run at full resolution here.
//
// Timing: one iteration = 1 cycle to drive rows and sample, then for each
// converted crossbar 128 ADC slots of SLOT_CYC cycles (one SAR comparison per
// cycle, ADC gated when it finishes early). STD takes 16*(1+128*XPM*SLOT_CYC)
// cycles, KARATSUBA 17*(1+128*SLOT_CYC), plus one cycle to finish; `done`
// pulses at the end and `busy` is high in between. Results are read through
// out_idx/out_data (combinational) until the next start.
// The mat/HTree organisation, slice placement, Karatsuba mapping, overflow
// signalling and scaling follow the paper; the cycle-level schedule, the
// handshakes and two ADC slots per iteration for XPM = 2 in STD mode are
// this design's own.
module ima
  import newton_pkg::*;
#(
  parameter int unsigned XPM      = 2,                // crossbars per mat (ADC sharing)
  parameter int unsigned SLOT_CYC = ADC_BITS + 2,     // cycles per ADC sample slot
  localparam int unsigned XW      = (XPM > 1) ? $clog2(XPM) : 1,
  localparam int unsigned N_NEUR  = COLS * XPM,
  localparam int unsigned NW      = $clog2(N_NEUR),
  localparam int unsigned SUM_W   = $clog2(ROWS * 3 + 1)
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // crossbar programming
  input  logic                           wr_en,
  input  logic [2:0]                     wr_mat,
  input  logic [XW-1:0]                  wr_xbar,
  input  logic [$clog2(COLS)-1:0]        wr_col,
  input  logic [ROWS-1:0][CELL_BITS-1:0] wr_cells,
  // input register (tile bus)
  input  logic                           in_we,
  input  logic [$clog2(ROWS)-1:0]        in_idx,
  input  logic [IN_BITS-1:0]             in_data,
  // operation control
  input  logic                           start,
  input  ima_mode_e                      mode,
  output logic                           busy,
  output logic                           done,
  // output register
  input  logic [NW-1:0]                  out_idx,
  output logic [OUT_BITS-1:0]            out_data,
  // activity of the last / current operation
  output logic [31:0]                    adc_cmps,
  output logic [4:0]                     iters
);
  // ---------------------------------------------------------------- state
  typedef enum logic [1:0] {S_IDLE, S_DRIVE, S_CONV, S_FIN} state_e;
  state_e            state;
  ima_mode_e         mode_q;
  logic              phase;          // Karatsuba: 0 = W0X0/W1X1, 1 = middle product
  logic [3:0]        iter;
  logic [XW-1:0]     xs;
  logic [$clog2(COLS)-1:0] col;
  logic [$clog2(SLOT_CYC+1)-1:0] slot;

  logic [IN_BITS-1:0] in_reg [ROWS];
  logic [ACC_W-1:0]   acc    [N_NEUR];   // STD: dot products; KARATSUBA: W0X0 | W1X1
  logic [ACC_W-1:0]   acc_m  [COLS];     // KARATSUBA middle products
  logic               ovf_q  [N_NEUR];

  // ---------------------------------------------------------------- row drive
  logic [ROWS-1:0] bit_lo, bit_hi, pre_a, pre_b, pre_s;
  logic [ROWS-1:0] rows_mat [N_MATS];
  logic            sample, pre_clear, pre_step;
  logic            kara;

  assign kara = (mode_q == MODE_KARATSUBA);

  always_comb begin
    for (int r = 0; r < int'(ROWS); r++) begin
      bit_lo[r] = in_reg[r][iter];
      bit_hi[r] = in_reg[r][4'(iter[2:0]) + 4'd8];
      pre_a[r]  = (iter < 4'd8) ? in_reg[r][{1'b0, iter[2:0]}]       : 1'b0;
      pre_b[r]  = (iter < 4'd8) ? in_reg[r][4'(iter[2:0]) + 4'd8] : 1'b0;
    end
  end

  serial_preadder #(.N(ROWS)) u_pre (
    .clk(clk), .rst_n(rst_n), .clear(pre_clear), .step(pre_step),
    .a(pre_a), .b(pre_b), .s(pre_s)
  );

  always_comb begin
    for (int m = 0; m < int'(N_MATS); m++) begin
      if (!kara)       rows_mat[m] = bit_lo;
      else if (!phase) rows_mat[m] = (m < 4) ? bit_lo : bit_hi;
      else             rows_mat[m] = (m < 5) ? pre_s : '0;
    end
  end

  assign sample    = (state == S_DRIVE);
  assign pre_step  = sample && kara && phase;
  assign pre_clear = (state == S_IDLE);

  // ---------------------------------------------------------------- mats
  logic [N_MATS-1:0] m_start, m_busy, m_done, m_cmp, m_ovf, m_act;
  logic [SUM_W-1:0]  m_code [N_MATS];
  adc_cfg_t          m_cfg  [N_MATS];
  logic [XW-1:0]     cur_x;

  assign cur_x = kara ? XW'(phase) : xs;

  always_comb begin
    for (int m = 0; m < int'(N_MATS); m++) begin
      m_act[m] = !(kara && phase && m >= 5);
      m_cfg[m] = kara ? ADC_FULL_RES : adc_window(m, int'(iter));
      m_start[m] = (state == S_CONV) && (slot == '0) && m_act[m];
    end
  end

  for (genvar m = 0; m < int'(N_MATS); m++) begin : g_mat
    mat #(.XPM(XPM), .SUM_W(SUM_W)) u_mat (
      .clk       (clk),
      .rst_n     (rst_n),
      .wr_en     (wr_en && (wr_mat == 3'(m))),
      .wr_xbar   (wr_xbar),
      .wr_col    (wr_col),
      .wr_cells  (wr_cells),
      .rows_in   (rows_mat[m]),
      .sample    (sample),
      .adc_start (m_start[m]),
      .xsel      (cur_x),
      .col       (col),
      .cfg       (m_cfg[m]),
      .adc_busy  (m_busy[m]),
      .adc_done  (m_done[m]),
      .adc_cmp   (m_cmp[m]),
      .code      (m_code[m]),
      .ovf       (m_ovf[m])
    );
  end

  // ---------------------------------------------------------------- HTree
  localparam int unsigned L1_W = SUM_W + 3;     // 9 + 2 shift + 1
  localparam int unsigned L2_W = L1_W + 5;      // + 4 shift + 1
  localparam int unsigned L3_W = L2_W + 9;      // + 8 shift + 1
  logic [SUM_W-1:0] leaf_in [N_MATS];
  logic [N_MATS-1:0] leaf_ovf;
  logic [L1_W-1:0]  l1 [4];
  logic [3:0]       l1_ovf;
  logic [L2_W-1:0]  l2 [2];
  logic [1:0]       l2_ovf;
  logic [L3_W-1:0]  root;
  logic             root_ovf;

  always_comb begin
    for (int m = 0; m < int'(N_MATS); m++) begin
      leaf_in[m]  = m_act[m] ? m_code[m] : '0;
      leaf_ovf[m] = m_act[m] & m_ovf[m];
    end
  end

  for (genvar j = 0; j < 4; j++) begin : g_l1
    shift_add #(.LO_W(SUM_W), .HI_W(SUM_W), .SHIFT(2), .OUT_W(L1_W)) u_sa (
      .lo(leaf_in[2*j]), .hi(leaf_in[2*j+1]), .lo_ovf(leaf_ovf[2*j]), .hi_ovf(leaf_ovf[2*j+1]),
      .sum(l1[j]), .ovf(l1_ovf[j]));
  end
  for (genvar j = 0; j < 2; j++) begin : g_l2
    shift_add #(.LO_W(L1_W), .HI_W(L1_W), .SHIFT(4), .OUT_W(L2_W)) u_sa (
      .lo(l1[2*j]), .hi(l1[2*j+1]), .lo_ovf(l1_ovf[2*j]), .hi_ovf(l1_ovf[2*j+1]),
      .sum(l2[j]), .ovf(l2_ovf[j]));
  end
  shift_add #(.LO_W(L2_W), .HI_W(L2_W), .SHIFT(8), .OUT_W(L3_W)) u_root (
    .lo(l2[0]), .hi(l2[1]), .lo_ovf(l2_ovf[0]), .hi_ovf(l2_ovf[1]),
    .sum(root), .ovf(root_ovf));

  // ---------------------------------------------------------------- control
  logic last_slot, last_col, last_x, last_iter;
  logic [NW-1:0] n_std;

  assign last_slot = (slot == ($clog2(SLOT_CYC+1))'(SLOT_CYC - 1));
  assign last_col  = (col == '1);
  assign last_x    = kara || (xs == XW'(XPM - 1));
  assign last_iter = kara ? (phase && iter == 4'd8) : (iter == 4'(IN_BITS - 1));
  assign n_std     = NW'({xs, col});

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      mode_q   <= MODE_STD;
      phase    <= 1'b0;
      iter     <= '0;
      xs       <= '0;
      col      <= '0;
      slot     <= '0;
      done     <= 1'b0;
      adc_cmps <= '0;
      iters    <= '0;
    end else begin
      done <= 1'b0;
      if (state != S_IDLE) adc_cmps <= adc_cmps + 32'($countones(m_cmp));
      unique case (state)
        S_IDLE: if (start) begin
          mode_q   <= mode;
          phase    <= 1'b0;
          iter     <= '0;
          xs       <= '0;
          col      <= '0;
          slot     <= '0;
          adc_cmps <= '0;
          iters    <= '0;
          state    <= S_DRIVE;
        end
        S_DRIVE: begin
          iters <= iters + 5'd1;
          state <= S_CONV;
        end
        S_CONV: begin
          if (!last_slot) slot <= slot + 1'b1;
          else begin
            slot <= '0;
            col  <= col + 1'b1;
            if (last_col) begin
              if (!last_x) xs <= xs + 1'b1;
              else begin
                xs <= '0;
                if (last_iter) state <= S_FIN;
                else begin
                  state <= S_DRIVE;
                  if (kara && !phase && iter == 4'd7) begin
                    phase <= 1'b1;
                    iter  <= '0;
                  end else iter <= iter + 4'd1;
                end
              end
            end
          end
        end
        S_FIN: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- registers
  always_ff @(posedge clk) begin
    if (in_we && state == S_IDLE) in_reg[in_idx] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (state == S_IDLE && start) begin
      for (int n = 0; n < int'(N_NEUR); n++) begin
        acc[n]   <= '0;
        ovf_q[n] <= 1'b0;
      end
      for (int n = 0; n < int'(COLS); n++) acc_m[n] <= '0;
    end else if (state == S_CONV && last_slot) begin
      if (!kara) begin
        acc[n_std]   <= acc[n_std] + (ACC_W'(root) << iter);
        ovf_q[n_std] <= ovf_q[n_std] | root_ovf;
      end else if (!phase) begin
        acc[NW'(col)]          <= acc[NW'(col)] + (ACC_W'(l2[0]) << iter);
        acc[NW'(COLS) + NW'(col)] <= acc[NW'(COLS) + NW'(col)] + (ACC_W'(l2[1]) << iter);
      end else begin
        acc_m[col] <= acc_m[col] + (ACC_W'(root) << iter);
      end
    end
  end

  // ---------------------------------------------------------------- result
  logic [ACC_W-1:0] full;
  logic             sat;
  logic [$clog2(COLS)-1:0] k_idx;

  assign k_idx = out_idx[$clog2(COLS)-1:0];

  always_comb begin
    if (!kara) begin
      full = acc[out_idx];
      sat  = ovf_q[out_idx];
    end else begin
      full = (acc[NW'(COLS) + NW'(k_idx)] << 16)
           + ((acc_m[k_idx] - acc[NW'(COLS) + NW'(k_idx)] - acc[NW'(k_idx)]) << 8)
           + acc[NW'(k_idx)];
      sat  = 1'b0;
    end
    if (sat || (full >> (DROP_LSB + OUT_BITS)) != '0) out_data = '1;
    else                                              out_data = full[DROP_LSB +: OUT_BITS];
  end

  // All ADCs must have finished when their slot closes.
  assert property (@(posedge clk) disable iff (!rst_n) (state == S_CONV && last_slot) |-> (m_busy == '0));
endmodule
