// newton_tile: one Newton tile - eDRAM input buffer, a bus to N_IMA IMAs,
// a tile controller and the tile adders (Strassen post-processing).
//
// Data flow: neuron values arriving from the network (`in_*`) are written
// into the buffer. A command (`cmd_*`) names an IMA, its mode and buffer
// addresses. The loader copies the 128 inputs from the buffer over the tile
// bus into that IMA's input register (one word per cycle, one cycle read
// latency) and starts it; IMAs then run concurrently while the loader serves
// the next command. When an IMA finishes, the write-back engine streams its
// results on `out_*` (valid/ready) with their destination addresses and,
// for a local command, also writes them into this tile's buffer so a next
// layer mapped onto the same tile can use them.
//
// A Strassen command takes seven consecutive IMAs, loads IMA ima+k with the
// 128 words at in_addr + 128k (the prepared X operand of product Pk), runs
// them in STD mode and, when all seven are done, streams the four output
// blocks Y00, Y01, Y10, Y11 (each 128*XPM signed values) formed by the
// strassen_adders; the eighth IMA stays free for other work.
//
// Defaults give the conv tile of the main configuration: 16 IMAs, two
// crossbars per ADC, 16 KB buffer. A classifier tile is the same module with
// XPM = 4 (four crossbars per ADC), BUF_WORDS = 2048 (4 KB) and a longer
// SLOT_CYC (slower ADC).
// From the paper: the IMA count, buffer sizes, ADC sharing, the Strassen
// mapping onto seven IMAs and the tile adders. This design's own: command
// format, handshakes, the loader/write-back engines and local write-back.
// The network router and the pooling/sigmoid units connect to the in/out
// streams and are not part of this module.
module newton_tile
  import newton_pkg::*;
#(
  parameter int unsigned N_IMA     = 16,
  parameter int unsigned XPM       = 2,
  parameter int unsigned SLOT_CYC  = ADC_BITS + 2,
  parameter int unsigned BUF_WORDS = 8192,
  localparam int unsigned IW  = $clog2(N_IMA),
  localparam int unsigned XW  = (XPM > 1) ? $clog2(XPM) : 1,
  localparam int unsigned AW  = $clog2(BUF_WORDS),
  localparam int unsigned NN  = COLS * XPM,
  localparam int unsigned NW  = $clog2(NN),
  localparam int unsigned YW  = OUT_BITS + 3      // signed Strassen output width
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // crossbar programming
  input  logic                           pw_en,
  input  logic [IW-1:0]                  pw_ima,
  input  logic [2:0]                     pw_mat,
  input  logic [XW-1:0]                  pw_xbar,
  input  logic [$clog2(COLS)-1:0]        pw_col,
  input  logic [ROWS-1:0][CELL_BITS-1:0] pw_cells,
  // neuron values from the network into the buffer
  input  logic                           in_valid,
  output logic                           in_ready,
  input  logic [AW-1:0]                  in_addr,
  input  logic [OUT_BITS-1:0]            in_data,
  // commands
  input  logic                           cmd_valid,
  output logic                           cmd_ready,
  input  logic                           cmd_strassen,
  input  logic [IW-1:0]                  cmd_ima,
  input  ima_mode_e                      cmd_mode,
  input  logic [AW-1:0]                  cmd_in_addr,
  input  logic [AW-1:0]                  cmd_out_addr,
  input  logic                           cmd_local,
  // results to the network
  output logic                           out_valid,
  input  logic                           out_ready,
  output logic [AW-1:0]                  out_addr,
  output logic signed [YW-1:0]           out_data,
  // status
  output logic [N_IMA-1:0]               ima_busy
);
  // ------------------------------------------------------------ buffer
  logic          buf_we, buf_re;
  logic [AW-1:0] buf_waddr, buf_raddr;
  logic [OUT_BITS-1:0] buf_wdata, buf_rdata;

  edram_buffer #(.WORDS(BUF_WORDS), .W(OUT_BITS)) u_buf (
    .clk(clk), .we(buf_we), .waddr(buf_waddr), .wdata(buf_wdata),
    .re(buf_re), .raddr(buf_raddr), .rdata(buf_rdata));

  // ------------------------------------------------------------ IMAs
  logic [N_IMA-1:0]    i_in_we, i_start, i_done;
  logic [6:0]          i_in_idx;
  ima_mode_e           i_mode [N_IMA];
  logic [NW-1:0]       i_out_idx;
  logic [OUT_BITS-1:0] i_out [N_IMA];

  for (genvar j = 0; j < int'(N_IMA); j++) begin : g_ima
    logic [31:0] cmps;
    logic [4:0]  its;
    ima #(.XPM(XPM), .SLOT_CYC(SLOT_CYC)) u_ima (
      .clk      (clk),
      .rst_n    (rst_n),
      .wr_en    (pw_en && pw_ima == IW'(j)),
      .wr_mat   (pw_mat),
      .wr_xbar  (pw_xbar),
      .wr_col   (pw_col),
      .wr_cells (pw_cells),
      .in_we    (i_in_we[j]),
      .in_idx   (i_in_idx),
      .in_data  (buf_rdata),
      .start    (i_start[j]),
      .mode     (i_mode[j]),
      .busy     (ima_busy[j]),
      .done     (i_done[j]),
      .out_idx  (i_out_idx),
      .out_data (i_out[j]),
      .adc_cmps (cmps),
      .iters    (its)
    );
  end

  // ------------------------------------------------------------ per-IMA job state
  logic [N_IMA-1:0] pend;       // a job is loaded / running / waiting for write-back
  logic [N_IMA-1:0] fin;        // its IMA has finished
  logic [N_IMA-1:0] lead;       // first IMA of a Strassen group
  logic [N_IMA-1:0] member;     // IMA belongs to a Strassen group
  logic [N_IMA-1:0] loc;        // write results back locally
  logic [AW-1:0]    dst [N_IMA];
  ima_mode_e        md  [N_IMA];

  // ------------------------------------------------------------ loader
  typedef enum logic [1:0] {L_IDLE, L_LOAD, L_START} lstate_e;
  lstate_e        lst;
  logic [IW-1:0]  l_base;
  logic [2:0]     l_cnt;        // IMAs in this job (1 or 7)
  logic [2:0]     l_k;          // IMA being loaded within the job
  logic [7:0]     l_idx;        // next word to read (0..128)
  logic [AW-1:0]  l_addr;
  logic           rd_v;         // read issued last cycle
  logic [6:0]     rd_idx;
  logic [IW-1:0]  rd_ima;
  logic [N_IMA-1:0] need;
  logic           cmd_ok;

  always_comb begin
    need = '0;
    for (int k = 0; k < 7; k++)
      if (k == 0 || cmd_strassen) need[IW'(int'(cmd_ima) + k)] = 1'b1;
    cmd_ok = (cmd_strassen ? (int'(cmd_ima) + 7 <= int'(N_IMA)) : 1'b1)
          && ((need & (pend | ima_busy)) == '0);
  end

  assign cmd_ready = (lst == L_IDLE) && cmd_ok;
  assign buf_re    = (lst == L_LOAD) && (l_idx < 8'd128);
  assign buf_raddr = l_addr;
  assign i_in_idx  = rd_idx;

  always_comb begin
    i_in_we = '0;
    if (rd_v) i_in_we[rd_ima] = 1'b1;
    i_start = '0;
    if (lst == L_START)
      for (int k = 0; k < 7; k++)
        if (k < int'(l_cnt)) i_start[IW'(int'(l_base) + k)] = 1'b1;
    for (int j = 0; j < int'(N_IMA); j++) i_mode[j] = md[j];
  end

  // ------------------------------------------------------------ write-back
  typedef enum logic [1:0] {W_IDLE, W_SEND} wstate_e;
  wstate_e       wst;
  logic [IW-1:0] w_ima;
  logic          w_str;
  logic [1:0]    w_blk;         // Strassen output block
  logic [NW-1:0] w_idx;
  logic [NW-1:0] w_last;
  logic [AW-1:0] w_addr;
  logic          w_pick;
  logic [IW-1:0] w_pick_ima;
  logic [N_IMA-1:0] grp_fin;

  // Strassen group of leader j is complete when all seven members finished.
  always_comb begin
    for (int j = 0; j < int'(N_IMA); j++) begin
      grp_fin[j] = 1'b1;
      for (int k = 0; k < 7; k++)
        if (j + k < int'(N_IMA) && !fin[j + k]) grp_fin[j] = 1'b0;
        else if (j + k >= int'(N_IMA)) grp_fin[j] = 1'b0;
    end
    w_pick = 1'b0;
    w_pick_ima = '0;
    for (int j = int'(N_IMA) - 1; j >= 0; j--)
      if (pend[j] && fin[j] && (!member[j] || (lead[j] && grp_fin[j]))) begin
        w_pick = 1'b1;
        w_pick_ima = IW'(j);
      end
  end

  // Strassen adders on the outputs of the group's seven IMAs
  logic signed [OUT_BITS:0]   sp [7];
  logic signed [OUT_BITS+2:0] y [4];
  logic signed [OUT_BITS:0]   xz;
  logic signed [OUT_BITS+1:0] xc_unused [7];
  always_comb begin
    for (int k = 0; k < 7; k++) sp[k] = $signed({1'b0, i_out[IW'(int'(w_ima) + k)]});
    xz = '0;
  end
  strassen_adders #(.PW(OUT_BITS + 1), .XW(OUT_BITS + 1)) u_adders (
    .p(sp), .y00(y[0]), .y01(y[1]), .y10(y[2]), .y11(y[3]),
    .x00(xz), .x01(xz), .x10(xz), .x11(xz), .xc(xc_unused));

  assign i_out_idx = w_idx;
  assign out_valid = (wst == W_SEND);
  assign out_addr  = w_addr;
  always_comb begin
    if (w_str) out_data = YW'(y[w_blk]);
    else       out_data = $signed({3'b000, i_out[w_ima]});
  end

  // local write-back has priority over the network on the buffer write port
  logic wb_write;
  assign wb_write  = out_valid && out_ready && !w_str && loc[w_ima];
  assign buf_we    = wb_write || (in_valid && in_ready);
  assign buf_waddr = wb_write ? w_addr : in_addr;
  assign buf_wdata = wb_write ? i_out[w_ima] : in_data;
  assign in_ready  = !(out_valid && !w_str && loc[w_ima]);

  // ------------------------------------------------------------ sequential
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lst    <= L_IDLE;
      l_base <= '0; l_cnt <= '0; l_k <= '0; l_idx <= '0; l_addr <= '0;
      rd_v   <= 1'b0; rd_idx <= '0; rd_ima <= '0;
      wst    <= W_IDLE;
      w_ima  <= '0; w_str <= 1'b0; w_blk <= '0; w_idx <= '0; w_last <= '0; w_addr <= '0;
      pend   <= '0; fin <= '0; lead <= '0; member <= '0; loc <= '0;
      for (int j = 0; j < int'(N_IMA); j++) begin
        dst[j] <= '0;
        md[j]  <= MODE_STD;
      end
    end else begin
      fin <= fin | i_done;

      // loader
      rd_v <= buf_re;
      rd_idx <= l_idx[6:0];
      rd_ima <= IW'(int'(l_base) + int'(l_k));
      unique case (lst)
        L_IDLE: if (cmd_valid && cmd_ready) begin
          l_base <= cmd_ima;
          l_cnt  <= cmd_strassen ? 3'd7 : 3'd1;
          l_k    <= '0;
          l_idx  <= '0;
          l_addr <= cmd_in_addr;
          for (int k = 0; k < 7; k++) begin
            if (k == 0 || cmd_strassen) begin
              pend[IW'(int'(cmd_ima) + k)]   <= 1'b1;
              fin[IW'(int'(cmd_ima) + k)]    <= 1'b0;
              member[IW'(int'(cmd_ima) + k)] <= cmd_strassen;
              lead[IW'(int'(cmd_ima) + k)]   <= (k == 0) && cmd_strassen;
              loc[IW'(int'(cmd_ima) + k)]    <= cmd_local && !cmd_strassen;
              md[IW'(int'(cmd_ima) + k)]     <= cmd_strassen ? MODE_STD : cmd_mode;
              dst[IW'(int'(cmd_ima) + k)]    <= cmd_out_addr;
            end
          end
          lst <= L_LOAD;
        end
        L_LOAD: begin
          if (l_idx < 8'd128) begin
            l_idx  <= l_idx + 8'd1;
            l_addr <= l_addr + 1'b1;
          end else if (!rd_v) begin
            // last word of this IMA has been written
            if (l_k + 3'd1 == l_cnt) lst <= L_START;
            else begin
              l_k   <= l_k + 3'd1;
              l_idx <= '0;
            end
          end
        end
        L_START: lst <= L_IDLE;
        default: lst <= L_IDLE;
      endcase

      // write-back
      unique case (wst)
        W_IDLE: if (w_pick) begin
          w_ima  <= w_pick_ima;
          w_str  <= member[w_pick_ima];
          w_blk  <= '0;
          w_idx  <= '0;
          w_addr <= dst[w_pick_ima];
          w_last <= (md[w_pick_ima] == MODE_KARATSUBA) ? NW'(COLS - 1) : NW'(NN - 1);
          wst    <= W_SEND;
        end
        W_SEND: if (out_ready) begin
          w_addr <= w_addr + 1'b1;
          if (w_idx != w_last) w_idx <= w_idx + 1'b1;
          else begin
            w_idx <= '0;
            if (w_str && w_blk != 2'd3) w_blk <= w_blk + 2'd1;
            else begin
              wst <= W_IDLE;
              for (int k = 0; k < 7; k++)
                if (k == 0 || w_str) begin
                  pend[IW'(int'(w_ima) + k)] <= 1'b0;
                  fin[IW'(int'(w_ima) + k)]  <= 1'b0;
                end
            end
          end
        end
        default: wst <= W_IDLE;
      endcase
    end
  end

  // The loader writes an IMA's input register only while that IMA is idle.
  assert property (@(posedge clk) disable iff (!rst_n) rd_v |-> !ima_busy[rd_ima]);
endmodule
