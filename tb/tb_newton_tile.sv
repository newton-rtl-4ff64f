// tb_newton_tile: end-to-end run of a full-size tile (16 IMAs, 16 KB buffer).
//
// Weights are programmed into five jobs' worth of IMAs, inputs are sent over
// the network port into the buffer, and four commands run concurrently:
//   IMA 0  STD mode, results written back into the local buffer
//   IMA 1  KARATSUBA mode
//   IMA 2  STD mode with large operands (saturation through the ADC test)
//   IMAs 8-14  a Strassen group (P0..P6), results Y00..Y11 from the adders
// A fifth command to the busy IMA 0 must stall. The output stream is
// throttled at random and network writes keep arriving during the local
// write-back, so the buffer-port arbitration is exercised. Every streamed
// value, and the locally written copies read back through a later IMA run,
// are compared with reference models written independently of the RTL.
// Mechanism counters are printed; any mechanism that never occurred counts
// as a failure.
module tb_newton_tile;
  import newton_pkg::*;
  localparam int NI = 16, R = 128, C = 128, XPM = 2, NN = C * XPM, SLOT = ADC_BITS + 2;
  int checks = 0, failures = 0;
  int cnt_cmd_stall = 0, cnt_in_stall = 0, cnt_out_stall = 0, cnt_sat = 0, cnt_kara = 0,
      cnt_strassen = 0, cnt_local = 0, cnt_concurrent = 0;

  logic clk = 0, rst_n = 0;
  logic pw_en = 0; logic [3:0] pw_ima; logic [2:0] pw_mat; logic [0:0] pw_xbar; logic [6:0] pw_col;
  logic [C-1:0][1:0] pw_cells;
  logic in_valid = 0, in_ready; logic [12:0] in_addr; logic [15:0] in_data;
  logic cmd_valid = 0, cmd_ready, cmd_strassen = 0; logic [3:0] cmd_ima; ima_mode_e cmd_mode;
  logic [12:0] cmd_in_addr, cmd_out_addr; logic cmd_local = 0;
  logic out_valid, out_ready; logic [12:0] out_addr; logic signed [18:0] out_data;
  logic [NI-1:0] ima_busy;

  always #5 clk = ~clk;
  newton_tile dut (.*);

  logic [15:0] W [NI][NN][R];
  logic [15:0] X [NI][R];
  logic        kara_ima [NI];
  logic [15:0] bufref [8192];
  int          expect_val [8192];
  bit          expect_set [8192];

  // ---------------- reference models
  function automatic logic [15:0] ref_std(int j, int n);
    longint acc; bit sat;
    acc = 0; sat = 0;
    for (int i = 0; i < 16; i++)
      for (int s = 0; s < 8; s++) begin
        int v, base, lo, top;
        v = 0;
        for (int r = 0; r < R; r++) if (X[j][r][i]) v += int'(W[j][n][r][2*s +: 2]);
        base = 2*s + i;
        lo  = (10 - base > 0) ? 10 - base : 0;
        top = (26 - base < 9) ? ((26 - base > 0) ? 26 - base : 0) : 9;
        if (top < 9 && v >= (1 << top)) sat = 1;
        else for (int b = lo; b < top; b++) if (v & (1 << b)) acc += longint'(1) << (base + b);
      end
    if (sat || (acc >> 26) != 0) return 16'hFFFF;
    return 16'(acc >> 10);
  endfunction

  function automatic logic [15:0] ref_exact(int j, int n);
    longint acc;
    acc = 0;
    for (int r = 0; r < R; r++) acc += longint'(W[j][n][r]) * longint'(X[j][r]);
    if ((acc >> 26) != 0) return 16'hFFFF;
    return 16'(acc >> 10);
  endfunction

  // ---------------- drivers
  task automatic program_ima(int j);
    for (int m = 0; m < 8; m++)
      for (int x = 0; x < XPM; x++)
        for (int c = 0; c < C; c++) begin
          for (int r = 0; r < R; r++) begin
            if (!kara_ima[j]) pw_cells[r] = W[j][x*C + c][r][2*m +: 2];
            else begin
              logic [9:0] ws;
              ws = 10'(W[j][c][r][7:0]) + 10'(W[j][c][r][15:8]);
              if (x == 0) pw_cells[r] = (m < 4) ? W[j][c][r][2*m +: 2] : W[j][c][r][8 + 2*(m-4) +: 2];
              else        pw_cells[r] = (m < 5) ? ws[2*m +: 2] : 2'b00;
            end
          end
          pw_ima = 4'(j); pw_mat = 3'(m); pw_xbar = 1'(x); pw_col = 7'(c); pw_en = 1;
          @(posedge clk); #1;
        end
    pw_en = 0;
  endtask

  task automatic net_write(int a, logic [15:0] d);
    in_valid = 1; in_addr = 13'(a); in_data = d;
    @(posedge clk);
    while (!in_ready) begin cnt_in_stall++; @(posedge clk); end
    #1 in_valid = 0;
    bufref[a] = d;
  endtask

  task automatic command(bit str, int j, ima_mode_e md, int ia, int oa, bit lcl);
    cmd_valid = 1; cmd_strassen = str; cmd_ima = 4'(j); cmd_mode = md;
    cmd_in_addr = 13'(ia); cmd_out_addr = 13'(oa); cmd_local = lcl;
    @(posedge clk);
    while (!cmd_ready) begin cnt_cmd_stall++; @(posedge clk); end
    #1 cmd_valid = 0;
  endtask

  // ---------------- output monitor
  int received = 0;
  always @(posedge clk) begin
    if (out_valid && !out_ready) cnt_out_stall++;
    if (out_valid && out_ready) begin
      received++;
      checks++;
      if (!expect_set[out_addr]) begin
        failures++; $display("FAIL unexpected output address %0d", out_addr);
      end else if (int'(out_data) != expect_val[out_addr]) begin
        failures++;
        if (failures < 10) $display("FAIL addr %0d got %0d exp %0d", out_addr, out_data, expect_val[out_addr]);
      end
      if (out_data == 19'sh0FFFF) cnt_sat++;
      expect_set[out_addr] = 0;
    end
  end
  always @(negedge clk) out_ready <= ($urandom_range(3) != 0);

  int n_expected = 0;
  task automatic expect_out(int a, int v);
    expect_val[a] = v; expect_set[a] = 1; n_expected++;
  endtask

  int sx [4][R];   // Strassen X blocks (X00, X01, X10, X11)
  int sw [4][NN][R];

  initial begin
    for (int j = 0; j < NI; j++) kara_ima[j] = 0;
    kara_ima[1] = 1;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;

    // ---- job data
    for (int n = 0; n < NN; n++) for (int r = 0; r < R; r++) begin
      W[0][n][r] = 16'($urandom_range(255));
      W[1][n][r] = 16'($urandom_range(65535));
      W[2][n][r] = 16'($urandom_range(65535));
      W[3][n][r] = 16'($urandom_range(3));
    end
    for (int r = 0; r < R; r++) begin
      X[0][r] = 16'($urandom_range(1023));
      X[1][r] = 16'($urandom_range(2047));
      X[2][r] = 16'($urandom_range(65535));
    end
    // Strassen blocks chosen so that every combination is non-negative
    for (int r = 0; r < R; r++) begin
      sx[0][r] = $urandom_range(300); sx[3][r] = $urandom_range(300);
      sx[1][r] = sx[3][r] + $urandom_range(300); sx[2][r] = sx[0][r] + $urandom_range(300);
    end
    for (int n = 0; n < NN; n++) for (int r = 0; r < R; r++) begin
      sw[1][n][r] = $urandom_range(60); sw[3][n][r] = $urandom_range(60);
      sw[0][n][r] = sw[3][n][r] + $urandom_range(60);  // W00 >= W10 needs W10 small
      sw[2][n][r] = $urandom_range(sw[0][n][r]);
      if (sw[1][n][r] < sw[3][n][r]) sw[1][n][r] = sw[3][n][r];
    end
    for (int k = 0; k < 7; k++) for (int n = 0; n < NN; n++) for (int r = 0; r < R; r++) begin
      int wc;
      case (k)
        0: wc = sw[0][n][r];                 1: wc = sw[0][n][r] + sw[1][n][r];
        2: wc = sw[2][n][r] + sw[3][n][r];   3: wc = sw[3][n][r];
        4: wc = sw[0][n][r] + sw[3][n][r];   5: wc = sw[1][n][r] - sw[3][n][r];
        default: wc = sw[0][n][r] - sw[2][n][r];
      endcase
      W[8+k][n][r] = 16'(wc);
    end
    for (int r = 0; r < R; r++) begin
      X[8][r]  = 16'(sx[1][r] - sx[3][r]);  X[9][r]  = 16'(sx[3][r]);
      X[10][r] = 16'(sx[0][r]);             X[11][r] = 16'(sx[2][r] - sx[0][r]);
      X[12][r] = 16'(sx[0][r] + sx[3][r]);  X[13][r] = 16'(sx[2][r] + sx[3][r]);
      X[14][r] = 16'(sx[0][r] + sx[1][r]);
    end
    foreach (expect_set[a]) expect_set[a] = 0;

    // ---- programming and input delivery
    foreach (kara_ima[j]) if (j <= 3 || (j >= 8 && j <= 14)) program_ima(j);
    for (int r = 0; r < R; r++) begin
      net_write(r, X[0][r]); net_write(128 + r, X[1][r]); net_write(256 + r, X[2][r]);
      for (int k = 0; k < 7; k++) net_write(1024 + 128*k + r, X[8+k][r]);
    end

    // ---- expected results
    for (int n = 0; n < NN; n++) begin
      expect_out(4096 + n, int'(ref_std(0, n)));
      expect_out(5120 + n, int'(ref_std(2, n)));
    end
    for (int n = 0; n < C; n++) expect_out(4608 + n, int'(ref_exact(1, n)));
    begin
      int p [7];
      for (int n = 0; n < NN; n++) begin
        for (int k = 0; k < 7; k++) p[k] = int'(ref_std(8 + k, n));
        expect_out(6144 + n,          p[4] + p[3] - p[1] + p[5]);
        expect_out(6144 + NN + n,     p[0] + p[1]);
        expect_out(6144 + 2*NN + n,   p[2] + p[3]);
        expect_out(6144 + 3*NN + n,   p[0] + p[4] - p[2] - p[6]);
      end
    end

    // ---- run: four jobs overlap, then a stalled command to busy IMA 0
    command(0, 0, MODE_STD, 0, 4096, 1);
    command(0, 1, MODE_KARATSUBA, 128, 4608, 0); cnt_kara++;
    command(0, 2, MODE_STD, 256, 5120, 0);
    command(1, 8, MODE_STD, 1024, 6144, 0); cnt_strassen++;
    repeat (1500) @(posedge clk);
    if ($countones(ima_busy) >= 10) cnt_concurrent++;   // 3 single jobs + 7 Strassen IMAs
    // keep the network writing while results come back (arbitration), and
    // re-issue a job to IMA 0, which must wait until IMA 0 is free again
    for (int n = 0; n < NN; n++) expect_out(7680 + n, int'(ref_std(0, n)));
    fork
      begin
        wait (!expect_set[4096]);   // IMA 0 has begun its local write-back
        for (int t = 0; t < 2000; t++) net_write(7000 + (t % 600), 16'(t));
      end
      command(0, 0, MODE_STD, 0, 7680, 0);
    join
    // a job on IMA 3 reads the results IMA 0 wrote into the local buffer
    for (int n = 0; n < NN; n++) wait (!expect_set[4096 + n]);
    for (int r = 0; r < R; r++) X[3][r] = ref_std(0, r);
    for (int n = 0; n < NN; n++) expect_out(4352 + n, int'(ref_std(3, n)));
    command(0, 3, MODE_STD, 4096, 4352, 0);
    cnt_local++;
    wait (received >= n_expected);
    repeat (10) @(posedge clk);

    checks++;
    if (received != n_expected) begin failures++; $display("FAIL received %0d of %0d", received, n_expected); end
    $display("mechanisms: cmd_stall=%0d in_stall=%0d out_stall=%0d saturated=%0d karatsuba=%0d strassen=%0d local_wb=%0d concurrent=%0d",
             cnt_cmd_stall, cnt_in_stall, cnt_out_stall, cnt_sat, cnt_kara, cnt_strassen, cnt_local, cnt_concurrent);
    checks++;
    if (cnt_cmd_stall == 0 || cnt_in_stall == 0 || cnt_out_stall == 0 || cnt_sat == 0 ||
        cnt_kara == 0 || cnt_strassen == 0 || cnt_local == 0 || cnt_concurrent == 0) begin
      failures++; $display("FAIL a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("TIMEOUT received %0d of %0d", received, n_expected);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
