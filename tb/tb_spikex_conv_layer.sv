// tb_spikex_conv_layer: convolution layers of the evaluated networks run on
// the accelerator at its default sizes.
//
// For each layer a random, bursty input spike tensor (channels x height x
// width x timesteps) and random 8-bit kernels are generated. The test then
// acts as the host: it cuts the layer into tiles of up to eight output
// channels (one per PE row), a run of output positions and a slice of time
// windows, writes each tile's im2col spike words (input k = c*E*E + ky*E + kx,
// input channel c, zero padding outside the image) and weights through the
// external port, loads, runs and stores it, and reads the output spikes back.
// Time slices of the same positions and channels follow each other with
// `run_cont`, so a long time stride is split over several runs. Tile sizes
// are the largest the local buffers take: K*npos*ntw_tile <= 1024 words of
// spikes and 8*npos*ntw_tile <= 1024 words of output.
// Every output spike is compared with a reference leaky integrate-and-fire
// convolution computed time point by time point over the whole stride.
// Layer shapes (input size, kernel, channels, output size, timesteps) are the
// published ones; strides and padding are inferred from the input and output
// sizes. Each layer is run for all or for a slice of its output positions,
// as the simulation time allows; the slice is printed.
module tb_spikex_conv_layer;
  import spikex_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cfg_t cfg;
  logic ext_valid = 0, ext_ready; logic [1:0] ext_op; pos_t ext_pos; ic_t ext_ic; k_t ext_k;
  tw_t ext_tw; logic [$clog2(ROWS)-1:0] ext_row; logic [15:0] ext_wdata;
  logic ext_rvalid; logic [15:0] ext_rdata;
  logic cmd_load = 0, cmd_store = 0, load_bank = 0, cmd_run = 0, run_bank = 0, run_cont = 0, ext_bank = 0;
  logic mc_busy, mc_done, gc_busy, gc_done;
  dispatch_mode_e mode;
  logic [31:0] n_groups, n_beats, stall_cycles, n_updates, w_words_fetched, ifm_words_fetched;
  logic [$clog2(NIC_MAX+1)-1:0] chans_tailored;
  logic [$clog2(NPOS_MAX*NTW_MAX+1)-1:0] active_ntwus;

  spikex_top dut (.*);

  int checks = 0, failures = 0;
  initial begin
    #400000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  localparam int CMAX = 12, HMAX = 68, TMAX = 300, MMAX = 32, EMAX = 5, RMAX = 32;
  bit  IN [CMAX][HMAX][HMAX][TMAX];             // input spikes
  int  WK [MMAX][CMAX][EMAX][EMAX];             // kernels
  int  OUTSPK [MMAX][RMAX][RMAX][TMAX / 2];     // expected output words per window

  task automatic ext(input logic [1:0] op, input int p, input int ic, input int k, input int tw,
                     input int row, input logic [15:0] d);
    @(negedge clk);
    while (!ext_ready) @(negedge clk);
    ext_valid = 1; ext_op = op; ext_pos = pos_t'(p); ext_ic = ic_t'(ic); ext_k = k_t'(k);
    ext_tw = tw_t'(tw); ext_row = ($clog2(ROWS))'(row); ext_wdata = d;
    @(negedge clk);
    ext_valid = 0;
  endtask

  task automatic wait_pulse(input bit which_gc);
    int n; n = 0;
    while (!(which_gc ? gc_done : mc_done) && n < 4000000) begin @(negedge clk); n++; end
    if (n >= 4000000) begin failures++; $display("command never finished"); end
  endtask

  function automatic int lk(int u, int s);
    return (s == 0) ? u : u - (u >>> s);
  endfunction

  int n_tiles = 0, n_cont = 0, n_temporal = 0, n_spatial = 0, n_tailored = 0;

  // One layer: H input size, C channels, E kernel, S stride, PD padding, R output
  // size, M output channels, T timesteps, TWS window size; rows y0..y1 of outputs.
  task automatic run_layer(input string name, input int H, input int C, input int E, input int S,
                           input int PD, input int R, input int M, input int T, input int TWS,
                           input int y0, input int y1, input int vth, input int ls);
    int K, NTW, ntt, npos, npos_max, nout, out_spikes, quiet_c;
    int plist_y [RMAX*RMAX]; int plist_x [RMAX*RMAX];
    K = C * E * E; NTW = (T + TWS - 1) / TWS;
    if (M > MMAX || C > CMAX || H > HMAX || T > TMAX || R > RMAX || E > EMAX) begin
      failures++; $display("%s: layer larger than the test arrays", name); return;
    end
    // bursty input; one channel stays silent in every other layer
    quiet_c = (C > 2) ? C - 1 : -1;
    for (int c = 0; c < C; c++) for (int y = 0; y < H; y++) for (int x = 0; x < H; x++) begin
      int burst; burst = 0;
      for (int t = 0; t < T; t++) begin
        if (burst == 0 && $urandom_range(0, 99) < 3) burst = $urandom_range(1, 6);
        IN[c][y][x][t] = (c != quiet_c) && burst > 0 && ($urandom_range(0, 99) < 60);
        if (burst > 0) burst--;
      end
    end
    for (int m = 0; m < M; m++) for (int c = 0; c < C; c++)
      for (int a = 0; a < E; a++) for (int b = 0; b < E; b++) WK[m][c][a][b] = int'($urandom_range(0, 60)) - 15;
    // reference
    out_spikes = 0;
    for (int m = 0; m < M; m++) for (int oy = y0; oy <= y1; oy++) for (int ox = 0; ox < R; ox++) begin
      int u; u = 0;
      for (int w = 0; w < NTW; w++) begin
        OUTSPK[m][oy][ox][w] = 0;
        for (int i = 0; i < TWS; i++) begin
          int t, cur, v;
          t = w * TWS + i; cur = 0;
          if (t < T) begin
            for (int c = 0; c < C; c++) for (int a = 0; a < E; a++) for (int b = 0; b < E; b++) begin
              int iy, ix;
              iy = oy * S - PD + a; ix = ox * S - PD + b;
              if (iy >= 0 && iy < H && ix >= 0 && ix < H && IN[c][iy][ix][t]) cur += WK[m][c][a][b];
            end
            v = lk(u, ls) + cur;
            if (v >= vth) begin OUTSPK[m][oy][ox][w] |= (1 << i); u = 0; out_spikes++; end else u = v;
          end
        end
      end
    end
    checks++;
    if (out_spikes == 0) begin failures++; $display("%s: the reference produced no spikes", name); end
    // tile sizes
    ntt = NTW;
    if (ntt > 1024 / K) ntt = 1024 / K;
    if (ntt > 1024 / ROWS) ntt = 1024 / ROWS;
    if (ntt > int'(NTW_MAX)) ntt = NTW_MAX;
    npos_max = 1024 / (K * ntt);
    if (npos_max > 1024 / (ROWS * ntt)) npos_max = 1024 / (ROWS * ntt);
    if (npos_max > int'(NPOS_MAX)) npos_max = NPOS_MAX;
    nout = 0;
    for (int oy = y0; oy <= y1; oy++) for (int ox = 0; ox < R; ox++) begin
      plist_y[nout] = oy; plist_x[nout] = ox; nout++;
    end
    $display("%s: K=%0d windows=%0d, tiles of %0d positions x 8 channels x %0d windows, output rows %0d..%0d of %0d",
             name, K, NTW, npos_max, ntt, y0, y1, R - 1);
    for (int mg = 0; mg < M; mg += ROWS)
    for (int p0 = 0; p0 < nout; p0 += npos_max) begin
      npos = (nout - p0 < npos_max) ? nout - p0 : npos_max;
      for (int w0 = 0; w0 < NTW; w0 += ntt) begin
        int ntw_t, tp;
        bit bank;
        ntw_t = (NTW - w0 < ntt) ? NTW - w0 : ntt;
        bank = n_tiles[0];
        @(negedge clk);
        cfg.tws = tws_t'(TWS); cfg.ntw = ntw_t[$bits(cfg.ntw)-1:0]; cfg.npos = npos[$bits(cfg.npos)-1:0];
        cfg.nic = C[$bits(cfg.nic)-1:0]; cfg.kpc = ($bits(cfg.kpc))'(E * E);
        cfg.vth = vmem_t'(vth); cfg.leak_shift = 4'(ls);
        ext_bank = bank; run_bank = bank;
        ext(2'd3, 0, 0, 0, 0, 0, 0);
        for (int p = 0; p < npos; p++) for (int c = 0; c < C; c++)
        for (int a = 0; a < E; a++) for (int b = 0; b < E; b++) begin
          int iy, ix, k;
          iy = plist_y[p0+p] * S - PD + a; ix = plist_x[p0+p] * S - PD + b; k = (c * E + a) * E + b;
          for (int w = 0; w < ntw_t; w++) begin
            twword_t word; word = '0;
            for (int i = 0; i < TWS; i++) begin
              tp = (w0 + w) * TWS + i;
              if (tp < T && iy >= 0 && iy < H && ix >= 0 && ix < H) word[i] = IN[c][iy][ix][tp];
            end
            ext(2'd0, p, c, k, w, 0, word);
          end
        end
        for (int c = 0; c < C; c++) for (int a = 0; a < E; a++) for (int b = 0; b < E; b++)
          for (int j = 0; j < ROWS / 2; j++) begin
            int lo, hi;
            lo = (mg + 2*j < M) ? WK[mg+2*j][c][a][b] : 0;
            hi = (mg + 2*j + 1 < M) ? WK[mg+2*j+1][c][a][b] : 0;
            ext(2'd1, 0, 0, (c * E + a) * E + b, 0, 2 * j, {8'(hi), 8'(lo)});
          end
        @(negedge clk); load_bank = bank; cmd_load = 1; @(negedge clk); cmd_load = 0;
        wait_pulse(0);
        if (chans_tailored != 0) n_tailored++;
        @(negedge clk); run_bank = bank; run_cont = (w0 > 0); cmd_run = 1; @(negedge clk); cmd_run = 0;
        wait_pulse(1);
        if (w0 > 0) n_cont++;
        if (mode == MODE_TEMPORAL) n_temporal++; else n_spatial++;
        @(negedge clk); load_bank = bank; cmd_store = 1; @(negedge clk); cmd_store = 0;
        wait_pulse(0);
        for (int r = 0; r < ROWS && mg + r < M; r++) for (int p = 0; p < npos; p++)
        for (int w = 0; w < ntw_t; w++) begin
          int expv;
          @(negedge clk);
          while (!ext_ready) @(negedge clk);
          ext_valid = 1; ext_op = 2'd2; ext_pos = pos_t'(p); ext_tw = tw_t'(w); ext_row = ($clog2(ROWS))'(r);
          @(negedge clk); ext_valid = 0;
          expv = OUTSPK[mg+r][plist_y[p0+p]][plist_x[p0+p]][w0+w];
          checks++;
          if (!ext_rvalid || int'(ext_rdata) != expv) begin
            failures++;
            if (failures < 20) $display("%s: out(m%0d, y%0d, x%0d, window %0d) = %h exp %h", name,
                                        mg + r, plist_y[p0+p], plist_x[p0+p], w0 + w, ext_rdata, expv);
          end
        end
        n_tiles++;
      end
    end
    $display("%s: done, %0d output spikes, %0d tiles so far", name, out_spikes, n_tiles);
  endtask

  initial begin
    cfg = '0; ext_op = 0; ext_pos = 0; ext_ic = 0; ext_k = 0; ext_tw = 0; ext_row = 0; ext_wdata = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    //        name                      H   C   E  S  PD R   M   T    TWS rows    vth  leak
    run_layer("N-MNIST CONV1, TWS 10",  34, 2,  3, 2, 0, 16, 12, 30,  10, 0, 15, 40,  2);
    run_layer("N-MNIST CONV1, TWS 2",   34, 2,  3, 2, 0, 16, 12, 30,  2,  0, 15, 40,  2);
    run_layer("N-MNIST CONV2, TWS 10",  16, 12, 3, 1, 0, 14, 16, 30,  10, 0, 2,  150, 2);
    run_layer("N-MNIST CONV2, TWS 5",   16, 12, 3, 1, 0, 14, 16, 30,  5,  6, 6,  150, 2);
    run_layer("DVS-Gesture medium CONV1, TWS 10", 64, 2, 5, 2, 2, 32, 8, 300, 10, 5, 6, 80, 3);
    run_layer("DVS-Gesture medium CONV1, TWS 3",  64, 2, 5, 2, 2, 32, 8, 300, 3,  9, 9, 80, 3);
    run_layer("DVS-Gesture large CONV1, TWS 10",  32, 2, 3, 2, 1, 16, 32, 300, 10, 4, 4, 40, 2);
    checks++; if (n_cont == 0) begin failures++; $display("no time tile continued a stride"); end
    checks++; if (n_tailored == 0) begin failures++; $display("no channel was tailored"); end
    $display("tiles=%0d continued=%0d temporal=%0d spatial=%0d tailored=%0d",
             n_tiles, n_cont, n_temporal, n_spatial, n_tailored);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
