// tinycnn_checker: stimulus and golden model for end-to-end tests of tinycnn_top.
//
// Drives reset, sends NIMG images (row by row, as fast as the accelerator takes
// them) and collects the ten scores of each. Image 0 holds ordinary pixel
// values (0..255 at 8 fraction bits, i.e. 0..1); the later ones hold values of
// 64 to 128, near the top of the 16-bit range, which drive layers into saturation. The expected scores are computed
// here from the network's definition with plain integer arithmetic: 3x3 "same"
// convolutions summed over input maps plus bias, ReLU, 2x2 max pooling,
// rounding right shift by 12 with clamping to 16 bits, then the two dense layers
// (input index (map*2 + row)*2 + column) with ReLU and the same rescaling. The
// weights are those the ROMs are defined to hold (tinycnn_pkg::synth_weight).
// Every score must match bit for bit.
// It also counts how often each mechanism of the design happened: input stalls
// (the first layer busy feeding), layers working on different images at once
// (a new image entering before the previous result, and two layers feeding in
// the same cycle),
// ReLU clipping, saturation, and (shared mode) contention for the convolution
// unit; one that never happened counts as a failure. Finally the first image's
// latency is held against the cycle counts of the units it passes through.
module tinycnn_checker
  import tinycnn_pkg::*;
#(
  parameter int unsigned NIMG         = 2,
  parameter bit          EXPECT_SHARE = 1'b0
) (
  input  logic         clk,
  output logic         rst_n,
  output logic         img_valid,
  input  logic         img_ready,
  output data_t [31:0] img_line,
  input  logic         res_valid,
  output logic         res_ready,
  input  data_t [9:0]  res_scores,
  input  logic         relu_clipped,
  input  logic         saturated,
  input  logic         conv_contention,
  input  logic [3:0]   layer_feeding
);

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- golden model ----------------
  localparam int LW [4] = '{32, 16, 8, 4};
  localparam int LC [4] = '{1, 32, 64, 128};
  localparam int LO [4] = '{32, 64, 128, 128};
  localparam int LAMP [4] = '{2048, 400, 300, 200};
  localparam int BAMP = 262144;

  int img [NIMG][32][32];
  int expect_scores [NIMG][10];

  function automatic int rq(longint x);   // round-half-up >> 12, clamp to 16 bits
    longint r;
    r = (x + 2048) >>> 12;
    if (r > 32767) r = 32767;
    if (r < -32768) r = -32768;
    return int'(r);
  endfunction

  int fa [128][32][32];
  int fb [128][32][32];
  longint accm [32][32];

  task automatic golden(input int n);
    int x1 [512];
    int h1 [100];
    for (int r = 0; r < 32; r++) for (int x = 0; x < 32; x++) fa[0][r][x] = img[n][r][x];
    for (int k = 0; k < 4; k++) begin
      int w, c_n, o_n;
      w = LW[k]; c_n = LC[k]; o_n = LO[k];
      for (int o = 0; o < o_n; o++) begin
        int wt [9];
        for (int r = 0; r < w; r++) for (int x = 0; x < w; x++)
          accm[r][x] = longint'(synth_weight(10 * k + 2, o, BAMP));
        for (int c = 0; c < c_n; c++) begin
          for (int t = 0; t < 9; t++) wt[t] = synth_weight(10 * k + 1, (o * c_n + c) * 9 + t, LAMP[k]);
          for (int r = 0; r < w; r++) for (int x = 0; x < w; x++)
            for (int ky = 0; ky < 3; ky++) for (int kx = 0; kx < 3; kx++) begin
              int rr, xx;
              rr = r + ky - 1; xx = x + kx - 1;
              if (rr >= 0 && rr < w && xx >= 0 && xx < w)
                accm[r][x] += longint'(wt[ky*3+kx]) * longint'(fa[c][rr][xx]);
            end
        end
        for (int r = 0; r < w / 2; r++) for (int x = 0; x < w / 2; x++) begin
          longint m;
          m = 0;  // ReLU folded in: the max of non-negative values
          for (int dy = 0; dy < 2; dy++) for (int dx = 0; dx < 2; dx++)
            if (accm[2*r+dy][2*x+dx] > m) m = accm[2*r+dy][2*x+dx];
          fb[o][r][x] = rq(m);
        end
      end
      for (int o = 0; o < o_n; o++) for (int r = 0; r < w / 2; r++) for (int x = 0; x < w / 2; x++)
        fa[o][r][x] = fb[o][r][x];
    end
    for (int o = 0; o < 128; o++) for (int r = 0; r < 2; r++) for (int x = 0; x < 2; x++)
      x1[(o * 2 + r) * 2 + x] = fa[o][r][x];
    for (int j = 0; j < 100; j++) begin
      longint a;
      a = longint'(synth_weight(52, j, BAMP));
      for (int i = 0; i < 512; i++)
        a += longint'(synth_weight(51, ((j / 10) * 512 + i) * 10 + j % 10, 300)) * longint'(x1[i]);
      h1[j] = rq(a < 0 ? 0 : a);
    end
    for (int j = 0; j < 10; j++) begin
      longint a;
      a = longint'(synth_weight(62, j, BAMP));
      for (int i = 0; i < 100; i++)
        a += longint'(synth_weight(61, i * 10 + j, 700)) * longint'(h1[i]);
      expect_scores[n][j] = rq(a < 0 ? 0 : a);
    end
  endtask

  // ---------------- mechanism counters ----------------
  int n_stall = 0, n_clip = 0, n_sat = 0, n_cont = 0, n_overlap = 0, n_allfeed = 0;
  int rows_in = 0, res_got = 0;
  longint cyc = 0;
  longint t_first_row [NIMG];
  longint t_result [NIMG];

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (img_valid && !img_ready) n_stall++;
    if (relu_clipped) n_clip++;
    if (saturated) n_sat++;
    if (conv_contention) n_cont++;
    if ($countones(layer_feeding) >= 2) n_allfeed++;
    // a new image enters while an earlier one is still inside
    if (img_valid && img_ready && rows_in % 32 == 0 && rows_in / 32 > res_got) n_overlap++;
    if (img_valid && img_ready) begin
      if (rows_in % 32 == 0) t_first_row[rows_in / 32] = cyc;
      rows_in++;
    end
    if (res_valid && res_ready) begin
      t_result[res_got] = cyc;
      for (int j = 0; j < 10; j++) begin
        checks++;
        if (int'(res_scores[j]) != expect_scores[res_got][j]) begin
          failures++;
          $display("image %0d score %0d: got %0d want %0d", res_got, j, res_scores[j],
                   expect_scores[res_got][j]);
        end
      end
      $display("image %0d scores done after %0d cycles", res_got,
               t_result[res_got] - t_first_row[res_got]);
      res_got++;
    end
  end

  // ---------------- stimulus ----------------
  initial begin
    rst_n = 0; img_valid = 0; img_line = '0; res_ready = 1;
    for (int n = 0; n < NIMG; n++) begin
      for (int r = 0; r < 32; r++) for (int x = 0; x < 32; x++)
        img[n][r][x] = (n == 0) ? int'($urandom % 256) : 16384 + int'($urandom % 16384);
      golden(n);
    end
    repeat (4) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < NIMG; n++)
      for (int r = 0; r < 32; r++) begin
        @(negedge clk);
        img_valid = 1;
        for (int x = 0; x < 32; x++) img_line[x] = data_t'(img[n][r][x]);
        do @(posedge clk); while (!img_ready);
        #1 img_valid = 0;
      end
    wait (res_got == NIMG);
    repeat (10) @(posedge clk);
    $display("cycles with two or more layers feeding: %0d", n_allfeed);
    $display("mechanisms: input stalls %0d, image overlap %0d, relu clips %0d, saturations %0d, contention %0d",
             n_stall, n_overlap, n_clip, n_sat, n_cont);
    check(n_stall > 0, "input stall happened");
    check(n_overlap > 0, "two images in flight");
    check(n_allfeed > 0, "two layers feeding different images at once");
    check(n_clip > 0, "ReLU clipping happened");
    check(n_sat > 0, "saturation happened");
    if (EXPECT_SHARE) check(n_cont > 0, "contention for the shared unit happened");
    else              check(n_cont == 0, "no contention in exclusive mode");
    check(res_got == NIMG, "all results");
    // Latency of the first image against the sum of the units' own cycle counts:
    // a conv request costs 9*ceil(W/LANES)+1 cycles (LANES = W by default, also
    // for the 32-lane shared unit), a dense group IN_N + 4.
    begin
      longint busy, lat;
      busy = 0;
      for (int k = 0; k < 4; k++) busy += longint'(LO[k]) * LW[k] * LC[k] * 10;
      busy += 10 * (512 + 4) + (100 + 4);
      lat = t_result[0] - t_first_row[0];
      $display("image 0 latency %0d cycles, units busy %0d cycles", lat, busy);
      check(lat >= busy, "latency not below the units' busy time");
      if (!EXPECT_SHARE) check(lat <= busy + busy / 100, "exclusive-mode latency within 1% of the busy time");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
