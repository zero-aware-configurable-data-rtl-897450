// tb_zc_image_workload: runs an 8-bit grayscale image through the full
// channel (8 chips, 64-entry tables) once exactly and once at each similarity
// limit (90, 80, 75, 70 % alike, no truncation or tolerance), then at 80 %
// with 16-bit truncation in 8-bit chunks and with 16-bit tolerance.
// The image is generated here: smooth gradients and texture with a little
// noise, stored row-major, 64 pixels per cache line; on the bus byte b of the
// line travels on chip b % 8 in beat b / 8, so each chip's 64-bit word holds
// 8 pixels eight apart. For every run it checks each rebuilt word against the
// reference model, and prints the ones driven on the pins (data + DBI +
// index lines) and the PSNR of the rebuilt image. It also checks that the
// exact run is lossless and that the ones driven fall as the limit loosens.
module tb_zc_image_workload;
  import zc_pkg::*;
  import tb_zc_ref_pkg::*;
  localparam int CH = 8;
  localparam int IMG_W = 128, IMG_H = 96;
  localparam int NLINES = IMG_W * IMG_H / 64;

  logic clk = 0, rst_n = 0;
  logic line_valid, line_ready, out_valid;
  logic [CH-1:0][63:0] line_data, out_data;
  zc_cfg_t cfg;
  zc_beat_t [CH-1:0] tx;
  kind_e [CH-1:0] tx_kind, rx_kind;
  int checks = 0, failures = 0;

  zc_channel dut (
    .clk_i(clk), .rst_ni(rst_n),
    .line_valid_i(line_valid), .line_ready_o(line_ready), .line_data_i(line_data), .cfg_i(cfg),
    .tx_beat_o(tx), .rx_beat_i(tx),
    .out_valid_o(out_valid), .out_data_o(out_data), .tx_kind_o(tx_kind), .rx_kind_o(rx_kind)
  );

  always #5 clk = ~clk;

  logic [7:0] img [IMG_H * IMG_W];
  logic [7:0] rec [IMG_H * IMG_W];
  longint ones;
  int got;
  logic [CH-1:0][63:0] exp_q [$];

  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < CH; c++)
      if (tx[c].strobe) ones += $countones(tx[c].dq) + tx[c].dbi + tx[c].idx;
    if (out_valid) begin
      logic [CH-1:0][63:0] e;
      e = exp_q.pop_front();
      checks++;
      if (out_data !== e) begin failures++; $display("FAIL line %0d", got); end
      for (int b = 0; b < 64; b++) rec[got * 64 + b] = out_data[b % 8][(b / 8) * 8 +: 8];
      got++;
    end
  end

  // One pass of the whole image with one setting; returns ones and PSNR.
  task automatic run(zc_cfg_t c, output longint o, output real psnr);
    tb_zc_ref_pkg::zc_ref_coder m [CH];
    zc_enc_word_t ew;
    kind_e k;
    logic [CH-1:0][63:0] dr;
    real mse;
    for (int i = 0; i < CH; i++) m[i] = new(64);
    rst_n = 0; line_valid = 0; ones = 0; got = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    cfg = c;
    for (int l = 0; l < NLINES; l++) begin
      @(negedge clk);
      for (int b = 0; b < 64; b++) line_data[b % 8][(b / 8) * 8 +: 8] = img[l * 64 + b];
      line_valid = 1;
      #1;
      while (!line_ready) begin @(negedge clk); #1; end
      for (int i = 0; i < CH; i++) m[i].encode(c, line_data[i], ew, k, dr[i]);
      exp_q.push_back(dr);
    end
    @(negedge clk);
    line_valid = 0;
    while (got < NLINES) @(negedge clk);
    mse = 0.0;
    for (int i = 0; i < IMG_H * IMG_W; i++) mse += (real'(img[i]) - real'(rec[i])) ** 2;
    mse = mse / (IMG_H * IMG_W);
    psnr = (mse == 0.0) ? 999.0 : 10.0 * $log10(255.0 * 255.0 / mse);
    o = ones;
  endtask

  initial begin
    zc_cfg_t c;
    longint o, o_exact, o_prev;
    longint plain;
    real p;
    int pct [4] = '{90, 80, 75, 70};
    plain = 0;
    for (int y = 0; y < IMG_H; y++)
      for (int x = 0; x < IMG_W; x++) begin
        automatic int v = 40 + x + y / 2 + ((x / 16 + y / 16) % 2) * 24 + int'($urandom % 4);
        img[y * IMG_W + x] = 8'(v);
        plain += $countones(8'(v));
      end
    $display("image %0dx%0d, %0d lines, ones uncoded=%0d", IMG_W, IMG_H, NLINES, plain);
    c = '0;
    run(c, o_exact, p);
    $display("exact (modified BDE + zeros + DBI): ones=%0d psnr=%s", o_exact, p > 998 ? "inf" : $sformatf("%0.1f", p));
    checks++; if (p < 998) begin failures++; $display("FAIL exact run lost data"); end
    o_prev = o_exact;
    for (int s = 0; s < 4; s++) begin
      c = '0; c.approx_en = 1; c.sim_sel = sim_e'(s);
      run(c, o, p);
      $display("limit %0d%%: ones=%0d (%0.1f%% of exact) psnr=%0.1f dB", pct[s],
               o, 100.0 * o / o_exact, p);
      checks++;
      if (o > o_prev) begin failures++; $display("FAIL ones rose as the limit loosened"); end
      o_prev = o;
    end
    c = '0; c.approx_en = 1; c.sim_sel = SIM_80; c.trunc_sel = GRAN_8_2;
    run(c, o, p);
    $display("limit 80%%, truncation 16 (8,2): ones=%0d (%0.1f%% of exact) psnr=%0.1f dB", o, 100.0 * o / o_exact, p);
    c = '0; c.approx_en = 1; c.sim_sel = SIM_80; c.tol_sel = GRAN_8_2;
    run(c, o, p);
    $display("limit 80%%, tolerance 16 (8,2): ones=%0d (%0.1f%% of exact) psnr=%0.1f dB", o, 100.0 * o / o_exact, p);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
