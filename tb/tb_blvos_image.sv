// tb_blvos_image -- image-processing workload of the BL-VOS multiplier:
// 3x3 smoothing and sharpening of an 8-bit grey-scale image with the 8-bit,
// k = 4 multiplier in every structure BL-VOS0..4.
//
// The image (W x H pixels) is generated here: a gradient with a product term
// and pseudo-random texture, standing in for the usual photographic test
// images. Every multiplication of both filters goes through the multiplier
// instances (pixel x kernel coefficient, both 8 bits):
//   smoothing : Gaussian kernel [1 2 1; 2 4 2; 1 2 1] / 16
//   sharpening: centre weight 9, eight neighbours weight -1 (the sign is
//               applied to the unsigned product), result clamped to 0..255.
// Border pixels are copied unchanged. The filtered images are compared pixel
// by pixel with reference images computed here with plain integer
// arithmetic; the level of the approximate region changes every image row
// (accurate, L1..L5 in turn), as a run-time accuracy manager might. With no
// timing errors in RTL every output pixel must match. The kernels and the
// generated image are choices of this testbench. A cycle watchdog ends a hung
// run.
module tb_blvos_image;
  timeunit 1ps; timeprecision 1ps;

  localparam int W = 512;
  localparam int H = 512;

  int checks = 0, failures = 0;

  logic        clk = 1'b0, rst_n = 1'b0;
  logic        in_valid = 1'b0;
  logic [7:0]  in_a = '0, in_b = '0;
  logic        cfg_we = 1'b0;
  logic [2:0]  cfg_level = '0;
  logic [15:0] p  [5];
  logic        ov [5];

  for (genvar s = 0; s < 5; s++) begin : g_struct
    blvos_mult #(.N(8), .K(4), .STRUCTURE(s)) u_mult (
      .clk, .rst_n, .in_valid, .in_a, .in_b, .cfg_we, .cfg_level,
      .cfg_err(), .level(), .approx_mode(), .out_valid(ov[s]), .out_p(p[s]),
      .vdd_apprx_mv(), .rail_fault()
    );
  end

  always #50 clk = ~clk;

  byte unsigned img [H][W];
  int           sm_acc [5][H][W];
  int           sh_acc [5][H][W];

  // tag of each product in flight: pixel, filter (0 smooth, 1 sharpen), sign
  typedef struct { int y; int x; bit sharp; bit neg; } tag_t;
  tag_t tq [$];

  always @(posedge clk) begin
    #1;
    if (ov[0]) begin
      tag_t t;
      t = tq.pop_front();
      for (int s = 0; s < 5; s++) begin
        if (t.sharp) sh_acc[s][t.y][t.x] += t.neg ? -int'(p[s]) : int'(p[s]);
        else         sm_acc[s][t.y][t.x] += int'(p[s]);
      end
    end
  end

  task automatic issue(int y, int x, byte unsigned pix, byte unsigned coef,
                       bit sharp, bit neg);
    tag_t t;
    in_valid = 1'b1;
    in_a = pix;
    in_b = coef;
    t.y = y; t.x = x; t.sharp = sharp; t.neg = neg;
    tq.push_back(t);
    @(negedge clk);
  endtask

  initial begin
    repeat (20 * W * H + 10_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int gk [3][3] = '{'{1, 2, 1}, '{2, 4, 2}, '{1, 2, 1}};
    int n_pix, n_levels_used;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++)
        img[y][x] = 8'((x + 2 * y) / 3 + ((x * y) >> 10) + $urandom_range(0, 15));

    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    n_levels_used = 0;
    for (int y = 1; y < H - 1; y++) begin
      in_valid = 1'b0;
      cfg_we = 1'b1;
      cfg_level = 3'(y % 6);
      @(negedge clk);
      cfg_we = 1'b0;
      if (y <= 6) n_levels_used++;
      for (int x = 1; x < W - 1; x++) begin
        for (int dy = -1; dy <= 1; dy++)
          for (int dx = -1; dx <= 1; dx++) begin
            issue(y, x, img[y + dy][x + dx], 8'(gk[dy + 1][dx + 1]), 1'b0, 1'b0);
            issue(y, x, img[y + dy][x + dx], (dy == 0 && dx == 0) ? 8'd9 : 8'd1,
                  1'b1, !(dy == 0 && dx == 0));
          end
      end
    end
    in_valid = 1'b0;
    repeat (4) @(negedge clk);

    n_pix = 0;
    for (int y = 1; y < H - 1; y++)
      for (int x = 1; x < W - 1; x++) begin
        int ref_sm, ref_sh;
        ref_sm = 0; ref_sh = 0;
        for (int dy = -1; dy <= 1; dy++)
          for (int dx = -1; dx <= 1; dx++) begin
            ref_sm += gk[dy + 1][dx + 1] * int'(img[y + dy][x + dx]);
            ref_sh += (dy == 0 && dx == 0) ? 9 * int'(img[y][x]) : -int'(img[y + dy][x + dx]);
          end
        ref_sm = ref_sm / 16;
        ref_sh = (ref_sh < 0) ? 0 : (ref_sh > 255) ? 255 : ref_sh;
        for (int s = 0; s < 5; s++) begin
          int got_sm, got_sh;
          got_sm = sm_acc[s][y][x] / 16;
          got_sh = sh_acc[s][y][x];
          got_sh = (got_sh < 0) ? 0 : (got_sh > 255) ? 255 : got_sh;
          checks += 2;
          if (got_sm != ref_sm || got_sh != ref_sh) begin
            failures++;
            if (failures < 20)
              $display("FAIL BL-VOS%0d pixel (%0d,%0d): smooth %0d/%0d sharpen %0d/%0d",
                       s, y, x, got_sm, ref_sm, got_sh, ref_sh);
          end
        end
        n_pix++;
      end
    checks++;
    if (tq.size() != 0 || n_pix != (W - 2) * (H - 2) || n_levels_used != 6) begin
      failures++;
      $display("FAIL bookkeeping: %0d tags left, %0d pixels, %0d levels",
               tq.size(), n_pix, n_levels_used);
    end
    $display("filtered %0d pixels per structure, %0d products each", n_pix, 18 * n_pix);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
