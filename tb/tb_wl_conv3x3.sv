// tb_wl_conv3x3 - workload test: one 3x3 convolution layer (stride 1, zero
// padding 1) on an 8x8 feature map with 32 input channels and 48 output
// channels, run end to end on the accelerator as a compiler would map it.
//
// Mapping
//   - Features are stored pixel-major in the feature buffer: padded pixel
//     (py, px) of the 10x10 map occupies words 2*(10*py + px) + {0, 1}, one
//     word per 16 channels.
//   - Macro row 6*dy + 2*dx + cg holds kernel tap (dy, dx) for channels
//     16*cg .. 16*cg+15, so the three taps of one kernel row are six
//     consecutive rows and their inputs six consecutive feature words.
//   - Each output pixel takes three MAC instructions (one per kernel row, the
//     second and third with keep set) and one ST.
//   - Macros 0 and 1 hold output channels 0..31 with phi_th = 1; macros 2 and 3
//     hold output channels 32..47 with phi_th = 2.
// Inputs are unsigned (post-ReLU) with about half of them zero. The border
// pixels read padding words, so whole all-zero groups occur. Every output is
// checked against the integer convolution passed through ReLU, shift and INT8
// saturation.
module tb_wl_conv3x3;
  import dbpim_pkg::*;
  import tb_ref_pkg::*;
  localparam int H = 8, HP = H + 2, SHIFT = 9;
  logic clk = 0, rst_n = 0;
  logic start, busy, done, ipu_grp_skip;
  logic host_fb_wr_en, host_fb_rd_en, host_ib_wr_en, host_wb_wr_en, host_mb_wr_en;
  logic [FB_AW-1:0] host_fb_wr_addr, host_fb_rd_addr;
  logic [GRP_W-1:0] host_fb_wr_data, host_fb_rd_data;
  logic [IB_AW-1:0] host_ib_wr_addr;
  logic [31:0] host_ib_wr_data;
  logic [WB_AW-1:0] host_wb_wr_addr;
  logic [WROW_W-1:0] host_wb_wr_data;
  logic [MB_AW-1:0] host_mb_wr_addr;
  logic [MROW_W-1:0] host_mb_wr_data;
  int checks = 0, failures = 0;

  db_pim_top dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  int w [4][18][16][16];     // [macro][row][compartment][filter]
  int x [HP][HP][32];        // padded input map
  int n_keep, n_skip_grp, n_relu, n_sat, n_cols;

  always @(posedge clk) if (rst_n) begin
    if (ipu_grp_skip) n_skip_grp++;
    if (dut.u_ipu.col.valid) n_cols++;
    if (dut.u_ctrl.state == dut.u_ctrl.S_DECODE && dut.u_ctrl.op == OP_MAC && !dut.acc_clr) n_keep++;
  end

  function automatic logic [7:0] simd_ref(longint acc);
    longint v;
    v = acc;
    if (v < 0) begin v = 0; n_relu++; end
    v = v >>> SHIFT;
    if (v > 127) begin v = 127; n_sat++; end
    return 8'(v);
  endfunction

  initial begin
    logic [255:0] q;
    logic [767:0] m;
    int n;
    {host_fb_wr_en, host_fb_rd_en, host_ib_wr_en, host_wb_wr_en, host_mb_wr_en} = '0;
    {host_fb_wr_addr, host_fb_rd_addr, host_ib_wr_addr, host_wb_wr_addr, host_mb_wr_addr} = '0;
    {host_fb_wr_data, host_ib_wr_data, host_wb_wr_data, host_mb_wr_data} = '0;
    start = 0;
    n_keep = 0; n_skip_grp = 0; n_relu = 0; n_sat = 0; n_cols = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // weights: macro mc row r at weight/meta buffer address 18*mc + r
    for (int mc = 0; mc < 4; mc++) begin
      int phi;
      phi = (mc < 2) ? 1 : 2;
      for (int r = 0; r < 18; r++) begin
        for (int c = 0; c < 16; c++)
          for (int f = 0; f < 16; f++)
            w[mc][r][c][f] = (f < 16 / phi) ? rand_weight(phi) : 0;
        pack_row(w[mc][r], phi, q, m);
        @(negedge clk);
        host_wb_wr_en = 1; host_wb_wr_addr = WB_AW'(18 * mc + r); host_wb_wr_data = q;
        host_mb_wr_en = 1; host_mb_wr_addr = MB_AW'(18 * mc + r); host_mb_wr_data = m;
      end
    end
    @(negedge clk);
    {host_wb_wr_en, host_mb_wr_en} = '0;

    // padded input map
    for (int py = 0; py < HP; py++)
      for (int px = 0; px < HP; px++)
        for (int cg = 0; cg < 2; cg++) begin
          logic [GRP_W-1:0] word;
          for (int c = 0; c < 16; c++) begin
            bit pad;
            pad = py == 0 || px == 0 || py == HP - 1 || px == HP - 1;
            x[py][px][16 * cg + c] = (pad || $urandom_range(0, 1) == 0) ? 0 : $urandom_range(1, 255);
            word[8 * c +: 8] = 8'(x[py][px][16 * cg + c]);
          end
          @(negedge clk);
          host_fb_wr_en = 1; host_fb_wr_addr = FB_AW'(2 * (HP * py + px) + cg); host_fb_wr_data = word;
        end
    @(negedge clk);
    host_fb_wr_en = 0;

    // program
    n = 0;
    host_ib_wr_en = 1;
    for (int i = 0; i < 10 + 4 * H * H; i++) begin
      logic [31:0] ins;
      if (i == 0) ins = {OP_CFG, 17'd0, 5'(SHIFT), 1'b1, 1'b0, 4'b1100};
      else if (i <= 8) begin
        int mc;
        mc = (i - 1) / 2;
        ins = {(i % 2) ? OP_LDW : OP_LDM, 2'(mc), 6'd0, 7'd18, 3'd0, 10'(18 * mc)};
      end else if (i == 9 + 4 * H * H) ins = {OP_HALT, 28'd0};
      else begin
        int p, k, y, xo;
        p = (i - 9) / 4; k = (i - 9) % 4; y = p / H; xo = p % H;
        if (k < 3) ins = {OP_MAC, 6'(6 * k), 7'd6, 1'(k > 0), 1'b0, 13'(2 * (HP * (y + k) + xo))};
        else       ins = {OP_ST, 15'd0, 13'(1000 + 4 * p)};
      end
      @(negedge clk);
      host_ib_wr_addr = IB_AW'(i); host_ib_wr_data = ins;
    end
    @(negedge clk);
    host_ib_wr_en = 0;

    start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);

    // read back and compare
    for (int p = 0; p < H * H; p++)
      for (int mc = 0; mc < 4; mc++) begin
        int phi, y, xo;
        phi = (mc < 2) ? 1 : 2;
        y = p / H; xo = p % H;
        @(negedge clk);
        host_fb_rd_en = 1; host_fb_rd_addr = FB_AW'(1000 + 4 * p + mc);
        @(negedge clk);
        host_fb_rd_en = 0;
        for (int f = 0; f < 16 / phi; f++) begin
          longint acc;
          logic [7:0] e;
          acc = 0;
          for (int dy = 0; dy < 3; dy++)
            for (int dx = 0; dx < 3; dx++)
              for (int ch = 0; ch < 32; ch++)
                acc += longint'(w[mc][6 * dy + 2 * dx + ch / 16][ch % 16][f]) * x[y + dy][xo + dx][ch];
          e = simd_ref(acc);
          checks++;
          if (host_fb_rd_data[8 * phi * f +: 8] !== e) begin
            failures++;
            if (failures < 20)
              $display("pixel (%0d,%0d) macro %0d filter %0d: %0d expected %0d (acc %0d)",
                       y, xo, mc, f, host_fb_rd_data[8 * phi * f +: 8], e, acc);
          end
        end
      end

    $display("outputs checked %0d, bit columns %0d, keep MACs %0d, all-zero groups skipped %0d, ReLU clamps %0d, saturations %0d",
             checks, n_cols, n_keep, n_skip_grp, n_relu, n_sat);
    check(n_keep == 2 * H * H, "two continued MACs per output pixel");
    check(n_skip_grp > 0, "padding groups bypassed");
    check(n_relu > 0, "ReLU clamp happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
