// tb_db_pim_top - end-to-end test of the accelerator at its default sizes.
//
// The host writes compiled weights, metadata, input features and a program
// into the buffers, pulses start, waits for done and reads the results back
// from the feature buffer. Weights are random INT8 values approximated by the
// fixed-threshold (FTA) rule to exactly phi_th non-zero CSD digits and split
// into dyadic blocks plus metadata, as the offline compiler would.
//   Layer A: all 64 rows of all four macros (1024 input channels), macros 0/1
//            with phi_th = 1 (16 filters each), macro 2 with phi_th = 2 (8)
//            and macro 3 mixed per DBMU pair (8 phi_th = 1 and 4 phi_th = 2),
//            unsigned inputs of mixed sparsity (dense, small values with zero
//            upper bit columns, all-zero groups), ReLU, shift 10.
//   Layer B: rows 10..25 (256 channels), signed inputs, no ReLU, shift 7.
//   Layer C: layer A again, split into two MAC instructions of 32 groups, the
//            second continuing the first one's sums (keep), as a reduction
//            longer than one weight load would be run.
// Results are checked against integer dot products passed through the same
// ReLU / shift / INT8 saturation. The test counts how often each mechanism
// occurred and fails if one never did: zero-column bypass, all-zero group
// bypass, phi_th = 1 and phi_th = 2 filters (also sharing one macro),
// negative CSD digits, signed sign bit columns, ReLU clamping, saturation, and the controller waiting for a
// full IPU. It also checks the MAC rate of one bit column per cycle on the
// dense layer B (3 cycles of fill and drain per MAC instruction).
module tb_db_pim_top;
  import dbpim_pkg::*;
  import tb_ref_pkg::*;
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

  // ---------------- data ----------------
  int w [4][64][16][16];     // [macro][row][compartment = input][filter]
  int xa [64][16];           // layer A inputs, unsigned
  int xb [16][16];           // layer B inputs, signed
  // phi_th = 2 mask per macro and DBMU pair: macros 0/1 phi_th = 1, macro 2
  // phi_th = 2, macro 3 mixed (set by a PHI instruction after each CFG)
  localparam logic [3:0][7:0] PM = {8'h3c, 8'hff, 8'h00, 8'h00};
  int n_mixed, n_neg_digits, n_phi1, n_phi2, n_relu, n_sat, n_zero_grp_exp;

  function automatic logic [7:0] simd_ref(longint acc, bit relu, int shift, inout int nr, inout int ns);
    longint v;
    v = acc;
    if (relu && v < 0) begin v = 0; nr++; end
    v = v >>> shift;
    if (v > 127)  begin v = 127;  ns++; end
    if (v < -128) begin v = -128; ns++; end
    return 8'(v);
  endfunction

  // ---------------- mechanism monitors ----------------
  int n_keep, n_cols, n_skip_grp, n_neg_cols, n_ipu_full, n_groups_ld, mac_cycles, mac_b, cols_b;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_ipu.col.valid) n_cols++;
    if (ipu_grp_skip) n_skip_grp++;
    if (dut.u_ipu.col.valid && dut.u_ipu.col.neg) n_neg_cols++;
    if (dut.u_ctrl.state == dut.u_ctrl.S_MAC && dut.u_ctrl.can_issue && !dut.u_ctrl.fb_rd_en) n_ipu_full++;
    if (dut.u_ctrl.state == dut.u_ctrl.S_MAC) mac_cycles++;
    if (dut.ipu_ld_valid) n_groups_ld++;
    if (dut.u_ctrl.state == dut.u_ctrl.S_DECODE && dut.u_ctrl.op == OP_MAC && !dut.acc_clr) n_keep++;
    if (dut.cfg_signed && dut.u_ctrl.state == dut.u_ctrl.S_MAC) mac_b++;
    if (dut.cfg_signed && dut.u_ipu.col.valid) cols_b++;
  end

  initial begin
    logic [255:0] q;
    logic [767:0] m;
    logic [31:0] prog [32];
    longint acc_a [4][16], acc_b [4][16];
    int exp_cols, zero_cols, n;
    {host_fb_wr_en, host_fb_rd_en, host_ib_wr_en, host_wb_wr_en, host_mb_wr_en} = '0;
    {host_fb_wr_addr, host_fb_rd_addr, host_ib_wr_addr, host_wb_wr_addr, host_mb_wr_addr} = '0;
    {host_fb_wr_data, host_ib_wr_data, host_wb_wr_data, host_mb_wr_data} = '0;
    start = 0;
    n_keep = 0; n_cols = 0; n_skip_grp = 0; n_neg_cols = 0; n_ipu_full = 0; n_groups_ld = 0; mac_cycles = 0; mac_b = 0; cols_b = 0;
    n_mixed = 0; n_neg_digits = 0; n_phi1 = 0; n_phi2 = 0; n_relu = 0; n_sat = 0; n_zero_grp_exp = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // weights and metadata: macro mc row r at buffer address 64*mc + r
    for (int mc = 0; mc < 4; mc++) begin
      for (int r = 0; r < 64; r++) begin
        for (int c = 0; c < 16; c++)
          for (int f = 0; f < 16; f++) begin
            w[mc][r][c][f] = rand_weight_mix(f, PM[mc]);
            if (w[mc][r][c][f] < 0) n_neg_digits++;
          end
        pack_row_mix(w[mc][r], PM[mc], q, m);
        @(negedge clk);
        host_wb_wr_en = 1; host_wb_wr_addr = WB_AW'(64 * mc + r); host_wb_wr_data = q;
        host_mb_wr_en = 1; host_mb_wr_addr = MB_AW'(64 * mc + r); host_mb_wr_data = m;
      end
      for (int f = 0; f < 16; f++)
        if (!PM[mc][f / 2]) n_phi1++; else if (f % 2 == 0) n_phi2++;
      if (PM[mc] != 8'h00 && PM[mc] != 8'hff) n_mixed++;
    end
    @(negedge clk);
    {host_wb_wr_en, host_mb_wr_en} = '0;

    // layer A features at 0..63, layer B features at 200..215
    exp_cols = 0; zero_cols = 0;
    for (int g = 0; g < 64; g++) begin
      logic [GRP_W-1:0] word;
      logic [7:0] mask;
      mask = 0;
      for (int c = 0; c < 16; c++) begin
        case (g % 4)
          0: xa[g][c] = $urandom_range(0, 255);
          1: xa[g][c] = $urandom_range(0, 15);           // upper columns all zero
          2: xa[g][c] = (g % 8 == 2) ? 0 : $urandom_range(0, 255) & 8'h5a;
          default: xa[g][c] = ($urandom_range(0, 3) == 0) ? $urandom_range(0, 63) : 0;
        endcase
        word[8*c +: 8] = 8'(xa[g][c]);
        mask |= 8'(xa[g][c]);
      end
      if (mask == 0) n_zero_grp_exp++;
      exp_cols += $countones(mask);
      @(negedge clk);
      host_fb_wr_en = 1; host_fb_wr_addr = FB_AW'(g); host_fb_wr_data = word;
    end
    for (int g = 0; g < 16; g++) begin
      logic [GRP_W-1:0] word;
      for (int c = 0; c < 16; c++) begin
        xb[g][c] = $urandom_range(0, 255) - 128;
        word[8*c +: 8] = 8'(xb[g][c]);
      end
      @(negedge clk);
      host_fb_wr_en = 1; host_fb_wr_addr = FB_AW'(200 + g); host_fb_wr_data = word;
    end
    @(negedge clk);
    host_fb_wr_en = 0;

    // program
    prog = '{default: 32'h0};
    prog[0]  = {OP_CFG, 17'd0, 5'd10, 1'b1, 1'b0, 4'b1100};
    prog[1]  = {OP_PHI, 2'd3, 18'd0, PM[3]};
    n = 2;
    for (int mc = 0; mc < 4; mc++) begin
      prog[n++] = {OP_LDW, 2'(mc), 6'd0, 7'd64, 3'd0, 10'(64 * mc)};
      prog[n++] = {OP_LDM, 2'(mc), 6'd0, 7'd64, 3'd0, 10'(64 * mc)};
    end
    prog[n++] = {OP_MAC, 6'd0, 7'd64, 2'd0, 13'd0};
    prog[n++] = {OP_ST, 15'd0, 13'd1000};
    prog[n++] = {OP_CFG, 17'd0, 5'd7, 1'b0, 1'b1, 4'b1100};
    prog[n++] = {OP_PHI, 2'd3, 18'd0, PM[3]};
    prog[n++] = {OP_MAC, 6'd10, 7'd16, 2'd0, 13'd200};
    prog[n++] = {OP_ST, 15'd0, 13'd1004};
    prog[n++] = {OP_CFG, 17'd0, 5'd10, 1'b1, 1'b0, 4'b1100};
    prog[n++] = {OP_PHI, 2'd3, 18'd0, PM[3]};
    prog[n++] = {OP_MAC, 6'd0, 7'd32, 1'b0, 1'b0, 13'd0};
    prog[n++] = {OP_MAC, 6'd32, 7'd32, 1'b1, 1'b0, 13'd32};
    prog[n++] = {OP_ST, 15'd0, 13'd1008};
    prog[n++] = {OP_HALT, 28'd0};
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      host_ib_wr_en = 1; host_ib_wr_addr = IB_AW'(i); host_ib_wr_data = prog[i];
    end
    @(negedge clk);
    host_ib_wr_en = 0;

    // run
    start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);

    // reference
    for (int mc = 0; mc < 4; mc++)
      for (int f = 0; f < 16; f++) begin
        acc_a[mc][f] = 0; acc_b[mc][f] = 0;
        for (int g = 0; g < 64; g++)
          for (int c = 0; c < 16; c++) acc_a[mc][f] += longint'(w[mc][g][c][f]) * xa[g][c];
        for (int g = 0; g < 16; g++)
          for (int c = 0; c < 16; c++) acc_b[mc][f] += longint'(w[mc][10 + g][c][f]) * xb[g][c];
      end

    // read back and compare
    for (int layer = 0; layer < 3; layer++)
      for (int mc = 0; mc < 4; mc++) begin
        @(negedge clk);
        host_fb_rd_en = 1; host_fb_rd_addr = FB_AW'(1000 + 4 * layer + mc);
        @(negedge clk);
        host_fb_rd_en = 0;
        for (int f = 0; f < 16; f++) if (lane_used(f, PM[mc])) begin
          logic [7:0] e;
          e = (layer != 1) ? simd_ref(acc_a[mc][f], 1, 10, n_relu, n_sat)
                           : simd_ref(acc_b[mc][f], 0, 7, n_relu, n_sat);
          checks++;
          if (host_fb_rd_data[8 * f +: 8] !== e) begin
            failures++;
            if (failures < 20)
              $display("layer %c macro %0d filter %0d: %0d expected %0d (acc %0d)", 8'(65 + layer), mc, f,
                       $signed(host_fb_rd_data[8 * f +: 8]), $signed(e),
                       layer == 1 ? acc_b[mc][f] : acc_a[mc][f]);
          end
        end
      end

    // rate: layer A sends exp_cols columns; layer B 16 groups of up to 8
    check(n_groups_ld == 144, "144 groups loaded");
    check(n_keep == 1, "one MAC continued the previous sums");
    check(n_skip_grp == 2 * n_zero_grp_exp, "all-zero groups bypassed");
    $display("layer A: %0d of %0d bit columns sent, %0d all-zero groups bypassed",
             exp_cols, 64 * 8, n_zero_grp_exp);
    $display("bit columns sent %0d, MAC-state cycles %0d, IPU-full stalls %0d",
             n_cols, mac_cycles, n_ipu_full);
    // dense layer B: one bit column per cycle once the first group has arrived
    $display("layer B: %0d bit columns in %0d MAC cycles", cols_b, mac_b);
    check(mac_b == cols_b + 3, "one bit column per cycle on dense groups");
    // mechanisms
    $display("mechanisms: zero-column bypass %0d, zero-group bypass %0d, phi1 filters %0d, phi2 filters %0d, mixed macros %0d,",
             64 * 8 - exp_cols, n_skip_grp, n_phi1, n_phi2, n_mixed);
    $display("            negative CSD weights %0d, sign-bit columns %0d, ReLU clamps %0d, saturations %0d, IPU-full waits %0d,\n            MAC continuations (keep) %0d",
             n_neg_digits, n_neg_cols, n_relu, n_sat, n_ipu_full, n_keep);
    check(64 * 8 - exp_cols > 0, "zero-column bypass happened");
    check(n_skip_grp > 0, "zero-group bypass happened");
    check(n_phi1 > 0 && n_phi2 > 0, "both phi_th modes used");
    check(n_mixed > 0, "phi_th = 1 and 2 filters sharing a macro");
    check(n_neg_digits > 0, "negative CSD digits used");
    check(n_neg_cols > 0, "signed sign-bit column happened");
    check(n_relu > 0, "ReLU clamp happened");
    check(n_sat > 0, "saturation happened");
    check(n_ipu_full > 0, "controller waited for a full IPU");
    check(n_keep > 0, "partial sums carried across MAC instructions");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
