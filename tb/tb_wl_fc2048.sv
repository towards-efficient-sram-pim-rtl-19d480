// tb_wl_fc2048 - workload test: a fully connected layer with 2048 inputs,
// longer than the 64 rows x 16 inputs a macro holds, run for a batch of two
// input vectors.
//
// Mapping
//   - The weight and meta buffers hold two 64-row halves per macro: half h of
//     macro mc is at buffer address 128*mc + 64*h and covers inputs
//     1024*h .. 1024*h+1023.
//   - The program loads half 0 into all four macros, runs a MAC over input
//     words 0..63, loads half 1 over the same macro rows, and runs a second
//     MAC over words 64..127 with keep set, so the accumulators carry across
//     the weight reload. One ST writes the results.
//   - Macros 0 and 2 use phi_th = 1, macro 1 phi_th = 2, and macro 3 mixes
//     both per DBMU pair (mask 0x0f), giving 16 + 8 + 16 + 12 = 52 outputs.
// After the first vector the host writes the second vector over the first
// while the accelerator is idle and starts the same program again. Inputs
// are unsigned with about 60 % zeros. Every output is checked against the
// integer dot product through ReLU, shift and INT8 saturation.
module tb_wl_fc2048;
  import dbpim_pkg::*;
  import tb_ref_pkg::*;
  localparam int NIN = 2048, NGRP = NIN / 16, SHIFT = 11;
  localparam logic [3:0][7:0] PM = {8'h0f, 8'h00, 8'hff, 8'h00};
  // macro:                          3      2      1      0   (PM[mc])
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
    repeat (200000) @(posedge clk);
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

  int w [4][NGRP][16][16];   // [macro][input group][compartment][lane]
  int x [NGRP][16];
  int n_keep, n_wrows, n_relu, n_sat;

  always @(posedge clk) if (rst_n) begin
    if (dut.u_ctrl.state == dut.u_ctrl.S_DECODE && dut.u_ctrl.op == OP_MAC && !dut.acc_clr) n_keep++;
    if (dut.pim_wr_en) n_wrows++;
  end

  function automatic logic [7:0] simd_ref(longint acc);
    longint v;
    v = acc;
    if (v < 0) begin v = 0; n_relu++; end
    v = v >>> SHIFT;
    if (v > 127) begin v = 127; n_sat++; end
    return 8'(v);
  endfunction

  task automatic load_inputs();
    for (int g = 0; g < NGRP; g++) begin
      logic [GRP_W-1:0] word;
      for (int c = 0; c < 16; c++) begin
        x[g][c] = ($urandom_range(0, 9) < 6) ? 0 : $urandom_range(1, 255);
        word[8 * c +: 8] = 8'(x[g][c]);
      end
      @(negedge clk);
      host_fb_wr_en = 1; host_fb_wr_addr = FB_AW'(g); host_fb_wr_data = word;
    end
    @(negedge clk);
    host_fb_wr_en = 0;
  endtask

  task automatic run_and_check(int vec);
    start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    for (int mc = 0; mc < 4; mc++) begin
      @(negedge clk);
      host_fb_rd_en = 1; host_fb_rd_addr = FB_AW'(2000 + mc);
      @(negedge clk);
      host_fb_rd_en = 0;
      for (int f = 0; f < 16; f++) if (lane_used(f, PM[mc])) begin
        longint acc;
        logic [7:0] e;
        acc = 0;
        for (int g = 0; g < NGRP; g++)
          for (int c = 0; c < 16; c++) acc += longint'(w[mc][g][c][f]) * x[g][c];
        e = simd_ref(acc);
        checks++;
        if (host_fb_rd_data[8 * f +: 8] !== e) begin
          failures++;
          if (failures < 20)
            $display("vector %0d macro %0d lane %0d: %0d expected %0d (acc %0d)",
                     vec, mc, f, host_fb_rd_data[8 * f +: 8], e, acc);
        end
      end
    end
  endtask

  initial begin
    logic [255:0] q;
    logic [767:0] m;
    logic [31:0] prog [24];
    int n;
    {host_fb_wr_en, host_fb_rd_en, host_ib_wr_en, host_wb_wr_en, host_mb_wr_en} = '0;
    {host_fb_wr_addr, host_fb_rd_addr, host_ib_wr_addr, host_wb_wr_addr, host_mb_wr_addr} = '0;
    {host_fb_wr_data, host_ib_wr_data, host_wb_wr_data, host_mb_wr_data} = '0;
    start = 0;
    n_keep = 0; n_wrows = 0; n_relu = 0; n_sat = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // weights: input group g of macro mc at buffer address 128*mc + g
    for (int mc = 0; mc < 4; mc++)
      for (int g = 0; g < NGRP; g++) begin
        for (int c = 0; c < 16; c++)
          for (int f = 0; f < 16; f++) w[mc][g][c][f] = rand_weight_mix(f, PM[mc]);
        pack_row_mix(w[mc][g], PM[mc], q, m);
        @(negedge clk);
        host_wb_wr_en = 1; host_wb_wr_addr = WB_AW'(128 * mc + g); host_wb_wr_data = q;
        host_mb_wr_en = 1; host_mb_wr_addr = MB_AW'(128 * mc + g); host_mb_wr_data = m;
      end
    @(negedge clk);
    {host_wb_wr_en, host_mb_wr_en} = '0;

    // program
    n = 0;
    prog[n++] = {OP_CFG, 17'd0, 5'(SHIFT), 1'b1, 1'b0, 4'b0010};
    prog[n++] = {OP_PHI, 2'd3, 18'd0, PM[3]};
    for (int h = 0; h < 2; h++) begin
      for (int mc = 0; mc < 4; mc++) begin
        prog[n++] = {OP_LDW, 2'(mc), 6'd0, 7'd64, 3'd0, 10'(128 * mc + 64 * h)};
        prog[n++] = {OP_LDM, 2'(mc), 6'd0, 7'd64, 3'd0, 10'(128 * mc + 64 * h)};
      end
      prog[n++] = {OP_MAC, 6'd0, 7'd64, 1'(h), 1'b0, 13'(64 * h)};
    end
    prog[n++] = {OP_ST, 15'd0, 13'd2000};
    prog[n++] = {OP_HALT, 28'd0};
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      host_ib_wr_en = 1; host_ib_wr_addr = IB_AW'(i); host_ib_wr_data = prog[i];
    end
    @(negedge clk);
    host_ib_wr_en = 0;

    for (int v = 0; v < 2; v++) begin
      load_inputs();
      run_and_check(v);
    end

    $display("outputs checked %0d, weight rows loaded %0d, keep MACs %0d, ReLU clamps %0d, saturations %0d",
             checks, n_wrows, n_keep, n_relu, n_sat);
    check(n_keep == 2, "one continued MAC per vector");
    check(n_wrows == 2 * 2 * 4 * 64, "two weight halves per macro and vector");
    check(n_relu > 0, "ReLU clamp happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
