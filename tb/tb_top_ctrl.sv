// tb_top_ctrl - runs a short program (CFG, LDW, LDM, MAC, ST, PHI, HALT) on the
// controller with behavioural stand-ins for the instruction buffer (one-cycle
// read), the IPU (two entries, each group taking 1..4 cycles) and the SIMD core
// (one-cycle delay). Checks the configuration outputs (CFG, then PHI for one
// macro), every weight and metadata row write (macro, row, buffer address read the cycle before), every
// feature read and IPU load (address, row tag, never into a full IPU), that
// acc_clr precedes and out_cap follows all groups with the IPU idle, the four
// SIMD write-backs, and done; then runs the program again with the MAC keep
// flag set and checks that the accumulators are not cleared.
module tb_top_ctrl;
  import dbpim_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start, busy, done;
  logic ib_rd_en;  logic [IB_AW-1:0] ib_rd_addr; logic [31:0] ib_rd_data;
  logic wb_rd_en;  logic [WB_AW-1:0] wb_rd_addr;
  logic mb_rd_en;  logic [MB_AW-1:0] mb_rd_addr;
  logic pim_wr_en, pim_mwr_en; logic [1:0] pim_wr_macro; logic [ROW_AW-1:0] pim_wr_row;
  logic fb_rd_en;  logic [FB_AW-1:0] fb_rd_addr;
  logic ipu_ld_valid; logic [ROW_AW-1:0] ipu_ld_row;
  logic [1:0] ipu_free_cnt; logic ipu_idle;
  logic [N_MACRO-1:0][N_DBMU/2-1:0] cfg_phi2; logic cfg_signed, cfg_relu; logic [4:0] cfg_shift;
  logic acc_clr, out_cap; logic [1:0] out_sel;
  logic simd_in_valid, simd_out_valid, fb_wr_en; logic [FB_AW-1:0] fb_wr_addr;
  int checks = 0, failures = 0;

  top_ctrl dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // instruction buffer
  logic [31:0] imem [16];
  always_ff @(posedge clk) if (ib_rd_en) ib_rd_data <= imem[ib_rd_addr];

  // IPU stand-in
  int q_cnt, q_busy;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin q_cnt <= 0; q_busy <= 0; end
    else begin
      int n;
      n = q_cnt;
      if (n > 0) begin
        if (q_busy == 0) begin n--; q_busy <= $urandom_range(0, 3); end
        else q_busy <= q_busy - 1;
      end
      if (ipu_ld_valid) n++;
      q_cnt <= n;
    end
  assign ipu_free_cnt = 2'(2 - q_cnt);
  assign ipu_idle     = q_cnt == 0;

  // SIMD stand-in
  always_ff @(posedge clk) simd_out_valid <= simd_in_valid;

  // monitors
  logic keep = 0;
  int nsel = 0, nw, nm, nf, nst, nclr, ncap, ld_done_t, cap_t, clr_t;
  logic [WB_AW-1:0] wb_addr_q; logic [MB_AW-1:0] mb_addr_q; logic [FB_AW-1:0] fb_addr_q;
  logic wb_q, mb_q, fb_q;
  always_ff @(posedge clk) begin
    wb_q <= wb_rd_en; wb_addr_q <= wb_rd_addr;
    mb_q <= mb_rd_en; mb_addr_q <= mb_rd_addr;
    fb_q <= fb_rd_en; fb_addr_q <= fb_rd_addr;
  end
  always @(negedge clk) if (rst_n) begin
    if (pim_wr_en) begin
      check(wb_q && wb_addr_q == WB_AW'(100 + nw) && pim_wr_macro == 2 && pim_wr_row == 6'(5 + nw), "weight row write");
      nw++;
    end
    if (pim_mwr_en) begin
      check(mb_q && mb_addr_q == MB_AW'(7 + nm) && pim_wr_macro == 1 && pim_wr_row == 6'(nm), "meta row write");
      nm++;
    end
    if (ipu_ld_valid) begin
      check(fb_q && fb_addr_q == FB_AW'(300 + nf) && ipu_ld_row == 6'(4 + nf), "feature group load");
      check(q_cnt < 2, "load into a free IPU entry");
      check(nclr == (keep ? 0 : 1), "accumulators cleared before the groups unless kept");
      nf++;
      ld_done_t = $time;
    end
    if (acc_clr) begin nclr++; clr_t = $time; end
    if (out_cap) begin
      check(nf == 5 && ipu_idle, "capture after all groups with the IPU idle");
      ncap++; cap_t = $time;
    end
    if (simd_in_valid) begin check(out_sel == 2'(nsel), "output RF macro select"); nsel++; end
    if (fb_wr_en) begin
      check(fb_wr_addr == FB_AW'(50 + nst), "write-back address");
      nst++;
    end
  end

  initial begin
    imem = '{default: 32'h0};
    imem[0] = {OP_CFG, 17'd0, 5'd9, 1'b1, 1'b1, 4'b0110};
    imem[1] = {OP_LDW, 2'd2, 6'd5, 7'd3, 3'd0, 10'd100};
    imem[2] = {OP_LDM, 2'd1, 6'd0, 7'd2, 3'd0, 10'd7};
    imem[3] = {OP_MAC, 6'd4, 7'd5, 2'd0, 13'd300};
    imem[4] = {OP_ST, 15'd0, 13'd50};
    imem[5] = {OP_PHI, 2'd3, 18'd0, 8'h5a};
    imem[6] = {OP_HALT, 28'd0};
    start = 0;
    nw = 0; nm = 0; nf = 0; nst = 0; nclr = 0; ncap = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!busy && !done, "idle after reset");
    start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    check(cfg_phi2 == {8'h5a, 8'hff, 8'hff, 8'h00} && cfg_signed && cfg_relu && cfg_shift == 9, "configuration");
    check(nw == 3, "three weight rows");
    check(nm == 2, "two metadata rows");
    check(nf == 5, "five feature groups");
    check(nclr == 1 && ncap == 1, "one clear and one capture");
    check(nst == 4, "four write-backs");
    check(!busy, "idle after HALT");
    // second run: the same MAC with keep set must not clear the accumulators
    imem[3][14] = 1'b1; keep = 1;
    nw = 0; nm = 0; nf = 0; nst = 0; nclr = 0; ncap = 0; nsel = 0;
    @(negedge clk);
    start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    check(nf == 5 && nclr == 0 && ncap == 1, "keep: no clear, one capture");
    check(nst == 4, "keep: four write-backs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
