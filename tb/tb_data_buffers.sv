// tb_data_buffers - writes random words at random addresses of all four
// buffers (including the first and last word) and reads them back with the
// one-cycle read latency.
module tb_data_buffers;
  import dbpim_pkg::*;
  logic clk = 0;
  logic fb_wr_en, fb_rd_en, ib_wr_en, ib_rd_en, wb_wr_en, wb_rd_en, mb_wr_en, mb_rd_en;
  logic [FB_AW-1:0] fb_wr_addr, fb_rd_addr;
  logic [IB_AW-1:0] ib_wr_addr, ib_rd_addr;
  logic [WB_AW-1:0] wb_wr_addr, wb_rd_addr;
  logic [MB_AW-1:0] mb_wr_addr, mb_rd_addr;
  logic [GRP_W-1:0] fb_wr_data, fb_rd_data;
  logic [31:0] ib_wr_data, ib_rd_data;
  logic [WROW_W-1:0] wb_wr_data, wb_rd_data;
  logic [MROW_W-1:0] mb_wr_data, mb_rd_data;
  int checks = 0, failures = 0;

  data_buffers dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [767:0] rand_word();
    logic [767:0] v;
    for (int i = 0; i < 24; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    int fa[40], ia[40], wa[40], ma[40];
    logic [767:0] fd[40], id[40], wd[40], md[40];
    {fb_wr_en, fb_rd_en, ib_wr_en, ib_rd_en, wb_wr_en, wb_rd_en, mb_wr_en, mb_rd_en} = '0;
    {fb_wr_addr, fb_rd_addr, ib_wr_addr, ib_rd_addr, wb_wr_addr, wb_rd_addr, mb_wr_addr, mb_rd_addr} = '0;
    {fb_wr_data, ib_wr_data, wb_wr_data, mb_wr_data} = '0;
    for (int i = 0; i < 40; i++) begin
      fa[i] = (i == 0) ? 0 : (i == 1) ? FB_DEPTH - 1 : i * 199 + 2;
      ia[i] = (i == 0) ? 0 : (i == 1) ? IB_DEPTH - 1 : i * 97 + 2;
      wa[i] = (i == 0) ? 0 : (i == 1) ? WB_DEPTH - 1 : i * 23 + 2;
      ma[i] = (i == 0) ? 0 : (i == 1) ? MB_DEPTH - 1 : i * 25 + 2;
      fd[i] = rand_word(); id[i] = rand_word(); wd[i] = rand_word(); md[i] = rand_word();
      @(negedge clk);
      fb_wr_en = 1; fb_wr_addr = FB_AW'(fa[i]); fb_wr_data = GRP_W'(fd[i]);
      ib_wr_en = 1; ib_wr_addr = IB_AW'(ia[i]); ib_wr_data = 32'(id[i]);
      wb_wr_en = 1; wb_wr_addr = WB_AW'(wa[i]); wb_wr_data = WROW_W'(wd[i]);
      mb_wr_en = 1; mb_wr_addr = MB_AW'(ma[i]); mb_wr_data = md[i];
    end
    @(negedge clk);
    {fb_wr_en, ib_wr_en, wb_wr_en, mb_wr_en} = '0;
    for (int i = 39; i >= 0; i--) begin
      fb_rd_en = 1; fb_rd_addr = FB_AW'(fa[i]);
      ib_rd_en = 1; ib_rd_addr = IB_AW'(ia[i]);
      wb_rd_en = 1; wb_rd_addr = WB_AW'(wa[i]);
      mb_rd_en = 1; mb_rd_addr = MB_AW'(ma[i]);
      @(negedge clk);
      checks += 4;
      if (fb_rd_data !== GRP_W'(fd[i]))  begin failures++; $display("feature %0d", fa[i]); end
      if (ib_rd_data !== 32'(id[i]))     begin failures++; $display("inst %0d", ia[i]); end
      if (wb_rd_data !== WROW_W'(wd[i])) begin failures++; $display("weight %0d", wa[i]); end
      if (mb_rd_data !== md[i])          begin failures++; $display("meta %0d", ma[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
