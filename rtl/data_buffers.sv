// data_buffers - the four on-chip data buffers of DB-PIM.
//
//   feature buffer      128 KB = 8192 x 128 b (one word = one 16-input group)
//   instruction buffer   16 KB = 4096 x  32 b
//   weight buffer        32 KB = 1024 x 256 b (one word = one macro row of Q bits)
//   meta buffer          96 KB = 1024 x 768 b (one word = one meta RF row)
// 272 KB in all. Each buffer has one write port and one synchronous read port
// (data one cycle after the read enable).
// Follows the paper: the four buffers and their capacities. Own choice: the word
// widths, chosen so that one word feeds one unit of the consumer per cycle.
module data_buffers
  import dbpim_pkg::*;
(
  input  logic                clk,
  // feature buffer
  input  logic                fb_wr_en,
  input  logic [FB_AW-1:0]    fb_wr_addr,
  input  logic [GRP_W-1:0]    fb_wr_data,
  input  logic                fb_rd_en,
  input  logic [FB_AW-1:0]    fb_rd_addr,
  output logic [GRP_W-1:0]    fb_rd_data,
  // instruction buffer
  input  logic                ib_wr_en,
  input  logic [IB_AW-1:0]    ib_wr_addr,
  input  logic [31:0]         ib_wr_data,
  input  logic                ib_rd_en,
  input  logic [IB_AW-1:0]    ib_rd_addr,
  output logic [31:0]         ib_rd_data,
  // weight buffer
  input  logic                wb_wr_en,
  input  logic [WB_AW-1:0]    wb_wr_addr,
  input  logic [WROW_W-1:0]   wb_wr_data,
  input  logic                wb_rd_en,
  input  logic [WB_AW-1:0]    wb_rd_addr,
  output logic [WROW_W-1:0]   wb_rd_data,
  // meta buffer
  input  logic                mb_wr_en,
  input  logic [MB_AW-1:0]    mb_wr_addr,
  input  logic [MROW_W-1:0]   mb_wr_data,
  input  logic                mb_rd_en,
  input  logic [MB_AW-1:0]    mb_rd_addr,
  output logic [MROW_W-1:0]   mb_rd_data
);
  sram_buffer #(.DEPTH(FB_DEPTH), .WIDTH(GRP_W)) u_feature (
    .clk, .wr_en(fb_wr_en), .wr_addr(fb_wr_addr), .wr_data(fb_wr_data),
    .rd_en(fb_rd_en), .rd_addr(fb_rd_addr), .rd_data(fb_rd_data));
  sram_buffer #(.DEPTH(IB_DEPTH), .WIDTH(32)) u_inst (
    .clk, .wr_en(ib_wr_en), .wr_addr(ib_wr_addr), .wr_data(ib_wr_data),
    .rd_en(ib_rd_en), .rd_addr(ib_rd_addr), .rd_data(ib_rd_data));
  sram_buffer #(.DEPTH(WB_DEPTH), .WIDTH(WROW_W)) u_weight (
    .clk, .wr_en(wb_wr_en), .wr_addr(wb_wr_addr), .wr_data(wb_wr_data),
    .rd_en(wb_rd_en), .rd_addr(wb_rd_addr), .rd_data(wb_rd_data));
  sram_buffer #(.DEPTH(MB_DEPTH), .WIDTH(MROW_W)) u_meta (
    .clk, .wr_en(mb_wr_en), .wr_addr(mb_wr_addr), .wr_data(mb_wr_data),
    .rd_en(mb_rd_en), .rd_addr(mb_rd_addr), .rd_data(mb_rd_data));
endmodule
