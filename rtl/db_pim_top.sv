// db_pim_top - DB-PIM accelerator: data buffers, top controller, input
// pre-processing unit (IPU), PIM core and SIMD core.
//
// Dataflow: the host fills the instruction, weight, meta and feature buffers
// and pulses start. The controller copies weight rows into the PIM macros and
// metadata rows into the meta RFs, then streams 16-input feature groups from
// the feature buffer into the IPU. The IPU drops all-zero bit columns and
// broadcasts the remaining columns, one per cycle, to the four macros, which
// multiply them with the stored dyadic blocks, reduce them in CSD-based adder
// trees and shift-accumulate them per filter. The accumulators are captured in
// the output RF, requantised by the SIMD core and written back to the feature
// buffer, from where the host reads them. done rises at HALT.
// Interface: host_* ports write the four buffers and read the feature buffer;
// they may only be used while busy is low (the controller owns the feature
// buffer ports while busy).
// Follows the paper: the block structure and the dataflow between the blocks.
// Own choice: the host ports, buffer word widths and the instruction set.
module db_pim_top
  import dbpim_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  output logic                busy,
  output logic                done,
  output logic                ipu_grp_skip,   // an all-zero input group was bypassed
  // host access to the buffers
  input  logic                host_fb_wr_en,
  input  logic [FB_AW-1:0]    host_fb_wr_addr,
  input  logic [GRP_W-1:0]    host_fb_wr_data,
  input  logic                host_fb_rd_en,
  input  logic [FB_AW-1:0]    host_fb_rd_addr,
  output logic [GRP_W-1:0]    host_fb_rd_data,
  input  logic                host_ib_wr_en,
  input  logic [IB_AW-1:0]    host_ib_wr_addr,
  input  logic [31:0]         host_ib_wr_data,
  input  logic                host_wb_wr_en,
  input  logic [WB_AW-1:0]    host_wb_wr_addr,
  input  logic [WROW_W-1:0]   host_wb_wr_data,
  input  logic                host_mb_wr_en,
  input  logic [MB_AW-1:0]    host_mb_wr_addr,
  input  logic [MROW_W-1:0]   host_mb_wr_data
);
  // buffer ports
  logic               fb_wr_en, fb_rd_en, c_fb_wr_en, c_fb_rd_en;
  logic [FB_AW-1:0]   fb_wr_addr, fb_rd_addr, c_fb_wr_addr, c_fb_rd_addr;
  logic [GRP_W-1:0]   fb_wr_data, fb_rd_data;
  logic               ib_rd_en, wb_rd_en, mb_rd_en;
  logic [IB_AW-1:0]   ib_rd_addr;
  logic [WB_AW-1:0]   wb_rd_addr;
  logic [MB_AW-1:0]   mb_rd_addr;
  logic [31:0]        ib_rd_data;
  logic [WROW_W-1:0]  wb_rd_data;
  logic [MROW_W-1:0]  mb_rd_data;
  // controller to datapath
  logic               pim_wr_en, pim_mwr_en;
  logic [1:0]         pim_wr_macro, out_sel;
  logic [ROW_AW-1:0]  pim_wr_row, ipu_ld_row;
  logic               ipu_ld_valid, ipu_idle;
  logic [1:0]         ipu_free_cnt;
  logic [N_MACRO-1:0][N_DBMU/2-1:0] cfg_phi2;
  logic               cfg_signed, cfg_relu;
  logic [4:0]         cfg_shift;
  logic               acc_clr, out_cap, simd_in_valid, simd_out_valid;
  col_t               col;
  logic signed [ACC_W-1:0] out_data [N_DBMU];

  // the host owns the feature buffer ports while the controller is idle
  assign fb_wr_en        = busy ? c_fb_wr_en   : host_fb_wr_en;
  assign fb_wr_addr      = busy ? c_fb_wr_addr : host_fb_wr_addr;
  assign fb_rd_en        = busy ? c_fb_rd_en   : host_fb_rd_en;
  assign fb_rd_addr      = busy ? c_fb_rd_addr : host_fb_rd_addr;
  assign host_fb_rd_data = fb_rd_data;
  logic [GRP_W-1:0] simd_data;
  assign fb_wr_data      = busy ? simd_data : host_fb_wr_data;

  data_buffers u_buf (
    .clk        (clk),
    .fb_wr_en   (fb_wr_en),      .fb_wr_addr (fb_wr_addr),      .fb_wr_data (fb_wr_data),
    .fb_rd_en   (fb_rd_en),      .fb_rd_addr (fb_rd_addr),      .fb_rd_data (fb_rd_data),
    .ib_wr_en   (host_ib_wr_en), .ib_wr_addr (host_ib_wr_addr), .ib_wr_data (host_ib_wr_data),
    .ib_rd_en   (ib_rd_en),      .ib_rd_addr (ib_rd_addr),      .ib_rd_data (ib_rd_data),
    .wb_wr_en   (host_wb_wr_en), .wb_wr_addr (host_wb_wr_addr), .wb_wr_data (host_wb_wr_data),
    .wb_rd_en   (wb_rd_en),      .wb_rd_addr (wb_rd_addr),      .wb_rd_data (wb_rd_data),
    .mb_wr_en   (host_mb_wr_en), .mb_wr_addr (host_mb_wr_addr), .mb_wr_data (host_mb_wr_data),
    .mb_rd_en   (mb_rd_en),      .mb_rd_addr (mb_rd_addr),      .mb_rd_data (mb_rd_data)
  );

  top_ctrl u_ctrl (
    .clk            (clk),
    .rst_n          (rst_n),
    .start          (start),
    .busy           (busy),
    .done           (done),
    .ib_rd_en       (ib_rd_en),
    .ib_rd_addr     (ib_rd_addr),
    .ib_rd_data     (ib_rd_data),
    .wb_rd_en       (wb_rd_en),
    .wb_rd_addr     (wb_rd_addr),
    .mb_rd_en       (mb_rd_en),
    .mb_rd_addr     (mb_rd_addr),
    .pim_wr_en      (pim_wr_en),
    .pim_mwr_en     (pim_mwr_en),
    .pim_wr_macro   (pim_wr_macro),
    .pim_wr_row     (pim_wr_row),
    .fb_rd_en       (c_fb_rd_en),
    .fb_rd_addr     (c_fb_rd_addr),
    .ipu_ld_valid   (ipu_ld_valid),
    .ipu_ld_row     (ipu_ld_row),
    .ipu_free_cnt   (ipu_free_cnt),
    .ipu_idle       (ipu_idle),
    .cfg_phi2       (cfg_phi2),
    .cfg_signed     (cfg_signed),
    .cfg_relu       (cfg_relu),
    .cfg_shift      (cfg_shift),
    .acc_clr        (acc_clr),
    .out_cap        (out_cap),
    .out_sel        (out_sel),
    .simd_in_valid  (simd_in_valid),
    .simd_out_valid (simd_out_valid),
    .fb_wr_en       (c_fb_wr_en),
    .fb_wr_addr     (c_fb_wr_addr)
  );

  ipu u_ipu (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_signed (cfg_signed),
    .ld_valid  (ipu_ld_valid),
    .ld_data   (fb_rd_data),
    .ld_row    (ipu_ld_row),
    .free_cnt  (ipu_free_cnt),
    .col       (col),
    .grp_skip  (ipu_grp_skip),
    .idle      (ipu_idle)
  );

  pim_core u_core (
    .clk       (clk),
    .rst_n     (rst_n),
    .wr_en     (pim_wr_en),
    .wr_macro  (pim_wr_macro),
    .wr_row    (pim_wr_row),
    .wr_data   (wb_rd_data),
    .mwr_en    (pim_mwr_en),
    .mwr_macro (pim_wr_macro),
    .mwr_row   (pim_wr_row),
    .mwr_data  (mb_rd_data),
    .col       (col),
    .phi2      (cfg_phi2),
    .acc_clr   (acc_clr),
    .out_cap   (out_cap),
    .out_sel   (out_sel),
    .out_data  (out_data)
  );

  simd_core u_simd (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (simd_in_valid),
    .acc       (out_data),
    .relu      (cfg_relu),
    .shift     (cfg_shift),
    .out_valid (simd_out_valid),
    .out_data  (simd_data)
  );

  // the host must leave the buffers alone while the controller runs
  a_host_idle: assert property (@(posedge clk) disable iff (!rst_n)
      busy |-> !(host_fb_wr_en || host_ib_wr_en || host_wb_wr_en || host_mb_wr_en));
endmodule
