// ipu - input pre-processing unit.
//
// Turns groups of 16 INT8 input features into a bit-serial stream for the PIM
// core while skipping bit columns that are zero in all 16 features. Its 256-bit
// register file holds two groups: one is loaded from the feature buffer while
// the other is being sent. For the group being sent, the zero-detection module
// builds the column mask, the leading-one detector picks the highest column not
// yet sent, and input selection takes that bit from each of the 16 features.
// One column leaves per cycle, tagged with its bit index, first/last flags, the
// sign-bit flag (neg, for signed inputs at index 7) and the macro row the group
// uses. A group whose mask is all zero is dropped in one cycle (grp_skip) and
// sends nothing.
// Interface: ld_valid/ld_data/ld_row load a group; it must only be asserted
// while free_cnt > 0. col is combinational from the register file, one column
// per cycle, with no back-pressure. idle is high when no group is held.
// Follows the paper: RF, zero detection, leading-one detection, input selection
// and the bypass of all-zero columns. Own choice: the two-entry split of the RF,
// the MSB-first order and the one-cycle cost of an all-zero group.
module ipu
  import dbpim_pkg::*;
(
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_signed,
  input  logic                       ld_valid,
  input  logic [N_COMP-1:0][IN_W-1:0] ld_data,
  input  logic [ROW_AW-1:0]          ld_row,
  output logic [1:0]                 free_cnt,
  output col_t                       col,
  output logic                       grp_skip,
  output logic                       idle
);
  logic [N_COMP-1:0][IN_W-1:0] rf     [2];   // 2 x 128 b = 256 b
  logic [ROW_AW-1:0]           rf_row [2];
  logic [1:0]                  rf_vld;
  logic                        wr_ptr, rd_ptr;
  logic                        started;
  logic [IN_W-1:0]             rem;          // columns of the current group not yet sent
  logic [IN_W-1:0]             zd_mask, cur_mask, nxt_mask;
  logic                        found;
  logic [IDX_W-1:0]            lod_idx;
  logic                        active, done_grp;

  zero_detect #(.N_IN(N_COMP), .W(IN_W)) u_zd (
    .feat (rf[rd_ptr]),
    .mask (zd_mask)
  );

  assign active   = rf_vld[rd_ptr];
  assign cur_mask = started ? rem : zd_mask;

  leading_one_detect #(.W(IN_W)) u_lod (
    .mask  (cur_mask),
    .found (found),
    .idx   (lod_idx)
  );

  assign nxt_mask = cur_mask & ~(IN_W'(1) << lod_idx);
  assign done_grp = active && (!found || nxt_mask == '0);

  // input selection
  always_comb begin
    col       = '0;
    col.valid = active && found;
    col.first = !started;
    col.last  = nxt_mask == '0;
    col.idx   = lod_idx;
    col.neg   = in_signed && (lod_idx == IDX_W'(IN_W - 1));
    col.row   = rf_row[rd_ptr];
    for (int i = 0; i < N_COMP; i++) col.bits[i] = rf[rd_ptr][i][lod_idx];
  end

  assign grp_skip = active && !found;
  assign free_cnt = 2'(!rf_vld[0]) + 2'(!rf_vld[1]);
  assign idle     = rf_vld == 2'b00;

  always_ff @(posedge clk)
    if (ld_valid) begin
      rf[wr_ptr]     <= ld_data;
      rf_row[wr_ptr] <= ld_row;
    end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      rf_vld  <= '0;
      wr_ptr  <= 1'b0;
      rd_ptr  <= 1'b0;
      started <= 1'b0;
      rem     <= '0;
    end else begin
      if (ld_valid) begin
        rf_vld[wr_ptr] <= 1'b1;
        wr_ptr         <= ~wr_ptr;
      end
      if (active) begin
        if (done_grp) begin
          rf_vld[rd_ptr] <= 1'b0;
          rd_ptr         <= ~rd_ptr;
          started        <= 1'b0;
        end else begin
          rem     <= nxt_mask;
          started <= 1'b1;
        end
      end
    end

  // a load must find a free entry
  a_load_room: assert property (@(posedge clk) disable iff (!rst_n)
                                ld_valid |-> !rf_vld[wr_ptr]);
endmodule
