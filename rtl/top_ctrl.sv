// top_ctrl - top controller: fetches instructions from the instruction buffer
// and sequences the rest of the accelerator.
//
// Instructions (32 bit, opcode in [31:28], see dbpim_pkg::opcode_e):
//   HALT  stop and raise done.
//   CFG   set signed inputs, ReLU, the requantisation shift, and for each
//         macro whether all its filters use phi_th = 2 or all phi_th = 1.
//   PHI   set the phi_th mode of one macro per DBMU pair, so that phi_th = 1
//         and phi_th = 2 filters can share the macro's rows.
//   LDW   copy `rows` weight-buffer words into consecutive rows of one macro.
//   LDM   copy `rows` meta-buffer words into consecutive rows of one meta RF.
//   MAC   clear the accumulators (unless keep is set, which continues the
//         previous MAC's sums so that a reduction longer than the 64 rows of
//         a macro can be split over several weight loads), stream `groups`
//         feature words (16-input groups) into the IPU, group g using macro
//         row first_row + g, wait for the pipeline to drain and capture all
//         accumulators in the output RF.
//   ST    pass the output RF, one macro at a time, through the SIMD core and
//         write the four resulting words to consecutive feature-buffer addresses.
// Timing: every buffer has a one-cycle read, so each copy keeps one read in
// flight and writes the word one cycle after issuing its read. MAC issues a
// feature read only when the IPU will still have a free entry when the word
// arrives; the IPU then runs at one bit column per cycle. After the IPU is idle
// the controller waits DRAIN cycles for the macro pipeline (column register,
// Psum, accumulator) before the capture.
// Follows the paper: an instruction-driven controller that dispatches control
// to buffers, IPU, PIM core and SIMD core. Own choice: the whole instruction set
// and sequencing (the paper gives neither).
module top_ctrl
  import dbpim_pkg::*;
#(
  parameter int DRAIN = 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  output logic                  busy,
  output logic                  done,
  // instruction buffer
  output logic                  ib_rd_en,
  output logic [IB_AW-1:0]      ib_rd_addr,
  input  logic [31:0]           ib_rd_data,
  // weight / meta buffer reads and the PIM core row writes they feed
  output logic                  wb_rd_en,
  output logic [WB_AW-1:0]      wb_rd_addr,
  output logic                  mb_rd_en,
  output logic [MB_AW-1:0]      mb_rd_addr,
  output logic                  pim_wr_en,
  output logic                  pim_mwr_en,
  output logic [1:0]            pim_wr_macro,
  output logic [ROW_AW-1:0]     pim_wr_row,
  // feature buffer reads into the IPU
  output logic                  fb_rd_en,
  output logic [FB_AW-1:0]      fb_rd_addr,
  output logic                  ipu_ld_valid,
  output logic [ROW_AW-1:0]     ipu_ld_row,
  input  logic [1:0]            ipu_free_cnt,
  input  logic                  ipu_idle,
  // configuration
  output logic [N_MACRO-1:0][N_DBMU/2-1:0] cfg_phi2,
  output logic                  cfg_signed,
  output logic                  cfg_relu,
  output logic [4:0]            cfg_shift,
  // PIM core and SIMD core control
  output logic                  acc_clr,
  output logic                  out_cap,
  output logic [1:0]            out_sel,
  output logic                  simd_in_valid,
  input  logic                  simd_out_valid,
  output logic                  fb_wr_en,
  output logic [FB_AW-1:0]      fb_wr_addr
);
  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_DECODE, S_LOAD, S_MAC, S_DRAIN, S_ST} state_e;

  state_e             state;
  logic [IB_AW-1:0]   pc;
  opcode_e            op;
  logic               ld_meta;      // S_LOAD copies metadata (1) or weights (0)
  logic [1:0]         ld_macro;
  logic [ROW_AW-1:0]  ld_row;
  logic [6:0]         cnt, k;       // transfer count / transfers issued
  logic [12:0]        base;         // buffer address of the first transfer
  logic               pend;         // a read issued last cycle
  logic [ROW_AW-1:0]  pend_row;
  logic [2:0]         drain;
  logic [1:0]         st_m;
  logic               can_issue;

  assign op        = opcode_e'(ib_rd_data[31:28]);
  assign busy      = state != S_IDLE;
  assign can_issue = k < cnt;

  // instruction fetch
  assign ib_rd_en   = state == S_FETCH;
  assign ib_rd_addr = pc;

  // weight / metadata row copy
  assign wb_rd_en     = state == S_LOAD && !ld_meta && can_issue;
  assign mb_rd_en     = state == S_LOAD &&  ld_meta && can_issue;
  assign wb_rd_addr   = WB_AW'(base) + WB_AW'(k);
  assign mb_rd_addr   = MB_AW'(base) + MB_AW'(k);
  assign pim_wr_en    = state == S_LOAD && !ld_meta && pend;
  assign pim_mwr_en   = state == S_LOAD &&  ld_meta && pend;
  assign pim_wr_macro = ld_macro;
  assign pim_wr_row   = pend_row;

  // feature groups into the IPU
  assign fb_rd_en     = state == S_MAC && can_issue && (ipu_free_cnt > 2'(pend));
  assign fb_rd_addr   = FB_AW'(base) + FB_AW'(k);
  assign ipu_ld_valid = state == S_MAC && pend;
  assign ipu_ld_row   = pend_row;

  // result capture and write-back
  assign acc_clr       = state == S_DECODE && op == OP_MAC && !ib_rd_data[14];
  assign out_cap       = state == S_DRAIN && drain == 0;
  assign out_sel       = st_m;
  assign simd_in_valid = state == S_ST && can_issue;
  assign fb_wr_en      = simd_out_valid;
  assign fb_wr_addr    = FB_AW'(base) + FB_AW'(pend_row);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state      <= S_IDLE;
      pc         <= '0;
      done       <= 1'b0;
      ld_meta    <= 1'b0;
      ld_macro   <= '0;
      ld_row     <= '0;
      cnt        <= '0;
      k          <= '0;
      base       <= '0;
      pend       <= 1'b0;
      pend_row   <= '0;
      drain      <= '0;
      st_m       <= '0;
      cfg_phi2   <= '0;
      cfg_signed <= 1'b0;
      cfg_relu   <= 1'b0;
      cfg_shift  <= '0;
    end else begin
      unique case (state)
        S_IDLE:
          if (start) begin
            pc    <= '0;
            done  <= 1'b0;
            state <= S_FETCH;
          end
        S_FETCH: state <= S_DECODE;
        S_DECODE: begin
          pc    <= pc + 1'b1;
          k     <= '0;
          pend  <= 1'b0;
          state <= S_FETCH;
          case (op)
            OP_HALT: begin
              done  <= 1'b1;
              state <= S_IDLE;
            end
            OP_CFG: begin
              for (int m = 0; m < N_MACRO; m++) cfg_phi2[m] <= {(N_DBMU/2){ib_rd_data[m]}};
              cfg_signed <= ib_rd_data[4];
              cfg_relu   <= ib_rd_data[5];
              cfg_shift  <= ib_rd_data[10:6];
            end
            OP_PHI: cfg_phi2[ib_rd_data[27:26]] <= ib_rd_data[N_DBMU/2-1:0];
            OP_LDW, OP_LDM: begin
              ld_meta  <= op == OP_LDM;
              ld_macro <= ib_rd_data[27:26];
              ld_row   <= ib_rd_data[25:20];
              cnt      <= ib_rd_data[19:13];
              base     <= {3'b0, ib_rd_data[9:0]};
              state    <= S_LOAD;
            end
            OP_MAC: begin
              ld_row <= ib_rd_data[27:22];
              cnt    <= ib_rd_data[21:15];
              base   <= ib_rd_data[12:0];
              state  <= S_MAC;
            end
            OP_ST: begin
              cnt   <= 7'(N_MACRO);
              base  <= ib_rd_data[12:0];
              st_m  <= '0;
              state <= S_ST;
            end
            default: ;
          endcase
        end
        S_LOAD: begin
          pend     <= can_issue;
          pend_row <= ld_row + ROW_AW'(k);
          if (can_issue) k <= k + 1'b1;
          else if (!pend) state <= S_FETCH;
        end
        S_MAC: begin
          pend     <= fb_rd_en;
          pend_row <= ld_row + ROW_AW'(k);
          if (fb_rd_en) k <= k + 1'b1;
          else if (!can_issue && !pend && ipu_idle) begin
            drain <= 3'(DRAIN);
            state <= S_DRAIN;
          end
        end
        S_DRAIN:
          if (drain == 0) state <= S_FETCH;
          else            drain <= drain - 1'b1;
        S_ST: begin
          pend     <= can_issue;
          pend_row <= ROW_AW'(k);      // word offset of the SIMD result in flight
          if (can_issue) begin
            k    <= k + 1'b1;
            st_m <= st_m + 1'b1;
          end else if (!pend) state <= S_FETCH;
        end
        default: state <= S_IDLE;
      endcase
    end
endmodule
