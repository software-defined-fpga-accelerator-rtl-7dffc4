// sqj2_conv_ctrl -- sequencer of one accelerator invocation (one layer).
//
// After 'start' it first has the parameter caches loaded (init_caches), then
// runs the two loops of the published HLS code:
//
//   for ho in 0 .. h_out-1:                   (L_H_OUT)
//     shift the line buffer, fill window 0    (LD_SHIFT)
//     for wo in 0 .. w_out-1:                 (L_W_OUT)
//       in parallel: pixel_calc on window/out_pix bank wo%2,
//                    update the other window for pixel wo+1 (if any),
//                    write back out_pix bank (wo-1)%2 (if wo > 0)
//       wait until all three are done
//     write back the row's last pixel
//   drain the rest of the input stream, pulse 'done'
//
// The three units of one iteration work on opposite banks of the two double
// buffers, so computing, reading input and writing output overlap.  Every
// unit is started with a one-cycle pulse and answers with a one-cycle done.
// The loop structure follows the published design; the barrier at the end
// of every iteration is this design's reading of "executed concurrently".
module sqj2_conv_ctrl
  import sqj2_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] h_out,
  input  logic [15:0] w_out,
  output logic        busy,
  output logic        done,
  // parameter cache loader
  output logic        pl_start,
  input  logic        pl_done,
  // feature-map loader
  output logic        ld_valid,
  output ld_cmd_e     ld_cmd,
  output logic        ld_first_row,
  output logic        ld_bank,
  input  logic        ld_done,
  // pixel_calc
  output logic        pc_start,
  output logic        pc_bank,
  input  logic        pc_done,
  // write_back
  output logic        wb_start,
  output logic        wb_bank,
  input  logic        wb_done,
  // maxpool
  output logic        pool_clear
);
  typedef enum logic [3:0] {C_IDLE, C_PARAM, C_SHIFT, C_PIX, C_PIX_WAIT,
                            C_LAST_WB, C_DRAIN, C_DONE} state_e;
  state_e state;

  logic [15:0] ho, wo;
  logic        wait_pc, wait_ld, wait_wb;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= C_IDLE;
      {ho, wo, wait_pc, wait_ld, wait_wb} <= '0;
      {pl_start, ld_valid, ld_first_row, ld_bank, pc_start, pc_bank} <= '0;
      {wb_start, wb_bank, pool_clear, done} <= '0;
      ld_cmd <= LD_SHIFT;
    end else begin
      {pl_start, ld_valid, pc_start, wb_start, pool_clear, done} <= '0;
      case (state)
        C_IDLE: if (start) begin
          pl_start   <= 1'b1;
          pool_clear <= 1'b1;
          ho    <= '0;
          state <= C_PARAM;
        end
        C_PARAM: if (pl_done) begin
          state <= C_SHIFT;
          ld_valid     <= 1'b1;
          ld_cmd       <= LD_SHIFT;
          ld_first_row <= 1'b1;
        end
        C_SHIFT: if (ld_done) begin
          wo    <= '0;
          state <= C_PIX;
        end
        C_PIX: begin
          pc_start <= 1'b1;
          pc_bank  <= wo[0];
          wait_pc  <= 1'b1;
          if (wo + 1 < w_out) begin
            ld_valid <= 1'b1;
            ld_cmd   <= LD_UPDATE;
            ld_bank  <= ~wo[0];
            wait_ld  <= 1'b1;
          end
          if (wo != 0) begin
            wb_start <= 1'b1;
            wb_bank  <= ~wo[0];
            wait_wb  <= 1'b1;
          end
          state <= C_PIX_WAIT;
        end
        C_PIX_WAIT: begin
          if (pc_done) wait_pc <= 1'b0;
          if (ld_done) wait_ld <= 1'b0;
          if (wb_done) wait_wb <= 1'b0;
          if ((!wait_pc || pc_done) && (!wait_ld || ld_done) && (!wait_wb || wb_done)) begin
            if (wo + 1 < w_out) begin
              wo    <= wo + 1;
              state <= C_PIX;
            end else begin
              wb_start <= 1'b1;
              wb_bank  <= wo[0];
              state    <= C_LAST_WB;
            end
          end
        end
        C_LAST_WB: if (wb_done) begin
          if (ho + 1 < h_out) begin
            ho <= ho + 1;
            ld_valid     <= 1'b1;
            ld_cmd       <= LD_SHIFT;
            ld_first_row <= 1'b0;
            state <= C_SHIFT;
          end else begin
            ld_valid <= 1'b1;
            ld_cmd   <= LD_DRAIN;
            state    <= C_DRAIN;
          end
        end
        C_DRAIN: if (ld_done) state <= C_DONE;
        C_DONE: begin
          done  <= 1'b1;
          state <= C_IDLE;
        end
        default: state <= C_IDLE;
      endcase
    end
  end

  assign busy = (state != C_IDLE);

  a_no_start_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> state == C_IDLE);
endmodule
