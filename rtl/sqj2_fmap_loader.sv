// sqj2_fmap_loader -- moves the input feature map from its stream into the
// line buffer and from the line buffer into the window banks.  It carries out
// three commands of the convolution loop:
//
//   LD_SHIFT  (shift_linebuf + init_linebuf_win): at the start of output row
//             ho the line buffer slides down by 'stride' rows.  Lines that
//             stay are only re-labelled by rotating linebuf_idx; of the new
//             lines all but the last are read in full, of the last only the
//             first K pixels.  Then the window of output pixel 0 is copied
//             into window bank 0.
//   LD_UPDATE (update_linebuf_win): the window moves right by 'stride'
//             pixels.  The pixels of the last line that the new window needs
//             are read from the stream, then the window is copied into the
//             bank given with the command (the one pixel_calc is not using).
//   LD_DRAIN  reads and drops what is left of the stream after the last row.
//
// Input pixels arrive row by row, pixel by pixel, channels innermost, one
// 8-bit value per beat.  The line buffer holds zero-padded rows: padding
// pixels are written as zero words without touching the stream, and stream
// pixels that no window uses (right of the last window, rows skipped by a
// stride larger than the kernel) are read and dropped.  Each command is
// started by a one-cycle 'cmd_valid' and ends with a one-cycle 'done'.
// A window copy moves one 16-value word per cycle: the line buffer's read
// data (latency one cycle) goes straight to 'win_wr_data', and the loader
// only sequences the addresses and the write enable.
//
// Reading only the new part of the last line during each window update, so
// that input traffic hides behind pixel_calc, follows the published HLS
// code; the stream format, skip logic and zero padding in the line buffer are
// this design's choices.
module sqj2_fmap_loader
  import sqj2_pkg::*;
#(
  parameter int unsigned LB_WORDS  = WIXCHI_MAX / CHI_NUM,
  parameter int unsigned WIN_WORDS = KXKXCHI_MAX / CHI_NUM
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  layer_cfg_t                    cfg,
  // command
  input  logic                          cmd_valid,
  input  ld_cmd_e                       cmd,
  input  logic                          first_row,   // LD_SHIFT of output row 0
  input  logic                          bank,        // LD_UPDATE target window bank
  output logic                          done,
  // input feature-map stream
  input  logic                          s_valid,
  output logic                          s_ready,
  input  data_t                         s_data,
  // line buffer
  output logic                          lb_reset_idx,
  output logic                          lb_rotate,
  output logic                          lb_wr_en,
  output logic [$clog2(K_MAX)-1:0]      lb_wr_line,
  output logic [$clog2(LB_WORDS)-1:0]   lb_wr_addr,
  output word_t                         lb_wr_data,
  output logic [CHI_NUM-1:0]            lb_wr_be,
  output logic [$clog2(K_MAX)-1:0]      lb_rd_line,
  output logic [$clog2(LB_WORDS)-1:0]   lb_rd_addr,
  input  word_t                         lb_rd_data,
  // window write port
  output logic                          win_wr_en,
  output logic                          win_wr_bank,
  output logic [$clog2(WIN_WORDS)-1:0]  win_wr_addr,
  output word_t                         win_wr_data
);
  localparam int unsigned BW = $clog2(CHI_NUM);

  typedef enum logic [2:0] {S_IDLE, S_ROT, S_LOAD, S_COPY, S_COPY_END, S_DRAIN} state_e;
  state_e state;

  logic [15:0] cw;            // words per pixel
  logic [3:0]  k, s;
  logic [15:0] wpn;           // padded columns used by the row of windows
  logic [3:0]  nnew;          // new lines on a shift
  logic [3:0]  rot_cnt;
  logic [15:0] row_base;      // padded input row of line 0
  logic [15:0] col_base;      // padded input column of the window's left edge
  logic [15:0] lb_pt;         // next column of the last line to be loaded
  logic        bank_q;
  // pixel loading
  logic [3:0]  j;             // logical line being loaded
  logic [15:0] pc, pc_end;    // padded column, last column of this line
  logic [15:0] ch;            // byte (pad: word) inside the pixel
  // stream position (unpadded)
  logic [15:0] pos_r, pos_c, pos_ch;
  // window copy
  logic [3:0]  ky, kx;
  logic [15:0] cwi, wcnt;
  logic        cp_v;
  logic [15:0] cp_a;

  logic signed [17:0] r, c;
  logic               is_pad, at_target, beat;

  assign cw   = cfg.chi / 16'(CHI_NUM);
  assign k    = cfg.kernel;
  assign s    = cfg.stride;
  assign wpn  = (cfg.w_out - 1) * 16'(s) + 16'(k);
  assign nnew = (s < k) ? s : k;

  assign r         = 18'(signed'({2'b0, row_base})) + 18'(j) - 18'(cfg.pad);
  assign c         = 18'(signed'({2'b0, pc})) - 18'(cfg.pad);
  assign is_pad    = (r < 0) || (r >= 18'(cfg.h_in)) || (c < 0) || (c >= 18'(cfg.w_in));
  assign at_target = (18'(pos_r) == r) && (18'(pos_c) == c);

  always_comb begin
    s_ready = 1'b0;
    if (state == S_LOAD && !is_pad) s_ready = 1'b1;   // skipped or stored
    if (state == S_DRAIN && pos_r != cfg.h_in) s_ready = 1'b1;
  end
  assign beat = s_valid && s_ready;

  // line-buffer write port
  always_comb begin
    lb_wr_en   = 1'b0;
    lb_wr_line = $clog2(K_MAX)'(j);
    lb_wr_addr = $clog2(LB_WORDS)'(pc * cw + (is_pad ? ch : (ch >> BW)));
    lb_wr_data = '0;
    lb_wr_be   = '1;
    if (state == S_LOAD) begin
      if (is_pad) begin
        lb_wr_en = 1'b1;
      end else begin
        lb_wr_en   = beat && at_target;
        lb_wr_data = {CHI_NUM{s_data}};
        lb_wr_be   = CHI_NUM'(1) << ch[BW-1:0];
      end
    end
  end

  assign lb_rd_line  = $clog2(K_MAX)'(ky);
  assign lb_rd_addr  = $clog2(LB_WORDS)'((col_base + 16'(kx)) * cw + cwi);
  assign win_wr_data = lb_rd_data;
  assign lb_reset_idx = (state == S_IDLE) && cmd_valid && (cmd == LD_SHIFT) && first_row;
  assign lb_rotate    = (state == S_ROT) && (rot_cnt != 0);

  // one pixel finished in S_LOAD
  logic pix_end;
  assign pix_end = (state == S_LOAD) &&
                   (is_pad ? (ch == cw - 1) : (beat && at_target && ch == cfg.chi - 1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      {rot_cnt, row_base, col_base, lb_pt, j, pc, pc_end, ch} <= '0;
      {pos_r, pos_c, pos_ch, ky, kx, cwi, wcnt} <= '0;
      {cp_v, cp_a, bank_q} <= '0;
    end else begin
      done <= 1'b0;
      // stream position advances on every accepted beat
      if (beat) begin
        if (pos_ch == cfg.chi - 1) begin
          pos_ch <= '0;
          if (pos_c == cfg.w_in - 1) begin
            pos_c <= '0;
            pos_r <= pos_r + 1;
          end else pos_c <= pos_c + 1;
        end else pos_ch <= pos_ch + 1;
      end
      // window copy write pipeline (line buffer read latency 1)
      cp_v <= (state == S_COPY);
      cp_a <= wcnt;

      case (state)
        S_IDLE: if (cmd_valid) begin
          unique case (cmd)
            LD_SHIFT: begin
              col_base <= '0;
              bank_q   <= 1'b0;
              ch       <= '0;
              pc       <= '0;
              if (first_row) begin
                row_base <= '0;
                {pos_r, pos_c, pos_ch} <= '0;
                rot_cnt  <= '0;
                j        <= '0;
                pc_end   <= (k == 1) ? 16'(k) - 1 : wpn - 1;
              end else begin
                row_base <= row_base + 16'(s);
                rot_cnt  <= nnew;
                j        <= k - nnew;
                pc_end   <= (k - nnew == k - 1) ? 16'(k) - 1 : wpn - 1;
              end
              state <= S_ROT;
            end
            LD_UPDATE: begin
              bank_q   <= bank;
              col_base <= col_base + 16'(s);
              j        <= k - 1;
              pc       <= lb_pt;
              pc_end   <= col_base + 16'(s) + 16'(k) - 1;
              ch       <= '0;
              state    <= S_LOAD;
            end
            default: state <= S_DRAIN;
          endcase
        end
        S_ROT: begin
          if (rot_cnt != 0) rot_cnt <= rot_cnt - 1;
          else state <= S_LOAD;
        end
        S_LOAD: begin
          if (is_pad) begin
            if (ch == cw - 1) ch <= '0; else ch <= ch + 1;
          end else if (beat && at_target) begin
            if (ch == cfg.chi - 1) ch <= '0; else ch <= ch + 1;
          end
          if (pix_end) begin
            if (pc == pc_end) begin
              if (j == k - 1) begin
                lb_pt <= pc + 1;
                state <= S_COPY;
                {ky, kx, cwi, wcnt} <= '0;
              end else begin
                j  <= j + 1;
                pc <= '0;
                pc_end <= (j + 1 == k - 1) ? 16'(k) - 1 : wpn - 1;
              end
            end else begin
              pc <= pc + 1;
            end
          end
        end
        S_COPY: begin
          wcnt <= wcnt + 1;
          if (cwi == cw - 1) begin
            cwi <= '0;
            if (kx == k - 1) begin
              kx <= '0;
              if (ky == k - 1) state <= S_COPY_END;
              else ky <= ky + 1;
            end else kx <= kx + 1;
          end else cwi <= cwi + 1;
        end
        S_COPY_END: begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        S_DRAIN: if (pos_r == cfg.h_in) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign win_wr_en   = cp_v;
  assign win_wr_bank = bank_q;
  assign win_wr_addr = $clog2(WIN_WORDS)'(cp_a);

  // The stream never runs past the pixel being loaded.
  a_stream_order: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_LOAD && !is_pad) |-> (18'(pos_r) < r) || (18'(pos_r) == r && 18'(pos_c) <= c));
endmodule
