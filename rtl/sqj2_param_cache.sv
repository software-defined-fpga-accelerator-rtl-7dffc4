// sqj2_param_cache -- the weight and bias caches _weights[PAR_FACT][...] and
// _bias[PAR_FACT][Q_CHO_MAX], with the loader that fills them (init_caches).
//
// Output channel co belongs to PE co % PAR_FACT, where it is local channel
// q = co / PAR_FACT; every PE owns one bank of each cache so that all PEs
// read their weights in the same cycle.  A PE's weights for local channel q
// occupy words q*KKW .. q*KKW+KKW-1 of its bank, KKW = K*K*CHI / CHI_NUM, in
// the same (kernel row, kernel column, channel) order as the window.
//
// Loading: after 'start' the block reads from the parameter stream first the
// CHO biases (channel order), then for each output channel its K*K*CHI
// weights, one byte per beat; 'done' pulses when the last byte is stored.
// Reading: w_rd_addr selects the same word in every bank and bias_q the same
// bias in every bank; both return their data one cycle later.
//
// The per-PE banks follow the published design; the stream order and the
// byte-per-beat stream are this design's choice.
module sqj2_param_cache
  import sqj2_pkg::*;
#(
  parameter int unsigned WWORDS = Q_CHOXKXKXCHI_MAX / CHI_NUM,
  parameter int unsigned QCHO   = CHO_MAX / PAR_FACT
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // load control
  input  logic                        start,
  input  logic [15:0]                 cho,
  input  logic [15:0]                 kkchi,       // K*K*CHI, multiple of CHI_NUM
  output logic                        done,
  // parameter stream
  input  logic                        s_valid,
  output logic                        s_ready,
  input  data_t                       s_data,
  // read ports
  input  logic [$clog2(WWORDS)-1:0]   w_rd_addr,
  output word_t                       w_rd_data [PAR_FACT],
  input  logic [$clog2(QCHO)-1:0]     bias_q,
  output data_t                       bias_rd [PAR_FACT]
);
  localparam int unsigned PW = $clog2(PAR_FACT);
  localparam int unsigned BW = $clog2(CHI_NUM);


  typedef enum logic [1:0] {IDLE, BIAS, WGT} state_e;
  state_e state;

  logic [15:0]              co;        // output channel being loaded
  logic [PW-1:0]            pe;        // co % PAR_FACT
  logic [15:0]              q;         // co / PAR_FACT
  logic [15:0]              wi;        // word index inside the channel
  logic [BW-1:0]            bi;        // byte index inside the word
  logic [15:0]              kkw;       // words per channel
  logic [15:0]              wbase;     // q*kkw
  word_t                    asm_word;  // word being assembled
  logic                     beat;

  assign s_ready = (state == BIAS) || (state == WGT);
  assign beat    = s_valid && s_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= IDLE;
      done  <= 1'b0;
      {co, pe, q, wi, bi, kkw, wbase} <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        IDLE: if (start) begin
          state <= BIAS;
          {co, pe, q, wi, bi, wbase} <= '0;
          kkw <= kkchi / 16'(CHI_NUM);
        end
        BIAS: if (beat) begin
          if (co == cho - 1) begin
            state <= WGT;
            {co, pe, q} <= '0;
          end else begin
            co <= co + 1;
            pe <= pe + 1;
            if (pe == PW'(PAR_FACT - 1)) q <= q + 1;
          end
        end
        WGT: if (beat) begin
          bi <= bi + 1;
          if (bi == BW'(CHI_NUM - 1)) begin
            if (wi == kkw - 1) begin
              wi <= '0;
              if (co == cho - 1) begin
                state <= IDLE;
                done  <= 1'b1;
              end
              co <= co + 1;
              pe <= pe + 1;
              if (pe == PW'(PAR_FACT - 1)) begin
                q     <= q + 1;
                wbase <= wbase + kkw;
              end
            end else begin
              wi <= wi + 1;
            end
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  // word assembly
  always_ff @(posedge clk)
    if (state == WGT && beat) asm_word[bi*DW +: DW] <= s_data;

  // one weight RAM and one bias RAM per PE
  for (genvar p = 0; p < PAR_FACT; p++) begin : g_bank
    word_t wmem [WWORDS];
    data_t bmem [QCHO];
    always_ff @(posedge clk) begin
      if (state == BIAS && beat && pe == PW'(p)) bmem[q[$clog2(QCHO)-1:0]] <= s_data;
      if (state == WGT && beat && bi == BW'(CHI_NUM - 1) && pe == PW'(p))
        wmem[$clog2(WWORDS)'(wbase + wi)] <= {s_data, asm_word[(CHI_NUM-1)*DW-1:0]};
      w_rd_data[p] <= wmem[w_rd_addr];
      bias_rd[p]   <= bmem[bias_q];
    end
  end
endmodule
