// cobi_link: serial interface between the decomposer and the COBI chip.
//
// Transmit: on tx_start the link sends one frame of 16-bit words,
//   word 0            : subproblem size k
//   words 1 .. k      : clamped fields h_0' .. h_(k-1)' (from the h FIFO)
//   next k(k-1)/2     : couplings J_rc, r < c, row by row (sign-extended)
// Each word leaves as ceil(16/LINK_W) chunks of LINK_W bits, least
// significant chunk first, one chunk per clock on ser_tx_data with
// ser_tx_valid; ser_tx_sof marks the first chunk of word 0. Words are
// pulled from the sources with ready/valid, so the line idles when a source
// has nothing. tx_done pulses when the last chunk has left.
// Receive: after the frame the chip answers with k spin bits, sent as
// ceil(k/LINK_W) chunks on ser_rx_data/ser_rx_valid, bit 0 first. When all
// have arrived spins_valid pulses with the spins packed in spins[k-1:0].
// The paper gives only a custom lightweight serial link that carries
// (J_local, h_local') out and s_sub back; no rate is given. The framing, the
// word size and LINK_W = 10 bits per clock are this design's choices.
module cobi_link
  import decomp_pkg::*;
#(
  parameter int unsigned SUB_N  = 45,
  parameter int unsigned LINK_W = 10,
  localparam int unsigned CW    = $clog2(SUB_N + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              tx_start,
  input  logic [CW-1:0]     tx_count,
  output logic              tx_busy,
  output logic              tx_done,
  // word sources
  input  logic              h_valid,
  output logic              h_ready,
  input  field_t            h_data,
  input  logic              j_valid,
  output logic              j_ready,
  input  wgt_t              j_data,
  // serial line
  output logic              ser_tx_valid,
  output logic              ser_tx_sof,
  output logic [LINK_W-1:0] ser_tx_data,
  input  logic              ser_rx_valid,
  input  logic [LINK_W-1:0] ser_rx_data,
  // returned spins
  output logic              spins_valid,
  output logic [SUB_N-1:0]  spins
);
  localparam int unsigned NCH  = (WORD_W + LINK_W - 1) / LINK_W;     // chunks per word
  localparam int unsigned SH   = NCH * LINK_W;
  localparam int unsigned NRX  = (SUB_N + LINK_W - 1) / LINK_W;
  localparam int unsigned JMAX = SUB_N * (SUB_N - 1) / 2;
  localparam int unsigned JW   = $clog2(JMAX + 1);
  localparam int unsigned CHW  = $clog2(NCH + 1);

  typedef enum logic [1:0] {T_IDLE, T_HDR, T_H, T_J} tstate_t;
  tstate_t          st;
  logic [CW-1:0]    k, hcnt;
  logic [JW-1:0]    jcnt, jtot;
  logic             loaded, first;
  logic [SH-1:0]    word;
  logic [CHW-1:0]   chunk;
  logic             need, take;
  logic [WORD_W-1:0] next_word;
  logic             src_valid;

  assign tx_busy = (st != T_IDLE) || loaded;
  assign need    = !loaded || (chunk == CHW'(NCH - 1));

  always_comb begin
    src_valid = 1'b0; next_word = '0; h_ready = 1'b0; j_ready = 1'b0;
    unique case (st)
      T_HDR: begin src_valid = 1'b1; next_word = WORD_W'(k); end
      T_H:   begin src_valid = h_valid; next_word = WORD_W'(h_data); h_ready = need; end
      T_J:   begin src_valid = j_valid; next_word = WORD_W'($signed(j_data)); j_ready = need; end
      default: ;
    endcase
  end
  assign take = need && src_valid && (st != T_IDLE);

  assign ser_tx_valid = loaded;
  assign ser_tx_data  = word[chunk*LINK_W +: LINK_W];
  assign ser_tx_sof   = loaded && first && (chunk == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= T_IDLE; k <= '0; hcnt <= '0; jcnt <= '0; jtot <= '0;
      loaded <= 1'b0; first <= 1'b0; word <= '0; chunk <= '0; tx_done <= 1'b0;
    end else begin
      tx_done <= 1'b0;
      if (loaded) begin
        chunk <= chunk + 1'b1;
        if (chunk == CHW'(NCH - 1)) begin
          loaded <= 1'b0;
          chunk  <= '0;
          if (st == T_IDLE) tx_done <= 1'b1;   // frame's last chunk
        end
      end
      if (take) begin
        loaded <= 1'b1;
        chunk  <= '0;
        word   <= SH'(next_word);
        first  <= (st == T_HDR);
      end
      unique case (st)
        T_IDLE: if (tx_start) begin
          k    <= tx_count;
          jtot <= JW'((32'(tx_count) * (32'(tx_count) - 32'd1)) >> 1);
          hcnt <= '0; jcnt <= '0;
          st   <= T_HDR;
        end
        T_HDR: if (take) st <= (k == '0) ? T_IDLE : T_H;
        T_H: if (take) begin
          hcnt <= hcnt + 1'b1;
          if (hcnt == k - 1'b1) st <= (jtot == '0) ? T_IDLE : T_J;
        end
        T_J: if (take) begin
          jcnt <= jcnt + 1'b1;
          if (jcnt == jtot - 1'b1) st <= T_IDLE;
        end
        default: st <= T_IDLE;
      endcase
    end
  end

  // ---------------- receive ----------------
  logic [NRX*LINK_W-1:0] rx_buf;
  logic [$clog2(NRX+1)-1:0] rx_cnt, rx_need;

  assign rx_need = $bits(rx_need)'((k + CW'(LINK_W - 1)) / CW'(LINK_W));
  assign spins   = rx_buf[SUB_N-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_buf <= '0; rx_cnt <= '0; spins_valid <= 1'b0;
    end else begin
      spins_valid <= 1'b0;
      if (tx_start) rx_cnt <= '0;
      else if (ser_rx_valid) begin
        rx_buf[rx_cnt*LINK_W +: LINK_W] <= ser_rx_data;
        if (rx_cnt + 1'b1 == rx_need) begin
          spins_valid <= 1'b1;
          rx_cnt      <= '0;
        end else begin
          rx_cnt <= rx_cnt + 1'b1;
        end
      end
    end
  end
endmodule
