// cobi_chip_model: behavioural stand-in for the 50-spin oscillator Ising chip.
//
// Not a model of the analog circuit: it only honours the link protocol of
// cobi_link and returns a low-energy answer. It collects LINK_W-bit chunks
// into 16-bit words (a chunk flagged sof starts a frame), reads the frame
// (size k, k fields h', then J_rc for r < c row by row), and minimises
// H = -sum J_rc s_r s_c - sum h_r s_r by greedy single-spin sweeps started
// from s_r = sign(h_r'), until no spin changes (at most 20 sweeps). After
// ANNEAL_CYCLES clocks, standing for the chip's fixed annealing time, it
// sends the k spins back as ceil(k/LINK_W) chunks, bit 0 first, one chunk
// per clock. The last frame and answer stay readable for testbenches.
module cobi_chip_model #(
  parameter int SUB_N         = 45,
  parameter int LINK_W        = 10,
  parameter int ANNEAL_CYCLES = 200
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              ser_tx_valid,
  input  logic              ser_tx_sof,
  input  logic [LINK_W-1:0] ser_tx_data,
  output logic              ser_rx_valid,
  output logic [LINK_W-1:0] ser_rx_data
);
  localparam int WORD_W = 16;
  localparam int NCH = (WORD_W + LINK_W - 1) / LINK_W;

  int k;
  int hf [SUB_N];
  int jm [SUB_N][SUB_N];
  bit s  [SUB_N];
  int frames = 0;
  int words_expected;
  int wcount;
  int ch;
  logic [NCH*LINK_W-1:0] wbuf;
  bit in_frame = 0;

  function automatic int sx16(logic [15:0] w); return int'($signed(w)); endfunction

  task automatic relax();
    bit changed;
    for (int r = 0; r < k; r++) s[r] = (hf[r] >= 0);
    for (int sweep = 0; sweep < 20; sweep++) begin
      changed = 0;
      for (int r = 0; r < k; r++) begin
        int f;
        bit ns;
        f = hf[r];
        for (int c = 0; c < k; c++) if (c != r) f += jm[r][c] * (s[c] ? 1 : -1);
        ns = (f > 0) ? 1'b1 : (f < 0) ? 1'b0 : s[r];
        if (ns != s[r]) begin s[r] = ns; changed = 1; end
      end
      if (!changed) break;
    end
  endtask

  task automatic reply();
    int n;
    repeat (ANNEAL_CYCLES) @(posedge clk);
    n = (k + LINK_W - 1) / LINK_W;
    for (int c = 0; c < n; c++) begin
      #1;
      ser_rx_valid = 1'b1;
      for (int b = 0; b < LINK_W; b++) ser_rx_data[b] = (c * LINK_W + b < k) ? s[c * LINK_W + b] : 1'b0;
      @(posedge clk);
    end
    #1 ser_rx_valid = 1'b0;
  endtask

  initial begin
    ser_rx_valid = 1'b0;
    ser_rx_data  = '0;
  end

  always @(posedge clk) begin
    if (rst_n && ser_tx_valid) begin
      if (ser_tx_sof) begin ch = 0; wcount = 0; in_frame = 1; end
      if (in_frame) begin
        wbuf[ch*LINK_W +: LINK_W] = ser_tx_data;
        ch++;
        if (ch == NCH) begin
          logic [15:0] w;
          int idx;
          w = wbuf[15:0];
          ch = 0;
          if (wcount == 0) begin
            k = int'(w);
            words_expected = 1 + k + k * (k - 1) / 2;
            for (int r = 0; r < SUB_N; r++) for (int c = 0; c < SUB_N; c++) jm[r][c] = 0;
          end else if (wcount <= k) begin
            hf[wcount - 1] = sx16(w);
          end else begin
            idx = wcount - 1 - k;
            for (int r = 0; r < k; r++) begin
              int rowlen;
              rowlen = k - 1 - r;
              if (idx < rowlen) begin
                jm[r][r + 1 + idx] = sx16(w); jm[r + 1 + idx][r] = sx16(w);
                break;
              end
              idx -= rowlen;
            end
          end
          wcount++;
          if (wcount == words_expected) begin
            in_frame = 0;
            frames++;
            relax();
            fork reply(); join_none
          end
        end
      end
    end
  end
endmodule
