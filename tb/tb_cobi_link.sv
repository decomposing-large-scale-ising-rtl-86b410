// tb_cobi_link: frames of random size k (1..45) with random h' and J words
// are sent through the link into the behavioural chip model, which decodes
// them; every h' and J word it received is compared with what was offered,
// in order. The spins the model returns must come out of spins[] with one
// spins_valid pulse. Frames with always-valid sources must keep the line
// busy: ceil(16/LINK_W) clocks per word, plus two clocks of start-up and
// done latency, from tx_start to tx_done.
module tb_cobi_link;
  import decomp_pkg::*;
  localparam int SUB_N = 45, LINK_W = 10;
  localparam int CW = $clog2(SUB_N + 1);
  localparam int NCH = (16 + LINK_W - 1) / LINK_W;
  logic clk = 0, rst_n = 1;
  int checks = 0, failures = 0;

  logic tx_start, tx_busy, tx_done, h_valid, h_ready, j_valid, j_ready;
  logic [CW-1:0] tx_count;
  field_t h_data;
  wgt_t j_data;
  logic ser_tx_valid, ser_tx_sof, ser_rx_valid, spins_valid;
  logic [LINK_W-1:0] ser_tx_data, ser_rx_data;
  logic [SUB_N-1:0] spins;

  cobi_link #(.SUB_N(SUB_N), .LINK_W(LINK_W)) dut (.*);
  cobi_chip_model #(.SUB_N(SUB_N), .LINK_W(LINK_W), .ANNEAL_CYCLES(30)) chip (.*);

  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  int hq [$];
  int jq [$];
  int hsent [$];
  int jsent [$];
  bit gaps;

  // sources
  always @(negedge clk) begin
    if (h_valid && h_ready) begin hsent.push_back(hq.pop_front()); end
    if (j_valid && j_ready) begin jsent.push_back(jq.pop_front()); end
  end
  always @(posedge clk) begin
    #1;
    h_valid = (hq.size() > 0) && (!gaps || $urandom_range(0, 2) != 0);
    h_data  = (hq.size() > 0) ? field_t'(hq[0]) : '0;
    j_valid = (jq.size() > 0) && (!gaps || $urandom_range(0, 2) != 0);
    j_data  = (jq.size() > 0) ? wgt_t'(jq[0]) : '0;
  end

  int nspins_pulses = 0;
  always @(negedge clk) if (spins_valid) nspins_pulses++;

  initial begin
    tx_start = 0; tx_count = '0; h_valid = 0; j_valid = 0; h_data = '0; j_data = '0;
    #1 rst_n = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int f = 0; f < 12; f++) begin
      int k, cyc, nf, exp_cyc;
      k = (f == 0) ? SUB_N : (f == 1) ? 1 : $urandom_range(2, SUB_N);
      gaps = (f % 2 == 1);
      hq.delete(); jq.delete(); hsent.delete(); jsent.delete();
      for (int i = 0; i < k; i++) hq.push_back($urandom_range(0, 400) - 200);
      for (int i = 0; i < k * (k - 1) / 2; i++) jq.push_back($urandom_range(0, 30) - 15);
      nf = chip.frames;
      nspins_pulses = 0;
      @(posedge clk); #2;
      tx_start = 1; tx_count = CW'(k);
      @(posedge clk); #2 tx_start = 0;
      cyc = 1;
      forever begin @(negedge clk); if (tx_done) break; @(posedge clk); cyc++; end
      exp_cyc = (1 + k + k * (k - 1) / 2) * NCH + 2;
      if (!gaps) chk(cyc == exp_cyc, $sformatf("frame %0d: %0d clocks, expected %0d", f, cyc, exp_cyc));
      wait (chip.frames == nf + 1);
      chk(chip.k == k, "frame size");
      for (int i = 0; i < k; i++) chk(chip.hf[i] == hsent[i], $sformatf("h[%0d]", i));
      begin
        int n;
        n = 0;
        for (int r = 0; r < k; r++)
          for (int c = r + 1; c < k; c++) begin
            chk(chip.jm[r][c] == jsent[n], $sformatf("J[%0d][%0d]", r, c));
            n++;
          end
      end
      forever begin @(negedge clk); if (spins_valid) break; end
      for (int i = 0; i < k; i++) chk(spins[i] == chip.s[i], $sformatf("spin %0d", i));
      repeat (3) @(posedge clk);
      chk(nspins_pulses == 1, "one spins_valid per frame");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
