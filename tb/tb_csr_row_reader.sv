// tb_csr_row_reader: random CSR rows (0 to 300 entries, so some rows need
// several bursts and some are empty) are written into a csr_bram; every row
// is requested once, with random backpressure on the beat stream. Checked:
// the valid entries of each row in order, the last flag, the number of
// beats (exactly the beats spanned by the row, one for an empty row), burst
// lengths of at most 16 and no burst crossing a 16-beat boundary.
module tb_csr_row_reader;
  import decomp_pkg::*;
  import tb_graph_pkg::enc;
  localparam int NROWS = 40, MEM_BEATS = 2048;
  logic clk = 0, rst_n = 1;
  int checks = 0, failures = 0;

  logic host_we;
  logic [10:0] host_waddr;
  logic [AXI_W-1:0] host_wdata;
  logic [1:0] ar_valid, ar_ready, r_valid, r_ready, r_last;
  logic [ADDR_W-1:0] ar_addr [2];
  logic [7:0] ar_len [2];
  logic [AXI_W-1:0] r_data [2];

  logic req_valid, req_ready, out_valid, out_ready;
  id_t req_row;
  row_beat_t out_beat;
  logic [15:0] beats_read;
  logic [ADDR_W-1:0] rowptr_base, edge_base;

  csr_bram #(.MEM_BEATS(MEM_BEATS), .NPORTS(2)) u_mem (.*);
  assign ar_valid[1] = 1'b0; assign r_ready[1] = 1'b0;
  assign ar_addr[1] = '0; assign ar_len[1] = '0;

  csr_row_reader dut (
    .clk, .rst_n, .rowptr_base, .edge_base, .req_valid, .req_ready, .req_row,
    .ar_valid(ar_valid[0]), .ar_ready(ar_ready[0]), .ar_addr(ar_addr[0]), .ar_len(ar_len[0]),
    .r_valid(r_valid[0]), .r_ready(r_ready[0]), .r_data(r_data[0]), .r_last(r_last[0]),
    .out_valid, .out_ready, .out_beat, .beats_read);

  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  int rows_id [NROWS][$];
  int rows_w  [NROWS][$];
  int ptr [NROWS+1];
  logic [AXI_W-1:0] img [MEM_BEATS];

  // AXI address-channel rules
  always @(negedge clk) if (rst_n && ar_valid[0] && ar_ready[0] && ar_addr[0] >= edge_base) begin
    int beat;
    beat = (ar_addr[0] - edge_base) / 16;
    chk(ar_len[0] <= 15, "burst longer than 16 beats");
    chk((beat % 16) + ar_len[0] <= 15, "burst crosses a 16-beat boundary");
  end

  initial begin
    int nent, nb_ptr, first, last;
    req_valid = 0; req_row = '0; out_ready = 0; host_we = 0; host_waddr = '0; host_wdata = '0;
    // build rows
    nent = 0;
    for (int r = 0; r < NROWS; r++) begin
      int len;
      case ($urandom_range(0, 5))
        0: len = 0;
        1: len = $urandom_range(130, 300);
        default: len = $urandom_range(1, 40);
      endcase
      ptr[r] = nent;
      for (int x = 0; x < len; x++) begin
        rows_id[r].push_back($urandom_range(0, N_MAX - 1));
        rows_w[r].push_back($urandom_range(0, 31) - 16);
      end
      nent += len;
    end
    ptr[NROWS] = nent;
    nb_ptr = (4 * (NROWS + 1) + 15) / 16;
    rowptr_base = 32'h0;
    edge_base   = 32'(16 * nb_ptr);
    foreach (img[i]) img[i] = '0;
    for (int i = 0; i <= NROWS; i++) img[i / 4][32 * (i % 4) +: 32] = ptr[i];
    for (int r = 0; r < NROWS; r++)
      foreach (rows_id[r][x]) begin
        int idx;
        idx = ptr[r] + x;
        img[nb_ptr + idx / P][16 * (idx % P) +: 16] = enc(rows_id[r][x], rows_w[r][x]);
      end
    #1 rst_n = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int a = 0; a < MEM_BEATS; a++) begin
      host_we = 1; host_waddr = 11'(a); host_wdata = img[a];
      @(posedge clk); #1;
    end
    host_we = 0;
    // request every row
    for (int r = 0; r < NROWS; r++) begin
      int got [$];
      int nbeats;
      bit seen_last;
      req_valid = 1; req_row = id_t'(r);
      forever begin @(negedge clk); if (req_ready) break; end
      @(posedge clk); #1 req_valid = 0;
      nbeats = 0; seen_last = 0; got.delete();
      while (!seen_last) begin
        out_ready = ($urandom_range(0, 3) != 0);
        @(negedge clk);
        if (out_valid && out_ready) begin
          nbeats++;
          chk(out_beat.row == id_t'(r), "row index");
          for (int l = 0; l < P; l++)
            if (out_beat.lane_vld[l]) got.push_back(int'(out_beat.data[16*l +: 16]));
          seen_last = out_beat.last;
        end
        @(posedge clk); #1;
      end
      out_ready = 0;
      chk(got.size() == rows_id[r].size(), $sformatf("row %0d size %0d exp %0d", r, got.size(), rows_id[r].size()));
      foreach (rows_id[r][x])
        if (x < got.size()) chk(got[x] == int'(enc(rows_id[r][x], rows_w[r][x])), $sformatf("row %0d entry %0d got %h exp %h", r, x, got[x], enc(rows_id[r][x], rows_w[r][x])));
      if (rows_id[r].size() == 0) chk(nbeats == 1, "empty row gives one beat");
      else begin
        first = ptr[r] / P; last = (ptr[r+1] - 1) / P;
        chk(nbeats == last - first + 1, $sformatf("row %0d beats %0d exp %0d", r, nbeats, last - first + 1));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
