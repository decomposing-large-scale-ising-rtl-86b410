// tb_gtu: breadth-first selection on clause-shaped instances.
// The instance is loaded into a csr_bram and read through a csr_row_reader.
// For many seeds and capacities the selected list (order included), its
// size and the membership bitmap are compared with a reference BFS. Banks
// alternate, and the other bank is checked to be left untouched. One
// variable belongs to no clause, so traversals that end with an empty queue
// occur as well as traversals that end at the capacity; both are counted.
module tb_gtu;
  import decomp_pkg::*;
  import tb_graph_pkg::*;
  localparam int SUB_N = 45, MEM_BEATS = 1024;
  localparam int CW = $clog2(SUB_N + 1);
  logic clk = 0, rst_n = 1;
  int checks = 0, failures = 0, n_full = 0, n_empty = 0;

  logic host_we;
  logic [9:0] host_waddr;
  logic [AXI_W-1:0] host_wdata;
  logic [1:0] ar_valid, ar_ready, r_valid, r_ready, r_last;
  logic [ADDR_W-1:0] ar_addr [2];
  logic [7:0] ar_len [2];
  logic [AXI_W-1:0] r_data [2];
  logic req_valid, req_ready, bt_valid, bt_ready;
  id_t req_row;
  row_beat_t beat;
  logic [15:0] beats_read;

  logic start, bank, busy, done;
  id_t seed;
  nspin_t n_vars;
  logic [CW-1:0] cap;
  logic [N_MAX-1:0] member;
  id_t list [2][SUB_N];
  logic [CW-1:0] count [2];

  csr_bram #(.MEM_BEATS(MEM_BEATS), .NPORTS(2)) u_mem (.*);
  assign ar_valid[1] = 1'b0; assign r_ready[1] = 1'b0;
  assign ar_addr[1] = '0; assign ar_len[1] = '0;

  csr_row_reader u_rd (
    .clk, .rst_n, .rowptr_base(32'h0), .edge_base(ADDR_W'(edge_base)),
    .req_valid, .req_ready, .req_row,
    .ar_valid(ar_valid[0]), .ar_ready(ar_ready[0]), .ar_addr(ar_addr[0]), .ar_len(ar_len[0]),
    .r_valid(r_valid[0]), .r_ready(r_ready[0]), .r_data(r_data[0]), .r_last(r_last[0]),
    .out_valid(bt_valid), .out_ready(bt_ready), .out_beat(beat), .beats_read);

  gtu #(.SUB_N(SUB_N)) dut (
    .clk, .rst_n, .start, .bank, .seed, .n_vars, .cap, .busy, .done, .member, .list, .count,
    .req_valid, .req_ready, .req_row, .in_valid(bt_valid), .in_ready(bt_ready), .in_beat(beat));

  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    int ref_list [$];
    id_t other [SUB_N];
    logic [CW-1:0] other_cnt;
    int cyc;
    start = 0; bank = 0; seed = '0; n_vars = '0; cap = '0;
    host_we = 0; host_waddr = '0; host_wdata = '0;
    make_instance(20, 91, 3, 4, 1);       // uf20-sized: 111 spins
    pack_csr();
    #1 rst_n = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    foreach (img[a]) begin
      host_we = 1; host_waddr = 10'(a); host_wdata = img[a];
      @(posedge clk); #1;
    end
    host_we = 0;
    n_vars = nspin_t'(n_vars_get());
    for (int it = 0; it < 40; it++) begin
      int s, c;
      s = (it % 10 == 9) ? n_vars_get() - 1 : $urandom_range(0, n_vars_get() - 1);
      c = (it % 3 == 0) ? SUB_N : $urandom_range(2, SUB_N);
      ref_bfs(s, c, ref_list);
      other = list[~bank]; other_cnt = count[~bank];
      seed = id_t'(s); cap = CW'(c);
      start = 1;
      @(posedge clk); #1 start = 0;
      cyc = 0;
      forever begin @(negedge clk); cyc++; if (done) break; end
      chk(int'(count[bank]) == ref_list.size(), $sformatf("it %0d count %0d exp %0d", it, count[bank], ref_list.size()));
      foreach (ref_list[k]) if (k < SUB_N) chk(int'(list[bank][k]) == ref_list[k], $sformatf("it %0d list[%0d]", it, k));
      for (int i = 0; i < n_spins; i++) begin
        bit in_ref;
        in_ref = 0;
        foreach (ref_list[k]) if (ref_list[k] == i) in_ref = 1;
        chk(member[i] == in_ref, $sformatf("it %0d member[%0d]", it, i));
      end
      chk(other_cnt == count[~bank] && other == list[~bank], "other bank untouched");
      if (ref_list.size() == c) n_full++; else n_empty++;
      @(posedge clk); #1;
      bank = ~bank;
    end
    chk(n_full > 0, "a traversal stopped at capacity");
    chk(n_empty > 0, "a traversal stopped with an empty queue");
    $display("capacity stops %0d, empty-queue stops %0d", n_full, n_empty);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int n_vars_get(); return tb_graph_pkg::n_vars; endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
