// tb_async_fifo: dual-clock FIFO with unrelated write (10 ns) and read
// (7.3 ns, later 23 ns) clocks. Words are checked in order against a queue
// model; occupancy may never exceed DEPTH; with the reader stopped exactly
// DEPTH words are taken; a word written into an empty FIFO must appear within
// four read clocks; random valid/ready patterns run in both clock ratios.
module tb_async_fifo;
  localparam int WIDTH = 16, DEPTH = 16;
  logic wclk = 0, rclk = 0, rst_n = 1;
  int checks = 0, failures = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [WIDTH-1:0] in_data, out_data;
  realtime rhalf = 3.65;

  async_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);
  always #5 wclk = ~wclk;
  always #(rhalf) rclk = ~rclk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic [WIDTH-1:0] q [$];
  int pushed = 0, popped = 0;
  int wprob = 100, rprob = 100;
  bit rstop = 1;

  // write side: drive after the edge, take the handshake at the falling edge
  always @(negedge wclk) if (rst_n) begin
    if (in_valid && in_ready) begin q.push_back(in_data); pushed++; end
    chk(pushed - popped <= DEPTH, "occupancy within DEPTH");
  end
  always @(posedge wclk) begin
    #1;
    if (!rst_n) in_valid <= 0;
    else if (in_valid && !in_ready) ;            // hold the word
    else begin
      in_valid <= ($urandom_range(99) < wprob);
      in_data  <= WIDTH'($urandom);
    end
  end
  // read side
  always @(negedge rclk) if (rst_n) begin
    if (out_valid) chk(q.size() > 0, "valid only when a word was written");
    if (out_valid && out_ready) begin
      chk(q.size() > 0 && out_data == q[0], $sformatf("data got %h exp %h", out_data, q.size() ? q[0] : 0));
      if (q.size()) void'(q.pop_front());
      popped++;
    end
  end
  always @(posedge rclk) begin #0.5 out_ready <= !rstop && ($urandom_range(99) < rprob); end

  initial begin
    int n;
    in_valid = 0; in_data = '0; out_ready = 0;
    #1 rst_n = 0;
    #20 rst_n = 1;
    // fill with the reader stopped: exactly DEPTH words accepted
    wprob = 100; rstop = 1;
    repeat (60) @(posedge wclk);
    chk(pushed == DEPTH && !in_ready, $sformatf("full after %0d words", pushed));
    // drain
    wprob = 0; rstop = 0; rprob = 100;
    repeat (80) @(posedge rclk);
    chk(popped == pushed && !out_valid, "drained");
    // latency of one word into an empty FIFO
    wprob = 100;
    @(negedge wclk); while (!(in_valid && in_ready)) @(negedge wclk);
    wprob = 0;
    @(posedge wclk);
    n = 0;
    while (!out_valid && n < 10) begin @(posedge rclk); n++; end
    chk(n <= 4, $sformatf("word visible after %0d read clocks", n));
    // random traffic, fast reader
    for (int r = 0; r < 6; r++) begin
      wprob = $urandom_range(100, 10); rprob = $urandom_range(100, 10);
      repeat (2000) @(posedge wclk);
    end
    // slow reader
    rhalf = 11.5;
    for (int r = 0; r < 6; r++) begin
      wprob = $urandom_range(100, 10); rprob = $urandom_range(100, 10);
      repeat (2000) @(posedge wclk);
    end
    wprob = 0; rprob = 100;
    repeat (200) @(posedge rclk);
    chk(popped == pushed && q.size() == 0, $sformatf("all %0d words delivered", pushed));
    $display("words %0d", pushed);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
