// tb_spin_mem: random writes and parallel reads on all ports of the
// replicated spin memory, compared with a bit-array model, including the
// hold behaviour of a port whose read enable is low.
module tb_spin_mem;
  localparam int DEPTH = 256, NRD = 10;
  logic clk = 0;
  logic we, wdata;
  logic [$clog2(DEPTH)-1:0] waddr;
  logic [NRD-1:0] re, rdata;
  logic [$clog2(DEPTH)-1:0] raddr [NRD];
  bit model [DEPTH];
  bit exp_q [NRD];
  int checks = 0, failures = 0;

  spin_mem #(.DEPTH(DEPTH), .NRD(NRD)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    we = 0; wdata = 0; waddr = 0; re = '0;
    foreach (raddr[i]) raddr[i] = '0;
    // initialise every entry
    for (int a = 0; a < DEPTH; a++) begin
      we = 1; waddr = a[7:0]; wdata = 1'($urandom); model[a] = wdata;
      @(posedge clk); #1;
    end
    we = 0;
    for (int cyc = 0; cyc < 2000; cyc++) begin
      we = 1'($urandom); waddr = 8'($urandom); wdata = 1'($urandom);
      for (int p = 0; p < NRD; p++) begin
        re[p] = (cyc == 0) || ($urandom_range(0, 3) != 0);
        raddr[p] = 8'($urandom);
        if (re[p]) exp_q[p] = model[raddr[p]];   // read-before-write
      end
      @(posedge clk); #1;
      if (we) model[waddr] = wdata;
      for (int p = 0; p < NRD; p++) begin
        checks++;
        if (rdata[p] !== exp_q[p]) begin failures++; $display("FAIL port %0d", p); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
