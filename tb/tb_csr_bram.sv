// tb_csr_bram: host writes random beats, then both AXI read ports issue
// random bursts (1..16 beats) with random rready. Every beat, its rlast
// flag and the burst length are checked against the written contents.
module tb_csr_bram;
  import decomp_pkg::*;
  localparam int MEM_BEATS = 256;
  logic clk = 0, rst_n = 1;
  logic host_we;
  logic [7:0] host_waddr;
  logic [AXI_W-1:0] host_wdata;
  logic [1:0] ar_valid, ar_ready, r_valid, r_ready, r_last;
  logic [ADDR_W-1:0] ar_addr [2];
  logic [7:0] ar_len [2];
  logic [AXI_W-1:0] r_data [2];
  logic [AXI_W-1:0] model [MEM_BEATS];
  int checks = 0, failures = 0;

  csr_bram #(.MEM_BEATS(MEM_BEATS), .NPORTS(2)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // one master per port
  for (genvar p = 0; p < 2; p++) begin : g_m
    int  bursts_done = 0;
    initial begin
      ar_valid[p] = 0; r_ready[p] = 0; ar_addr[p] = '0; ar_len[p] = '0;
      wait (rst_n === 1'b1 && tb_csr_bram.loaded);
      for (int b = 0; b < 60; b++) begin
        int base, len, got;
        base = $urandom_range(0, MEM_BEATS - 1);
        len  = $urandom_range(0, 15);
        @(posedge clk); #1;
        ar_valid[p] = 1; ar_addr[p] = ADDR_W'(base * 16 + $urandom_range(0, 15)); ar_len[p] = 8'(len);
        forever begin @(negedge clk); if (ar_ready[p]) break; end
        @(posedge clk); #1 ar_valid[p] = 0;
        got = 0;
        while (got <= len) begin
          r_ready[p] = ($urandom_range(0, 2) != 0);
          @(negedge clk);
          if (r_valid[p] && r_ready[p]) begin
            chk(r_data[p] == model[(base + got) % MEM_BEATS], $sformatf("port %0d beat %0d data", p, got));
            chk(r_last[p] == (got == len), $sformatf("port %0d rlast", p));
            got++;
          end
          @(posedge clk); #1;
        end
        r_ready[p] = 0;
        bursts_done++;
      end
    end
  end

  bit loaded = 0;
  initial begin
    host_we = 0; host_waddr = 0; host_wdata = '0;
    #1 rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < MEM_BEATS; a++) begin
      @(posedge clk); #1;
      host_we = 1; host_waddr = 8'(a);
      host_wdata = {$urandom, $urandom, $urandom, $urandom};
      model[a] = host_wdata;
    end
    @(posedge clk); #1 host_we = 0;
    loaded = 1;
    wait (g_m[0].bursts_done == 60 && g_m[1].bursts_done == 60);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
