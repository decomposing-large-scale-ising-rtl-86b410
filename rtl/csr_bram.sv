// csr_bram: on-chip CSR store with AXI4 read-burst slave ports.
//
// In the on-chip memory mode the whole global problem (row pointers and
// neighbor entries) sits in block RAM instead of external DDR. The host
// writes it beat by beat through a simple write port before a run. Each of
// NPORTS read ports is an AXI4 INCR read slave (AR and R channels, 128-bit
// beats, ARSIZE fixed to the bus width): it accepts one address, returns
// arlen+1 consecutive beats, flags the final one with rlast and honours
// rready backpressure. Read data appear one cycle after the beat is
// fetched; with rready held high a burst streams one beat per cycle.
// Address bits below the beat size are ignored and the beat index wraps at
// MEM_BEATS. The paper names the memory and its AXI4 burst access; the
// port count, the host port and the depth are this design's choices
// (MEM_BEATS x 16 B = 64 KiB by default, within the 225 KB of BRAM).
module csr_bram
  import decomp_pkg::*;
#(
  parameter int unsigned MEM_BEATS = 4096,
  parameter int unsigned NPORTS    = 2
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // host load port
  input  logic                         host_we,
  input  logic [$clog2(MEM_BEATS)-1:0] host_waddr,
  input  logic [AXI_W-1:0]             host_wdata,
  // AXI4 read slaves
  input  logic [NPORTS-1:0]            ar_valid,
  output logic [NPORTS-1:0]            ar_ready,
  input  logic [ADDR_W-1:0]            ar_addr [NPORTS],
  input  logic [7:0]                   ar_len  [NPORTS],
  output logic [NPORTS-1:0]            r_valid,
  input  logic [NPORTS-1:0]            r_ready,
  output logic [AXI_W-1:0]             r_data  [NPORTS],
  output logic [NPORTS-1:0]            r_last
);
  localparam int unsigned MAW = $clog2(MEM_BEATS);
  localparam int unsigned LSB = $clog2(BEAT_B);

  logic [AXI_W-1:0] mem [MEM_BEATS];

  always_ff @(posedge clk) begin
    if (host_we) mem[host_waddr] <= host_wdata;
  end

  for (genvar p = 0; p < NPORTS; p++) begin : g_port
    logic           busy;
    logic [MAW-1:0] ptr;
    logic [7:0]     rem;
    logic           fetch;

    assign ar_ready[p] = !busy;
    assign fetch       = busy && (!r_valid[p] || r_ready[p]);

    always_ff @(posedge clk) begin
      if (fetch) r_data[p] <= mem[ptr];
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        busy <= 1'b0; ptr <= '0; rem <= '0;
        r_valid[p] <= 1'b0; r_last[p] <= 1'b0;
      end else begin
        if (r_valid[p] && r_ready[p]) r_valid[p] <= 1'b0;
        if (ar_valid[p] && ar_ready[p]) begin
          busy <= 1'b1;
          ptr  <= ar_addr[p][LSB +: MAW];
          rem  <= ar_len[p];
        end
        if (fetch) begin
          r_valid[p] <= 1'b1;
          r_last[p]  <= (rem == 8'd0);
          ptr        <= ptr + 1'b1;
          rem        <= rem - 1'b1;
          if (rem == 8'd0) busy <= 1'b0;
        end
      end
    end

    // A beat that is offered stays offered until it is taken (AXI rule).
    assert property (@(posedge clk) disable iff (!rst_n)
                     r_valid[p] && !r_ready[p] |=> r_valid[p] && $stable(r_data[p]));
  end
endmodule
