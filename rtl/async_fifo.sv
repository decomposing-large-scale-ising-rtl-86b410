// async_fifo: dual-clock FIFO between two unrelated clock domains.
//
// The write side (wclk) and the read side (rclk) each keep a binary pointer
// and its Gray-coded copy, one bit wider than the address so that full and
// empty can be told apart. Each Gray pointer crosses to the other domain
// through two flip-flops; since only one bit of a Gray count changes per
// step, the far side always sees a valid, possibly stale, pointer. Stale
// pointers only make the FIFO look fuller (write side) or emptier (read
// side) than it is, never the reverse, so no word is lost or read twice.
// Interface: ready/valid on both sides; out_data shows the head word while
// out_valid is high (first-word fall-through, combinational read of the
// storage array). A word written is visible to the reader two to three read
// clocks later. DEPTH must be a power of two.
// The decoupling of the generation stages from the link by dual-clock FIFOs
// follows the paper; the Gray-pointer scheme is this design's choice.
module async_fifo #(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned DEPTH = 64
) (
  input  logic             rst_n,
  // write domain
  input  logic             wclk,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  // read domain
  input  logic             rclk,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] rgray_w1, rgray_w2;   // read pointer seen by the writer
  logic [AW:0] wgray_r1, wgray_r2;   // write pointer seen by the reader

  function automatic logic [AW:0] bin2gray(logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // ---------------- write domain ----------------
  logic push;
  logic [AW:0] wbin_nx;
  assign in_ready = (wgray != {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});
  assign push     = in_valid && in_ready;
  assign wbin_nx  = wbin + (AW+1)'(push);

  always_ff @(posedge wclk) if (push) mem[wbin[AW-1:0]] <= in_data;

  always_ff @(posedge wclk or negedge rst_n) begin
    if (!rst_n) begin
      wbin <= '0; wgray <= '0; rgray_w1 <= '0; rgray_w2 <= '0;
    end else begin
      wbin <= wbin_nx; wgray <= bin2gray(wbin_nx);
      rgray_w1 <= rgray; rgray_w2 <= rgray_w1;
    end
  end

  // ---------------- read domain ----------------
  logic pop;
  logic [AW:0] rbin_nx;
  assign out_valid = (rgray != wgray_r2);
  assign out_data  = mem[rbin[AW-1:0]];
  assign pop       = out_valid && out_ready;
  assign rbin_nx   = rbin + (AW+1)'(pop);

  always_ff @(posedge rclk or negedge rst_n) begin
    if (!rst_n) begin
      rbin <= '0; rgray <= '0; wgray_r1 <= '0; wgray_r2 <= '0;
    end else begin
      rbin <= rbin_nx; rgray <= bin2gray(rbin_nx);
      wgray_r1 <= wgray; wgray_r2 <= wgray_r1;
    end
  end

  initial assert (DEPTH >= 4 && (1 << AW) == DEPTH) else $error("DEPTH must be a power of two >= 4");
endmodule
