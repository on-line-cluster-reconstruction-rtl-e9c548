// async_fifo: dual-clock FIFO that carries ADC samples into the faster
// reconstruction clock domain.
//
// The reconstruction is serial and spends more than one cycle on some
// electrodes, and a whole pass over the cluster table after each frame. The
// paper answers this with a large FIFO and a "frequency FIFO"; here that is a
// dual-clock FIFO so the reconstruction can run on a faster clock than the
// ADC. Structure (this design's choice): a DEPTH-word memory, binary read and
// write pointers one bit wider than the address, Gray-coded copies of them
// passed through two-flop synchronisers to the other side.
//
// Write side (wclk): wvalid/wready handshake, a word is written when both are 1.
// Read side (rclk): first-word fall-through; rdata is the head word while
// rvalid is 1, and it is removed on a cycle with rvalid and rready both 1.
// Flags are conservative: wready and rvalid react to the other side after two
// to three cycles of the other clock.
module async_fifo #(
  parameter int unsigned WIDTH = 12,
  parameter int unsigned DEPTH = 1024   // power of two
) (
  input  logic             wclk,
  input  logic             wrst_n,
  input  logic             wvalid,
  output logic             wready,
  input  logic [WIDTH-1:0] wdata,

  input  logic             rclk,
  input  logic             rrst_n,
  output logic             rvalid,
  input  logic             rready,
  output logic [WIDTH-1:0] rdata
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];

  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] rgray_w1, rgray_w2;  // read pointer seen in the write domain
  logic [AW:0] wgray_r1, wgray_r2;  // write pointer seen in the read domain

  function automatic logic [AW:0] bin2gray(logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // ---------------- write domain ----------------
  logic [AW:0] wbin_next;
  assign wbin_next = wbin + (AW+1)'(1);
  // Full when the write pointer is one lap ahead: top two Gray bits differ.
  assign wready = (wgray != {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin     <= '0;
      wgray    <= '0;
      rgray_w1 <= '0;
      rgray_w2 <= '0;
    end else begin
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
      if (wvalid && wready) begin
        wbin  <= wbin_next;
        wgray <= bin2gray(wbin_next);
      end
    end
  end

  always_ff @(posedge wclk) begin
    if (wvalid && wready) mem[wbin[AW-1:0]] <= wdata;
  end

  // ---------------- read domain ----------------
  logic [AW:0] rbin_next;
  assign rbin_next = rbin + (AW+1)'(1);
  assign rvalid = (rgray != wgray_r2);
  assign rdata  = mem[rbin[AW-1:0]];

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin     <= '0;
      rgray    <= '0;
      wgray_r1 <= '0;
      wgray_r2 <= '0;
    end else begin
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
      if (rvalid && rready) begin
        rbin  <= rbin_next;
        rgray <= bin2gray(rbin_next);
      end
    end
  end

  initial begin
    assert (DEPTH >= 4 && (1 << AW) == DEPTH)
      else $error("async_fifo: DEPTH must be a power of two >= 4");
  end

endmodule
