// Behavioural model (not synthesizable) of everything between the transmit
// and receive data ports of the acquisition core: transmit serializer, SFP
// laser, a fiber with NR discrete reflections, SFP receiver with limiting
// amplifier, and the 10 GS/s receive input that acts as a 1-bit slicer.
//
// Each transmitted bit lasts OVS samples. The received analogue level at
// sample p is the AC-coupled sum over reflections i of AMP[i]*(+1 or -1 for
// the bit sent DELAY[i] samples earlier) plus noise uniform in
// [-NOISE, NOISE]; the slicer outputs 1 when that level is above zero. With
// NOISE above the sum of the amplitudes the mean of the slicer output is
// linear in the optical level, which is what averaging over many traces
// relies on. DELAY[i] includes the fixed latency of transceivers and patch
// cords and must be at least 2*RX_W. Interface: rx_data is registered and
// updated every clock; rx_data bit 0 is the earliest sample.
module fiber_loop_model #(
  parameter int TX_W  = 16,
  parameter int OVS   = 4,
  parameter int NR    = 4,
  parameter int DELAY [NR] = '{200, 592, 1571, 4019},
  parameter int AMP   [NR] = '{100, 60, 60, 80},
  parameter int NOISE = 400,
  parameter int HIST  = 32768
) (
  input  logic                clk,
  input  logic [TX_W-1:0]     tx_data,
  output logic [OVS*TX_W-1:0] rx_data
);
  localparam int RX_W = OVS * TX_W;
  bit      hist [HIST];    // transmitted samples, ring buffer by sample count
  longint  t = 0;          // clock count

  initial begin
    for (int i = 0; i < HIST; i++) hist[i] = 0;
    rx_data = '0;
  end

  always @(posedge clk) begin
    for (int j = 0; j < RX_W; j++) begin
      longint p;
      int     level;
      p = t * RX_W + longint'(j);
      level = int'($urandom_range(2*NOISE)) - NOISE;
      for (int i = 0; i < NR; i++)
        level += hist[int'((p - longint'(DELAY[i]) + longint'(HIST)) % longint'(HIST))] ? AMP[i] : -AMP[i];
      rx_data[j] <= (level > 0);
    end
    for (int k = 0; k < TX_W; k++)
      for (int s = 0; s < OVS; s++)
        hist[int'((t * RX_W + longint'(k * OVS + s)) % longint'(HIST))] = tx_data[k];
    t++;
  end
endmodule
