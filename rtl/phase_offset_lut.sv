// phase_offset_lut: phase offset table for the sideband demodulator CORDIC.
//
// Holds one phase offset per synchrotron-frequency bin, separately for the
// upper and the lower sideband. The read address is the harmonic m*f_s of the
// synchrotron frequency: the tuning word freq_syn_i times m, shifted right by
// ADDR_SHIFT and clamped to the last bin. At the defaults a bin is 2^7 tuning
// units wide (4.3 Hz at 144 MHz) and the 256 bins cover m*f_s up to 1.1 kHz.
// The offset compensates the phase response of the loop (cables and filter
// delays), which changes with f_s during the cycle.
//
// Interface: write port (we_i, wsb_i, waddr_i, wdata_i) loads an entry; the
// stored offset is the top 16 bits of a 32-bit phase (2^16 = one turn).
// offset_o follows the address inputs by two clocks (address register and
// registered read). Contents are not reset; they must be loaded before use.
// The paper gives the LUT, its addressing by m*f_s and the separate USB/LSB
// settings; the bin width, depth and word width are this design's.
module phase_offset_lut
  import lmbf_pkg::*;
#(
  parameter int unsigned ADDR_W     = 8,
  parameter int unsigned ADDR_SHIFT = 7
) (
  input  logic              clk,
  input  phase_t            freq_syn_i,
  input  logic [2:0]        m_i,
  input  sideband_e         sideband_i,
  input  logic              we_i,
  input  sideband_e         wsb_i,
  input  logic [ADDR_W-1:0] waddr_i,
  input  logic [15:0]       wdata_i,
  output logic [15:0]       offset_o
);
  logic [15:0] mem [2 << ADDR_W];
  logic [34:0] mfs;
  logic [ADDR_W:0] raddr;

  assign mfs = 35'(freq_syn_i) * 35'(m_i);

  always_ff @(posedge clk) begin
    raddr[ADDR_W] <= sideband_i;
    if ((mfs >> ADDR_SHIFT) > 35'((1 << ADDR_W) - 1))
      raddr[ADDR_W-1:0] <= '1;
    else
      raddr[ADDR_W-1:0] <= mfs[ADDR_SHIFT +: ADDR_W];
  end

  always_ff @(posedge clk) begin
    if (we_i) mem[{wsb_i, waddr_i}] <= wdata_i;
    offset_o <= mem[raddr];
  end
endmodule
