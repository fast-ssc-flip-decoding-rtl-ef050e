// crc_check: CRC check over the estimated information bits.
//
// Each trial ends by reading the estimated codeword P bits per cycle,
// together with a mask that marks the information positions. The masked
// bits are shifted, lowest position first, through a CRC register
// (MSB-first polynomial division, initial value 0). Once the whole frame,
// data followed by its appended CRC, has passed, the register is zero
// exactly when the CRC matches. The paper uses a 16-bit CRC but does not
// give its polynomial; the default POLY = 0x1021 (x^16+x^12+x^5+1, the
// CRC16 of 5G NR) and the initial value are this design's choices.
// Timing: 'start' clears the register; each cycle with 'en' absorbs one
// P-bit chunk; 'ok' reflects the register contents (one cycle after the
// last chunk).
module crc_check #(
  parameter int unsigned P    = 64,
  parameter int unsigned W    = 16,       // CRC length (paper: 16)
  parameter logic [W-1:0] POLY = 16'h1021
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic         en,
  input  logic [P-1:0] bits,
  input  logic [P-1:0] mask,
  output logic         ok,
  output logic [W-1:0] crc
);
  logic [W-1:0] nxt;

  always_comb begin
    logic fb;
    nxt = crc;
    fb  = 1'b0;
    for (int i = 0; i < P; i++)
      if (mask[i]) begin
        fb  = nxt[W-1] ^ bits[i];
        nxt = {nxt[W-2:0], 1'b0} ^ (fb ? POLY : '0);
      end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)     crc <= '0;
    else if (start) crc <= '0;
    else if (en)    crc <= nxt;

  assign ok = (crc == '0);
endmodule
