// crc32_alu: the "CRC ALU" of the MAC. Combinational next-state function of
// the IEEE 802.3 CRC-32 (reflected polynomial 0xEDB88320) for one data byte,
// least significant bit first as it goes onto the wire.
//
// Interface: crc_in is the running CRC register (start with 32'hFFFFFFFF),
// data the byte of this clock cycle, crc_out the register after the byte.
// The FCS transmitted is ~crc, low byte first; a receiver that runs all frame
// bytes and the FCS through the function ends at 32'hDEBB20E3.
// The byte-wise formulation (eight unrolled bit steps) is this design's own;
// the paper only names an ALU that computes the checksum.
module crc32_alu (
  input  logic [31:0] crc_in,
  input  logic [7:0]  data,
  output logic [31:0] crc_out
);
  always_comb begin
    logic [31:0] c;
    c = crc_in;
    for (int i = 0; i < 8; i++) begin
      if (c[0] ^ data[i]) c = (c >> 1) ^ 32'hEDB88320;
      else                c = c >> 1;
    end
    crc_out = c;
  end
endmodule
