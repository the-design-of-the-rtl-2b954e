// Reference CRC-32 (IEEE 802.3) of a list of 32-bit words taken in network
// byte order, written bit by bit independently of the RTL package.
function automatic logic [31:0] ref_crc32(input logic [31:0] w [$]);
  logic [31:0] c = 32'hFFFF_FFFF;
  foreach (w[i]) begin
    for (int byte_i = 0; byte_i < 4; byte_i++) begin
      logic [7:0] b = w[i][31 - 8*byte_i -: 8];
      for (int k = 0; k < 8; k++) begin
        logic fb = c[0] ^ b[k];
        c = {1'b0, c[31:1]};
        if (fb) c = c ^ 32'hEDB8_8320;
      end
    end
  end
  return ~c;
endfunction
