// inz_decoder: rebuilds a 16-byte payload from its INZ encoding.
//
// A length of 0 means an all-zero payload and a length of 16 means the bytes
// are the original payload (the encoder's escape).  Otherwise bits [1:0] give
// the index m of the most significant non-zero word, the rest is
// de-interleaved with stride m+1, and each word has its sign restored from
// bit 0 (uninvert_word in a3_pkg).  Bytes above the given length are ignored,
// since the channel does not carry them.
//
// The paper describes only the encoding; the decoder is its exact inverse,
// written here.  Interface: combinational, (bytes, nbytes) -> pay.
module inz_decoder
  import a3_pkg::*;
(
  input  logic [127:0] bytes,
  input  logic [4:0]   nbytes,
  output logic [127:0] pay
);
  logic [127:0] v;
  logic [1:0]   msw;
  logic [31:0]  e [4];

  always_comb begin
    // keep only the bytes that were sent
    for (int b = 0; b < 16; b++)
      v[8*b +: 8] = (5'(b) < nbytes) ? bytes[8*b +: 8] : 8'h00;
    msw = v[1:0];
    for (int k = 0; k < 4; k++) e[k] = '0;
    for (int i = 0; i < 32; i++)
      for (int k = 0; k < 4; k++)
        if (k <= int'(msw) && (2 + i*(int'(msw)+1) + k) < 128)
          e[k][i] = v[2 + i*(int'(msw)+1) + k];
    if (nbytes == 5'd0)
      pay = '0;
    else if (nbytes >= 5'd16)
      pay = bytes;
    else
      for (int k = 0; k < 4; k++)
        pay[32*k +: 32] = (k <= int'(msw)) ? uninvert_word(e[k]) : 32'd0;
  end
endmodule
