// inz_encoder: interleaved non-zero (INZ) encoding of a 16-byte flit payload.
//
// The payload is four signed 32-bit words.  Each word has its sign moved to
// bit 0 and its other bits inverted when negative (invert_word in a3_pkg), so
// small magnitudes of either sign become small unsigned numbers.  Words 0 up
// to the most significant non-zero word (index m, 0..3) are then interleaved
// bit by bit with stride m+1 (bit i of word k lands at bit i*(m+1)+k), and m
// is appended as the two least significant bits.  The number of bytes up to
// the highest set bit is the encoded length; the leading zero bytes need not
// be sent.  All-zero payloads have length 0.
//
// Follows the paper: the word transform, the interleave, the 2-bit word index
// in the low bits (checked against its 8-byte worked example), and "raw data,
// 16 valid bytes" as the escape.  Own choice: the escape is taken whenever the
// encoding would need 16 or more bytes, not only more than 16, so that a
// length of 16 always means raw data and the decoder needs no extra flag.
//
// Interface: purely combinational, pay -> (bytes, nbytes).  The paper does
// the operation in one 2.8 GHz cycle; here it is one combinational stage.
module inz_encoder
  import a3_pkg::*;
(
  input  logic [127:0] pay,
  output logic [127:0] bytes,
  output logic [4:0]   nbytes,
  output logic         raw
);
  logic [31:0]  w [4];
  logic [31:0]  e [4];
  logic [1:0]   msw;
  logic         any;
  logic [129:0] v;
  logic [7:0]   top;   // index of highest set bit of v

  always_comb begin
    for (int k = 0; k < 4; k++) begin
      w[k] = pay[32*k +: 32];
      e[k] = invert_word(w[k]);
    end
    any = 1'b0;
    msw = 2'd0;
    for (int k = 0; k < 4; k++)
      if (w[k] != 32'd0) begin
        any = 1'b1;
        msw = 2'(k);
      end
    v = '0;
    v[1:0] = msw;
    for (int i = 0; i < 32; i++)
      for (int k = 0; k < 4; k++)
        if (k <= int'(msw))
          v[2 + i*(int'(msw)+1) + k] = e[k][i];
    top = '0;
    for (int b = 0; b < 130; b++)
      if (v[b]) top = 8'(b);
    raw = 1'b0;
    if (!any) begin
      nbytes = 5'd0;
      bytes  = '0;
    end else if ((top >> 3) >= 8'd15) begin
      // would need 16 or more bytes: send the original payload
      raw    = 1'b1;
      nbytes = 5'd16;
      bytes  = pay;
    end else begin
      nbytes = 5'((top >> 3) + 8'd1);
      bytes  = v[127:0];
    end
  end
endmodule
