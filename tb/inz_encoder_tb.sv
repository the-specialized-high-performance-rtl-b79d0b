// inz_encoder_tb: checks the INZ encoder against the worked example
// (words +103 and -53 encode to bytes 01 E3 59, five leading zero bytes of
// eight) and against a reference model written by output-bit position, for
// small, signed, zero and wide random payloads.
module inz_encoder_tb;
  import a3_pkg::*;
  logic [127:0] pay, bytes;
  logic [4:0] nbytes;
  logic raw;
  int checks = 0, failures = 0;

  inz_encoder dut (.pay(pay), .bytes(bytes), .nbytes(nbytes), .raw(raw));

  // reference: output bit p (p>=2) is bit (p-2)/n of word (p-2)%n
  function automatic void ref_enc(input logic [127:0] p, output logic [127:0] rb,
                                  output int rn);
    logic [31:0] w [4];
    int m, n, hi;
    logic [131:0] v;
    m = -1;
    for (int k = 0; k < 4; k++) begin
      w[k] = p[32*k +: 32];
      if (w[k] != 0) m = k;
    end
    if (m < 0) begin rb = '0; rn = 0; return; end
    n = m + 1;
    v = '0;
    v[1:0] = 2'(m);
    for (int q = 2; q < 2 + 32*n; q++) begin
      logic [31:0] s;
      s = w[(q-2)%n][31] ? ~w[(q-2)%n] : w[(q-2)%n];   // magnitude-like form
      // bit 0 of the encoded word is the sign; bit j>0 is s[j-1]
      v[q] = (((q-2)/n) == 0) ? w[(q-2)%n][31] : s[((q-2)/n)-1];
    end
    hi = 0;
    for (int q = 0; q < 132; q++) if (v[q]) hi = q;
    rn = hi/8 + 1;
    if (rn >= 16) begin rb = p; rn = 16; end
    else rb = v[127:0];
  endfunction

  task automatic check(input logic [127:0] p);
    logic [127:0] rb; int rn;
    pay = p;
    #1;
    ref_enc(p, rb, rn);
    checks++;
    if (nbytes != 5'(rn) || bytes != rb) begin
      failures++;
      $display("FAIL pay=%h got %0d/%h exp %0d/%h", p, nbytes, bytes, rn, rb);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // paper's example: word0 = +103, word1 = -53
    pay = {64'd0, 32'hFFFF_FFCB, 32'd103};
    #1;
    checks++;
    if (nbytes != 5'd3 || bytes != 128'h01E359) begin
      failures++;
      $display("FAIL example got %0d %h", nbytes, bytes);
    end
    check('0);
    check({96'd0, 32'd1});
    check({96'd0, 32'hFFFF_FFFF});
    check({32'h8000_0000, 96'd0});
    check({128{1'b1}});
    for (int t = 0; t < 2000; t++) begin
      logic [127:0] p;
      int sh;
      p = {$urandom, $urandom, $urandom, $urandom};
      sh = $urandom_range(31);
      for (int k = 0; k < 4; k++) begin
        logic signed [31:0] s;
        s = $signed(p[32*k +: 32]) >>> sh;
        if ($urandom_range(3) == 0) s = 0;
        p[32*k +: 32] = s;
      end
      check(p);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
