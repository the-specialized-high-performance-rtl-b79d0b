// inz_decoder_tb: feeds the decoder hand-built INZ byte strings (the worked
// example 01 E3 59, all-zero, raw 16-byte) and strings built by a reference
// encoder written independently in the testbench, and checks the payload
// comes back exactly.
module inz_decoder_tb;
  import a3_pkg::*;
  logic [127:0] bytes, pay;
  logic [4:0] nbytes;
  int checks = 0, failures = 0;

  inz_decoder dut (.bytes(bytes), .nbytes(nbytes), .pay(pay));

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
      s = w[(q-2)%n][31] ? ~w[(q-2)%n] : w[(q-2)%n];
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
    ref_enc(p, rb, rn);
    // garbage above the valid length must be ignored
    for (int b = rn; b < 16; b++) rb[8*b +: 8] = 8'($urandom);
    bytes = rb; nbytes = 5'(rn);
    #1;
    checks++;
    if (pay != p) begin
      failures++;
      $display("FAIL exp %h got %h (n=%0d)", p, pay, rn);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bytes = 128'h01E359; nbytes = 5'd3;
    #1;
    checks++;
    if (pay != {64'd0, 32'hFFFF_FFCB, 32'd103}) begin
      failures++;
      $display("FAIL example got %h", pay);
    end
    check('0);
    check({128{1'b1}});
    check({32'h8000_0000, 96'd0});
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
