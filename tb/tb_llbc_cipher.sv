// tb_llbc_cipher: checks the row-address cipher against the reference model.
// Full-size (21-bit) encrypt and decrypt engines are compared with the
// reference for random addresses and keys, decrypt(encrypt(x)) must return x,
// and an 8-bit instance must map all 256 addresses to 256 distinct outputs.
module tb_llbc_cipher;
  import tb_ref_pkg::*;

  int checks = 0, failures = 0;

  logic [63:0] keys;
  logic [20:0] x, y, z;
  logic [7:0]  sx, sy;

  llbc_cipher #(.DECRYPT(1'b0)) u_enc (.keys(keys), .din(x), .dout(y));
  llbc_cipher #(.DECRYPT(1'b1)) u_dec (.keys(keys), .din(y), .dout(z));
  llbc_cipher #(.ROW_BITS(8), .DECRYPT(1'b0)) u_small (.keys(keys), .din(sx), .dout(sy));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    bit seen [256];
    int distinct;
    logic [20:0] y_first;
    for (int t = 0; t < 400; t++) begin
      keys = {$urandom(), $urandom()};
      x    = 21'($urandom());
      #1;
      check(64'(y) == ref_cipher(64'(x), keys, 21, 4, 16, 0),
            $sformatf("enc x=%h keys=%h y=%h", x, keys, y));
      check(z == x, $sformatf("dec(enc(x)) x=%h z=%h", x, z));
    end
    // the mapping must depend on the key
    keys = 64'h0123_4567_89ab_cdef; x = 21'h12345; #1; y_first = y;
    keys = 64'h0123_4567_89ab_cdee; #1;
    check(y != y_first, "key change does not change the hash");
    // bijection on an 8-bit space
    for (int k = 0; k < 3; k++) begin
      keys = {$urandom(), $urandom()};
      foreach (seen[i]) seen[i] = 0;
      distinct = 0;
      for (int i = 0; i < 256; i++) begin
        sx = 8'(i); #1;
        if (!seen[sy]) distinct++;
        seen[sy] = 1;
        check(64'(sy) == ref_cipher(64'(sx), keys, 8, 4, 16, 0), "small enc vs reference");
      end
      check(distinct == 256, $sformatf("8-bit map not a permutation (%0d)", distinct));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
