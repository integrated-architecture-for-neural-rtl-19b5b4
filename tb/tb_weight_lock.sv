// tb_weight_lock: random 16x16 2-bit weights and keys; checks every encrypted weight
// against w XOR (key bit of its column, twice), that encrypting twice gives the plain
// weights back, and that a different key does not.
module tb_weight_lock;
  int checks = 0, failures = 0;
  logic [15:0] key, key2;
  logic [1:0] w [16][16];
  logic [1:0] e [16][16];
  logic [1:0] d [16][16];
  logic [1:0] bad [16][16];

  weight_lock #(.N(16), .M(16), .W(2)) u_enc (.key(key),  .w_in(w), .w_out(e));
  weight_lock #(.N(16), .M(16), .W(2)) u_dec (.key(key),  .w_in(e), .w_out(d));
  weight_lock #(.N(16), .M(16), .W(2)) u_bad (.key(key2), .w_in(e), .w_out(bad));

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int t = 0; t < 5; t++) begin
      int diff;
      key = 16'($urandom());
      key2 = key ^ 16'(1 << (t * 3));
      for (int i = 0; i < 16; i++) for (int j = 0; j < 16; j++) w[i][j] = 2'($urandom());
      #1;
      diff = 0;
      for (int i = 0; i < 16; i++)
        for (int j = 0; j < 16; j++) begin
          checks++;
          if (e[i][j] != (w[i][j] ^ (key[j] ? 2'b11 : 2'b00)) || d[i][j] != w[i][j]) begin
            failures++;
            $display("FAIL (%0d,%0d) w=%0d e=%0d d=%0d key=%h", i, j, w[i][j], e[i][j], d[i][j], key);
          end
          if (bad[i][j] != w[i][j]) diff++;
        end
      checks++;
      if (diff != 16) begin failures++; $display("FAIL wrong key changed %0d weights", diff); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
