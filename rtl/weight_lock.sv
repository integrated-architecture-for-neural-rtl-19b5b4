// weight_lock: encrypts or decrypts the weight matrix with the PUF key.
//
// Every W-bit weight in column j is XORed with key bit j repeated W times. XOR is its own
// inverse, so the same block turns plain weights into the encrypted weights handed to the
// user (locking, with the key from the owner's device) and encrypted weights back into
// plain ones (unlocking, on the device whose PUF regenerates the same key). A different
// device gives a different key and therefore wrong weights. Combinational.
//
// The paper says that the PUF key encrypts the weights and that the device decrypts them
// with the key regenerated from the same challenge; it does not name a cipher, and the
// per-column XOR is this design's choice.
module weight_lock #(
  parameter int unsigned N = 16,
  parameter int unsigned M = 16,
  parameter int unsigned W = 2
) (
  input  logic [M-1:0] key,
  input  logic [W-1:0] w_in  [N][M],
  output logic [W-1:0] w_out [N][M]
);

  always_comb begin
    for (int i = 0; i < N; i++)
      for (int j = 0; j < M; j++)
        w_out[i][j] = w_in[i][j] ^ {W{key[j]}};
  end

endmodule
