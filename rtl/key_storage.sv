// key_storage: ephemeral on-chip storage for the Data Encryption Key.
//
// The data owner's Data Encryption Key reaches the Shield wrapped in a Load
// Key; once unwrapped it is held here and fed to every AES and MAC engine of
// the Shield. The paper names this block and says the key is ephemeral; the
// rest is this design's choice: the key lives only in flip-flops, is cleared
// by reset and by `zeroize`, and every accepted load produces a one-cycle
// `key_update` pulse so that the AES engines re-run their key schedule and the
// engine sets drop buffered plaintext made under the old key.
//
// Interface: load_valid/load_key from the key unwrapping logic; key_valid is
// low until a key has been loaded. Timing: key and key_valid change one cycle
// after load_valid or zeroize; zeroize wins over a simultaneous load.
module key_storage #(
  parameter int KEY_BITS = 128
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                load_valid,
  input  logic [KEY_BITS-1:0] load_key,
  input  logic                zeroize,
  output logic [KEY_BITS-1:0] key,
  output logic                key_valid,
  output logic                key_update
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      key        <= '0;
      key_valid  <= 1'b0;
      key_update <= 1'b0;
    end else begin
      key_update <= 1'b0;
      if (zeroize) begin
        key        <= '0;
        key_valid  <= 1'b0;
        key_update <= 1'b1;
      end else if (load_valid) begin
        key        <= load_key;
        key_valid  <= 1'b1;
        key_update <= 1'b1;
      end
    end
  end
endmodule
