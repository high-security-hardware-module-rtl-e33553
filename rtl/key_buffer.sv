// key_buffer: the eight key buffers KInput(0)..KInput(7).
//
// The host sends the private key as a stream of bytes. Each received byte is
// written to the next buffer, the first byte to KInput(0). When the last of
// the KEY_BYTES buffers has been written, `key_valid` rises (the cycle after
// the byte strobe) and stays high; further bytes are ignored until the
// controller pulses `clear`, which empties the buffers in one cycle.
//
// Splitting the key into eight byte-wide buffers feeding the PUF follows the
// published key-input path. Ignoring bytes while full and the absence of a
// timeout between bytes are this design's own choices.
module key_buffer #(
  parameter int unsigned KEY_BYTES = hsm_pkg::KEY_BYTES
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       byte_valid,
  input  logic [7:0] byte_data,
  input  logic       clear,
  output logic [7:0] kinput [KEY_BYTES],
  output logic       key_valid
);

  localparam int unsigned IW = $clog2(KEY_BYTES + 1);

  logic [IW-1:0] fill;   // number of buffers written

  assign key_valid = (fill == IW'(KEY_BYTES));

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      fill <= '0;
      for (int unsigned i = 0; i < KEY_BYTES; i++) kinput[i] <= '0;
    end else if (byte_valid && !key_valid) begin
      for (int unsigned i = 0; i < KEY_BYTES; i++)
        if (fill == IW'(i)) kinput[i] <= byte_data;
      fill <= fill + 1'b1;
    end
  end

endmodule
