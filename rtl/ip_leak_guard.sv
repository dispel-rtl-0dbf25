// ip_leak_guard -- IP-level policy of the AES bus wrapper against key leakage
// through the ciphertext.
//
// Each 32-bit word the wrapper is about to put on the bus (data_i) is compared
// with each 32-bit word of the secret key. If the word differs from any key
// word in fewer than MIN_HD bit positions (population count of the XOR below
// MIN_HD) it is taken to carry the key, possibly lightly masked, and the bus
// sees 0 instead; otherwise the word passes. This is the paper's IP-level
// policy for the AES (key[0]..key[5] against each 32-bit slice of the
// ciphertext, threshold 8), written once per word instead of once per slice.
//
// Purely combinational: data_o follows data_i in the same cycle, leak_o says
// the word was replaced. The paper's generated code mixes a registered and a
// combinational assignment for the bus output; the registered output stage
// belongs to the wrapper that instantiates this block, so none is added here.
module ip_leak_guard #(
  parameter int unsigned DW        = 32,
  parameter int unsigned KEY_WORDS = 6,   // 192-bit key: key[0]..key[5]
  parameter int unsigned MIN_HD    = 8
) (
  input  logic [DW-1:0]           data_i,
  input  logic [KEY_WORDS*DW-1:0] key_i,   // key word k = key_i[k*DW +: DW]
  output logic [DW-1:0]           data_o,
  output logic                    leak_o
);

  always_comb begin
    leak_o = 1'b0;
    for (int k = 0; k < KEY_WORDS; k++) begin
      if ($countones(data_i ^ key_i[k*DW +: DW]) < MIN_HD) leak_o = 1'b1;
    end
    data_o = leak_o ? '0 : data_i;
  end

endmodule
