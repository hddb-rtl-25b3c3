// xor_unbind_array: the ETC NSP's parallel XOR array (paper: 42 parallel
// bitwise XORs) that performs decode stage 1, HDC unbinding.
//
// A stored string HV is a bundle of symbol HVs each bound (XORed) to a
// position HV. XORing the stored HV with the position HV P_i again gives a
// noisy copy of the symbol HV at position i, which the dictionary core then
// recognises by associative search. This unit XORs LANES bits of the selected
// HV with LANES bits of the key HV per cycle, with one register stage. 42 bits
// are 14 TLC cells, so the HV streams through it in whole cells.
//
// Interface: in_valid/in_hv/in_key/in_tag -> out_valid/out_hv/out_tag one
// cycle later. No back-pressure: the caller issues only when it can accept.
module xor_unbind_array #(
  parameter int unsigned LANES = 42,
  parameter int unsigned TAG_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [LANES-1:0] in_hv,
  input  logic [LANES-1:0] in_key,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output logic [LANES-1:0] out_hv,
  output logic [TAG_W-1:0] out_tag
);
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_hv    <= '0;
      out_tag   <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_hv  <= in_hv ^ in_key;
        out_tag <= in_tag;
      end
    end
  end
endmodule
