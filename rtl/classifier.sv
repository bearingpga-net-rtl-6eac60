// classifier: picks the fault class from the ten logits.
//
// The class is the index (0..9) of the largest signed logit; softmax is not
// needed for the decision and is left out, as in the published design.
// Equal logits resolve to the lower index. The 4-bit result is registered
// and held until the next decision; it drives the four indicator LEDs.
// Timing: valid_i in cycle t -> class_o and a one-cycle valid_o in t+1.
module classifier
  import bpn_pkg::fx16_t;
#(
  parameter int N_CLS = 10
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      valid_i,
  input  fx16_t                     logits_i [N_CLS],
  output logic [3:0]                class_o,
  output logic                      valid_o
);
  logic [3:0] best_idx;
  fx16_t      best_val;

  always_comb begin
    best_idx = '0;
    best_val = logits_i[0];
    for (int c = 1; c < N_CLS; c++) begin
      if (logits_i[c] > best_val) begin
        best_val = logits_i[c];
        best_idx = 4'(c);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      class_o <= '0;
      valid_o <= 1'b0;
    end else begin
      valid_o <= valid_i;
      if (valid_i) class_o <= best_idx;
    end
  end
endmodule
