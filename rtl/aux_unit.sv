// aux_unit: auxiliary digital unit - K lanes of comparator, adder and
// multiplier for the infrequent operations of a network (max-pooling,
// element-wise vector addition, element-wise vector multiplication).
//
// Each lane holds one P-bit word in the AUX register.  When in_valid is high
// the register is updated with the incoming K-word line (from main memory,
// via the loader):
//   AUX_COPY: r = x            AUX_MAX: r = max(r, x)
//   AUX_ADD : r = min(r + x, 2**P-1)       (saturating)
//   AUX_MUL : r = (r * x) >> P             (codes as fractions of 2**P)
// The register is read by the collector.  Timing: one line per cycle, result
// in the register the next cycle.  The operation set is the paper's; the
// register organisation, saturation and product scaling are this design's.
// Lint note: the low P bits of the product are the fraction dropped by the
// 2**-P scaling and are deliberately unused.
module aux_unit
  import acortex_pkg::*;
#(
  parameter int K = acortex_pkg::K_DEF,
  parameter int P = acortex_pkg::P_DEF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  aux_op_e              op,
  input  logic [K-1:0][P-1:0]  in_data,
  output logic [K-1:0][P-1:0]  r
);
  localparam logic [P:0] MAXV = (P+1)'((1 << P) - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r <= '0;
    end else if (in_valid) begin
      for (int k = 0; k < K; k++) begin
        logic [P:0]     sum;
        logic [2*P-1:0] prod;
        sum  = {1'b0, r[k]} + {1'b0, in_data[k]};
        prod = r[k] * in_data[k];
        unique case (op)
          AUX_COPY: r[k] <= in_data[k];
          AUX_MAX:  r[k] <= (in_data[k] > r[k]) ? in_data[k] : r[k];
          AUX_ADD:  r[k] <= (sum > MAXV) ? MAXV[P-1:0] : sum[P-1:0];
          AUX_MUL:  r[k] <= prod[2*P-1:P];
          default:  r[k] <= r[k];
        endcase
      end
    end
  end
endmodule
