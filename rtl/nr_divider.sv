// nr_divider: 18-bit Newton-Raphson reciprocal unit. After 'start' it
// computes 1/d for the U = 8 diagonal entries d of G (= diagonal of the stair
// matrix S), one after the other, and writes each result into the 1/diag(S)
// memory.
//
// Per entry (5 cycles, one 18x18 multiplier shared by the steps):
//   cycle 0  normalise: D = d * 2^9 (integer) is shifted left until its
//            leading one is at bit 11, giving m = d * 2^-e in [1,2) held with
//            16 fraction bits, so that 1/m lies in (1/2, 1]. The three bits
//            after the leading one index an 8-entry seed table,
//            x0 = 1/(1 + (i + 0.5)/8), which meets 0 < x0 < 2/m.
//   cycles 1-4 two Newton-Raphson iterations x_{k+1} = x_k (2 - m x_k)
//            (the paper's 2x_k - m x_k^2), two multiplications each, all
//            words 18 bit with 16 fraction bits, products truncated.
//   cycle 4  denormalise: 1/d = x_2 * 2^(9-p), p the position of the leading
//            one of D, rounded to 17 bits with 13 fraction bits and written.
// Results of 8 or more (d <= 1/8) saturate to the largest 17-bit value, as
// does a non-positive d, which a Gramian G = H^H H + s^2 I never has.
// Latency: 'we' (registered) shows the first result 6 cycles after the
// start cycle, then one result every 5 cycles; 'done' pulses together with
// the eighth write, 41 cycles after start. The method, the seed table, the range shift and the 18-bit width
// follow the paper; table size, iteration count and the 5-cycle schedule are
// this design's choices.
module nr_divider
  import smd_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic signed [G_W-1:0]  diag [U],
  output logic                   we,
  output logic [IDX_W-1:0]       waddr,
  output logic signed [SI_W-1:0] wdata,
  output logic                   busy,
  output logic                   done
);

  localparam int unsigned NR_F = 16;              // fraction bits of m and x
  localparam int unsigned D_W = G_W - 1;          // magnitude bits of a positive d

  // Seed table: round(2^16 / (1 + (i + 0.5)/8)) = round(2^20 / (17 + 2i)).
  function automatic logic [NR_W-1:0] seed(input logic [2:0] i);
    return NR_W'((2 ** 21 / (17 + 2 * int'(i)) + 1) / 2);
  endfunction

  logic [IDX_W-1:0]   idx;
  logic [2:0]         step;
  logic [NR_W-1:0]    m, x, y;
  logic [3:0]         lead;        // position of the leading one of D
  logic               bad;         // d <= 0

  // normalisation of the entry being loaded
  logic signed [G_W-1:0] d_in;
  logic [D_W-1:0]        d_mag, d_norm;
  logic [3:0]            d_lead;

  always_comb begin
    d_in   = diag[idx];
    d_mag  = d_in[D_W-1:0];
    d_lead = '0;
    for (int i = 0; i < D_W; i++) if (d_mag[i]) d_lead = 4'(i);
    d_norm = d_mag << (4'(D_W - 1) - d_lead);
  end

  // shared multiplier
  logic [NR_W-1:0]   mul_a, mul_b;
  logic [2*NR_W-1:0] mul_p;
  logic [NR_W-1:0]   mul_q;        // product with 16 fraction bits
  logic [NR_W-1:0]   two_minus;

  always_comb begin
    mul_a     = x;
    mul_b     = (step == 3'd1 || step == 3'd3) ? m : y;
    mul_p     = mul_a * mul_b;
    mul_q     = mul_p[NR_F +: NR_W];
    two_minus = NR_W'(2 << NR_F) - mul_q;
  end

  // denormalisation of the final estimate: 1/d = x * 2^(9-lead), 13 fraction bits
  logic [NR_W+8-1:0]     den_wide;
  logic signed [SI_W-1:0] den;

  always_comb begin
    den_wide = '0;
    if (lead >= 4'd6) begin
      den_wide = (NR_W+8)'(mul_q) + ((NR_W+8)'(1) << (lead - 4'd6) >> 1);
      den_wide = den_wide >> (lead - 4'd6);
    end else begin
      den_wide = (NR_W+8)'(mul_q) << (4'd6 - lead);
    end
    if (bad || den_wide > (NR_W+8)'(2 ** (SI_W - 1) - 1)) den = SI_W'(2 ** (SI_W - 1) - 1);
    else                                                 den = SI_W'(den_wide);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      we    <= 1'b0;
      waddr <= '0;
      wdata <= '0;
      idx   <= '0;
      step  <= '0;
      m     <= '0;
      x     <= '0;
      y     <= '0;
      lead  <= '0;
      bad   <= 1'b0;
    end else begin
      done <= 1'b0;
      we   <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          idx  <= '0;
          step <= '0;
        end
      end else begin
        unique case (step)
          3'd0: begin
            m    <= NR_W'(d_norm) << (NR_F - (D_W - 1));
            x    <= seed(d_norm[D_W-2 -: 3]);
            lead <= d_lead;
            bad  <= (d_in <= 0);
            step <= 3'd1;
          end
          3'd1, 3'd3: begin
            y    <= two_minus;
            step <= step + 3'd1;
          end
          3'd2: begin
            x    <= mul_q;
            step <= 3'd3;
          end
          default: begin  // step 4: last product, denormalise and write
            we    <= 1'b1;
            waddr <= idx;
            wdata <= den;
            step  <= 3'd0;
            idx   <= idx + 1'b1;
            if (idx == IDX_W'(U - 1)) begin
              busy <= 1'b0;
              done <= 1'b1;
            end
          end
        endcase
      end
    end
  end

endmodule
