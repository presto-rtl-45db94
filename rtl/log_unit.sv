// log_unit: feature normalisation by Log (dense value -> ln(value + offset) as float32).
//
// Every input word carries a signed 32-bit dense value x in bits [31:0]. The unit forms
// y = x + offset (offset = job parameter p0[31:0], signed; 1 gives the usual log(x+1)),
// clamps y < 1 to 1, and returns ln(y) as an IEEE-754 single in bits [31:0] of the output
// word. The paper says only that Log "normalizes dense features using a logarithmic
// function"; the integer input, the offset and the clamp are this design's choices.
//
// How: y = 2^e * z with 1 <= z < 2, so log2(y) = e + log2(z). The fraction bits of log2(z)
// are found one per pipeline stage by repeated squaring: z <- z^2; if z >= 2 the next bit
// is 1 and z <- z/2. log2(y) in Q6.FB is multiplied by ln(2) and the product normalised to
// a float (mantissa truncated). With FB = 24 the result is within a few units in the last
// place of the exact value.
//
// Timing: FB + 3 pipeline stages (27 by default), one element per cycle when the output
// is not stalled; `last` travels with its element. Streaming valid/ready in and out.
module log_unit
  import presto_pkg::*;
#(
  parameter int unsigned FB = 24           // fraction bits of log2 computed
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] offset,
  input  logic        in_valid,
  output logic        in_ready,
  input  elem_t       in_data,
  output logic        out_valid,
  input  logic        out_ready,
  output elem_t       out_data,
  output logic        idle
);
  localparam int unsigned NST = FB + 3;   // normalise, FB squarings, scale, float pack
  localparam int unsigned ZW  = 31;       // z in Q1.30

  logic [NST-1:0] v, lst;
  wire en = !v[NST-1] || out_ready;
  assign in_ready = en;
  wire take = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v   <= '0;
      lst <= '0;
    end else if (en) begin
      v   <= {v[NST-2:0], take};
      lst <= {lst[NST-2:0], in_data.last};
    end
  end

  // ---- stage 0: y = x + offset, clamp, leading-one position and normalisation ----
  logic [ZW-1:0] z   [FB+1];
  logic [5:0]    ex  [FB+1];
  logic [FB-1:0] fb  [FB+1];

  always_ff @(posedge clk) begin
    if (en) begin
      logic signed [33:0] y;
      logic [32:0]        yu, norm;
      logic [5:0]         e;
      y = 34'(signed'(in_data.data[31:0])) + 34'(signed'(offset));
      if (y < 34'sd1) yu = 33'd1;
      else            yu = y[32:0];
      e = '0;
      for (int i = 0; i < 33; i++) if (yu[i]) e = 6'(i);
      norm  = yu << (6'd32 - e);
      z[0]  <= norm[32:2];
      ex[0] <= e;
      fb[0] <= '0;
    end
  end

  // ---- stages 1..FB: one bit of log2(z) per stage ----
  for (genvar k = 0; k < FB; k++) begin : g_sq
    always_ff @(posedge clk) begin
      if (en) begin
        logic [2*ZW-1:0] zz;
        zz = z[k] * z[k];                  // Q2.60
        ex[k+1] <= ex[k];
        if (zz[2*ZW-1]) begin
          z[k+1]  <= zz[2*ZW-1 -: ZW];     // (z^2)/2 in Q1.30
          fb[k+1] <= fb[k] | (FB'(1) << (FB-1-k));
        end else begin
          z[k+1]  <= zz[2*ZW-2 -: ZW];
          fb[k+1] <= fb[k];
        end
      end
    end
  end

  // ---- stage FB+1: ln(y) = log2(y) * ln 2, fixed point Q6.(FB+32) ----
  localparam int unsigned PW = 6 + FB + 32;
  logic [PW-1:0] lnv;
  always_ff @(posedge clk) begin
    if (en) lnv <= {{32{1'b0}}, ex[FB], fb[FB]} * {{(6+FB){1'b0}}, LN2_Q32};
  end

  // ---- stage FB+2: pack as float32 ----
  logic [31:0] fout;
  always_ff @(posedge clk) begin
    if (en) begin
      int          p;
      logic [PW-1:0] sh;
      p = -1;
      for (int i = 0; i < PW; i++) if (lnv[i]) p = i;
      if (p < 0) begin
        fout <= 32'h0000_0000;
      end else begin
        sh   = lnv << (PW - 1 - p);          // leading one at bit PW-1
        fout <= {1'b0, 8'(p - (FB + 32) + 127), sh[PW-2 -: 23]};
      end
    end
  end

  assign out_valid     = v[NST-1];
  assign out_data.data = {32'd0, fout};
  assign out_data.last = lst[NST-1];
  assign idle          = (v == '0);
endmodule
