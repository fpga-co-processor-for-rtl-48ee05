// cf_smartmult -- multiplier for a small, range-limited multiplicand.
//
// Both the Decoder (k*q) and the Merger ((a-a_j)*Q_j and k*Q_j) multiply a
// wide operand x by a multiplicand m that is bounded by the size of a
// cluster. Instead of a full array multiplier this unit writes m in
// canonical signed-digit form (digits -1, 0, +1, no two neighbours
// non-zero) and adds up to NTERMS left-shifted copies of x with signs.
// For the default MULT_BITS = 4 (m = 0..15) at most three digits are
// non-zero, so the product needs left shifts plus one or two adders.
//
// The shift-and-add principle and the limited multiplicand follow the
// paper; the signed-digit recoding and the 4-bit limit are this design's
// choices (the paper gives neither the recoding nor the limit).
//
// Interface: purely combinational, p = m * x, truncated to PW bits.
module cf_smartmult #(
  parameter int unsigned MB = cf_pkg::MULT_BITS, // multiplicand width
  parameter int unsigned XW = 20,                // multiplier width
  parameter int unsigned PW = 24                 // product width
) (
  input  logic [MB-1:0] m,
  input  logic [XW-1:0] x,
  output logic [PW-1:0] p
);
  // A signed-digit form of an MB-bit number has MB+1 digits, at most
  // ceil((MB+1)/2) of them non-zero.
  localparam int unsigned NDIG   = MB + 1;
  localparam int unsigned NTERMS = (MB + 2) / 2;
  localparam int unsigned SH_W   = $clog2(NDIG + 1);

  logic [NDIG-1:0]  dig_nz;   // digit is non-zero
  logic [NDIG-1:0]  dig_neg;  // digit is -1
  logic [SH_W-1:0]  sh  [NTERMS];
  logic             neg [NTERMS];
  logic             en  [NTERMS];
  logic [PW-1:0]    term[NTERMS];

  // Canonical signed-digit recoding: scan from the LSB; an odd remainder
  // r yields digit 2-(r mod 4), i.e. +1 for r=...01 and -1 for r=...11.
  always_comb begin
    logic [MB+1:0] r;
    r = {2'b00, m};
    dig_nz  = '0;
    dig_neg = '0;
    for (int i = 0; i < NDIG; i++) begin
      if (r[0]) begin
        dig_nz[i] = 1'b1;
        if (r[1]) begin
          dig_neg[i] = 1'b1;
          r = r + 1'b1;
        end else begin
          r = r - 1'b1;
        end
      end
      r = r >> 1;
    end
  end

  // Gather the non-zero digits into NTERMS shift/sign slots.
  always_comb begin
    int unsigned t;
    t = 0;
    for (int j = 0; j < NTERMS; j++) begin
      sh[j]  = '0;
      neg[j] = 1'b0;
      en[j]  = 1'b0;
    end
    for (int i = 0; i < NDIG; i++) begin
      if (dig_nz[i] && t < NTERMS) begin
        sh[t]  = SH_W'(i);
        neg[t] = dig_neg[i];
        en[t]  = 1'b1;
        t      = t + 1;
      end
    end
  end

  // Shifted, signed copies of x, then the adder chain (NTERMS-1 adders).
  always_comb begin
    for (int j = 0; j < NTERMS; j++) begin
      logic [PW-1:0] shifted;
      shifted = PW'(x) << sh[j];
      if (!en[j])      term[j] = '0;
      else if (neg[j]) term[j] = -shifted;
      else             term[j] = shifted;
    end
  end

  always_comb begin
    p = term[0];
    for (int j = 1; j < NTERMS; j++) p = p + term[j];
  end

endmodule
