// Significand multiplier: 12 x 12 unsigned radix-8 Booth multiplier that
// returns only the 13 most significant product bits.
//
// Partial-product generation. The multiplier b is recoded into five radix-8
// digits d_j = -4 b[3j+2] + 2 b[3j+1] + b[3j] + b[3j-1] (b[-1] = b[12..14] = 0),
// so d_0..d_3 lie in -4..4 and d_4 = b[11] is 0 or 1. Row j is |d_j| * a,
// picked from 0, a, 2a, 3a (one adder) and 4a, 14 bits wide, and negated,
// when d_j < 0, by a twos_comp_blk instead of the usual XOR-plus-LSB-sign-bit.
// Row j starts in column 3j. Sign extension uses the constant pattern
//   row 0: S S S in columns 14..16, ~S in column 17
//   row 1: ~S in 17, 1 1 in 18..19      row 2: ~S in 20, 1 1 in 21..22
//   row 3: ~S in 23                     row 4: 12 bits, always >= 0
// whose constants add up to 2^24, i.e. to zero modulo 2^24.
//
// Reduction. L1 compresses the five rows to two, S and C: a full-adder row on
// rows 0..2, then a 4:2 compressor row with rows 3 and 4. Nothing carries
// out of columns 0..3, so C is zero there. L2 keeps only the columns 11..23:
// a 7-bit carry generator finds the carry out of S + C over columns 4..10 and
// feeds it into a 13-bit hybrid carry-select adder over columns 11..23. The
// output is exactly bits [23:11] of a*b; the lower bits are never formed.
//
// Array shape, constants, row count and the L2 split follow the paper's
// partial-product figure; the particular compressor assignment of L1 is this
// design's choice (the paper says only that 5:2 and 4:2 compressors, full and
// half adders are used). Purely combinational.
module sig_mult #(
  parameter int unsigned W  = 12,
  localparam int unsigned PW = W + 1,
  localparam int unsigned RW = W + 2,        // width of one Booth row
  localparam int unsigned TW = 2 * W         // full product width
) (
  input  logic [W-1:0]  a,
  input  logic [W-1:0]  b,
  output logic [PW-1:0] prod
);
  localparam int unsigned ND = 4;            // signed digits d_0..d_3

  logic [RW-1:0] a1, a2, a3, a4;
  logic [W+2:0]  bx;                          // {b[14:12]=0, b, b[-1]=0}

  assign bx = {2'b00, b, 1'b0};
  assign a1 = RW'(a);
  assign a2 = RW'(a) << 1;
  assign a3 = RW'(a) + (RW'(a) << 1);
  assign a4 = RW'(a) << 2;

  logic [RW-1:0] mag [ND];
  logic [RW-1:0] row [ND];
  logic [ND-1:0] neg;

  for (genvar j = 0; j < ND; j++) begin : g_ppg
    logic [3:0] grp;     // b[3j+2], b[3j+1], b[3j], b[3j-1]
    logic [2:0] m;       // |d_j|

    assign grp = bx[3*j+3 -: 4];
    always_comb begin
      logic [2:0] pos;
      pos = 3'(grp[2]) * 3'd2 + 3'(grp[1]) + 3'(grp[0]);
      m   = grp[3] ? 3'd4 - pos : pos;
    end
    assign neg[j] = grp[3] & (m != 3'd0);

    always_comb begin
      unique case (m)
        3'd1:    mag[j] = a1;
        3'd2:    mag[j] = a2;
        3'd3:    mag[j] = a3;
        3'd4:    mag[j] = a4;
        default: mag[j] = '0;
      endcase
    end

    twos_comp_blk #(.W(RW)) u_tc (.a(mag[j]), .sel(neg[j]), .s(row[j]));
  end

  // ---- partial-product array, one TW-bit vector per row
  logic [TW-1:0] pp [5];

  always_comb begin
    pp[0] = TW'(row[0]);
    pp[0][RW+3 -: 4] = {~neg[0], neg[0], neg[0], neg[0]};
    pp[1] = TW'(row[1]) << 3;
    pp[1][RW+5 -: 3] = {2'b11, ~neg[1]};
    pp[2] = TW'(row[2]) << 6;
    pp[2][RW+8 -: 3] = {2'b11, ~neg[2]};
    pp[3] = TW'(row[3]) << 9;
    pp[3][TW-1] = ~neg[3];
    pp[4] = b[W-1] ? (TW'(a) << 12) : '0;
  end

  // ---- L1: full-adder row on rows 0..2, then 4:2 compressor row
  logic [TW-1:0] s1, c1, srow, crow;
  logic [TW:0]   cc;                          // 4:2 inter-column carries

  assign s1 = pp[0] ^ pp[1] ^ pp[2];
  assign c1 = ((pp[0] & pp[1]) | (pp[0] & pp[2]) | (pp[1] & pp[2])) << 1;

  for (genvar i = 0; i < TW; i++) begin : g_l1
    logic cy;
    compressor42 u_c42 (
      .x1(s1[i]), .x2(c1[i]), .x3(pp[3][i]), .x4(pp[4][i]),
      .cin(cc[i]), .sum(srow[i]), .carry(cy), .cout(cc[i+1])
    );
    if (i + 1 < TW) begin : g_c
      assign crow[i+1] = cy;
    end
  end
  assign crow[0] = 1'b0;
  assign cc[0]   = 1'b0;

  // ---- L2: carry generator over columns 4..10, final adder over 11..23
  logic cin_hi;

  cla_carry_gen #(.W(W - 5)) u_cgen (
    .a(srow[W-2:4]), .b(crow[W-2:4]), .cout(cin_hi)
  );

  hybrid_csel_adder #(.W(PW), .LW(6)) u_fadd (
    .a(srow[TW-1:W-1]), .b(crow[TW-1:W-1]), .cin(cin_hi), .sum(prod)
  );
endmodule
