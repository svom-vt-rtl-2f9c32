// pipe_divider -- fully pipelined unsigned restoring divider with overflow.
//
// Divides an NW-bit numerator by a DW-bit denominator and returns the
// QW low quotient bits, accepting one division per clock.  Stage 0 checks
// whether the quotient fits in QW bits (num >> QW < den; a zero denominator
// is also an overflow) and seeds the partial remainder with num >> QW.  Each
// of the QW following stages brings down one numerator bit, subtracts the
// denominator when it fits and records one quotient bit, most significant
// first.  A TAG_W sideband travels with each division.
//
// Timing: out_* appear QW+1 clocks after in_valid; throughput one per clock.
// When out_ovf is set, out_quo is meaningless.
// This is a generic helper of this design; it is used by pixel_calibrator.
module pipe_divider #(
  parameter int NW    = 32,
  parameter int DW    = 16,
  parameter int QW    = 17,
  parameter int TAG_W = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [NW-1:0]    in_num,
  input  logic [DW-1:0]    in_den,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output logic [QW-1:0]    out_quo,
  output logic             out_ovf,
  output logic [TAG_W-1:0] out_tag
);

  typedef struct packed {
    logic             valid;
    logic             ovf;
    logic [DW:0]      rem;    // partial remainder, always < den
    logic [QW-1:0]    low;    // numerator bits not yet brought down
    logic [QW-1:0]    quo;
    logic [DW-1:0]    den;
    logic [TAG_W-1:0] tag;
  } stage_t;

  stage_t st [QW+1];

  // Stage 0: overflow check and remainder seed.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st[0] <= '0;
    end else begin
      st[0].valid <= in_valid;
      st[0].ovf   <= (in_den == '0) || ((in_num >> QW) >= NW'(in_den));
      st[0].rem   <= (DW+1)'(in_num >> QW);
      st[0].low   <= in_num[QW-1:0];
      st[0].quo   <= '0;
      st[0].den   <= in_den;
      st[0].tag   <= in_tag;
    end
  end

  for (genvar s = 1; s <= QW; s++) begin : g_stage
    logic [DW+1:0] trial;
    always_comb trial = {st[s-1].rem, st[s-1].low[QW-s]};
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        st[s] <= '0;
      end else begin
        st[s] <= st[s-1];
        if (trial >= {2'b00, st[s-1].den}) begin
          st[s].rem        <= (DW+1)'(trial - {2'b00, st[s-1].den});
          st[s].quo[QW-s]  <= 1'b1;
        end else begin
          st[s].rem        <= (DW+1)'(trial);
        end
      end
    end
  end

  assign out_valid = st[QW].valid;
  assign out_quo   = st[QW].quo;
  assign out_ovf   = st[QW].ovf;
  assign out_tag   = st[QW].tag;

endmodule
