// radix16_pe: four columns of eight radix-2 BFUs, one radix-16 pass.
//
// Sixteen coefficients enter per cycle. Column c pairs lanes i and
// i + (8 >> c), i.e. the lane distance halves from column to column, so the
// four columns perform four consecutive radix-2 stages of a decimation-in-
// frequency ordering. The iterative NTTU presents lanes so that this single
// wiring serves both directions: natural lane order for the forward NTT and
// bit-reversed lane order for the inverse NTT. Each column is registered, so
// a group leaves the PE 4 cycles after it entered; one group per cycle.
// The twiddles of all four columns are supplied together with the data and
// travel along the pipeline.
module radix16_pe
  import he2_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     mode,                 // 0: NTT, 1: INTT (held per pass)
  input  modulus_t m,
  input  logic     in_valid,
  input  word_t    in_data [16],
  input  word_t    tw      [4][8],       // twiddle of pair p in column c
  input  logic [31:0] in_tag,            // carried alongside (write address)
  output logic     out_valid,
  output word_t    out_data[16],
  output logic [31:0] out_tag
);
  // stage registers: s[0] is the input, s[c+1] the output of column c
  word_t       st   [5][16];
  word_t       tws  [4][4][8];   // twiddles travelling with stage c
  logic [4:0]  vld;
  logic [31:0] tag  [5];

  always_comb begin
    st[0]  = in_data;
    tws[0] = tw;
    vld[0] = in_valid;
    tag[0] = in_tag;
  end

  for (genvar c = 0; c < 4; c++) begin : g_col
    localparam int HALF = 8 >> c;
    word_t res [16];
    for (genvar p = 0; p < 8; p++) begin : g_bf
      localparam int LO = (p / HALF) * 2 * HALF + (p % HALF);
      localparam int HI = LO + HALF;
      bfu u_bfu (.mode(mode), .a(st[c][LO]), .b(st[c][HI]), .w(tws[c][c][p]),
                 .m(m), .x(res[LO]), .y(res[HI]));
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) vld[c+1] <= 1'b0;
      else        vld[c+1] <= vld[c];
    end
    always_ff @(posedge clk) begin
      st[c+1]  <= res;
      tag[c+1] <= tag[c];
    end
    if (c < 3) begin : g_twpipe
      always_ff @(posedge clk) tws[c+1] <= tws[c];
    end
  end

  assign out_valid = vld[4];
  assign out_data  = st[4];
  assign out_tag   = tag[4];
endmodule
