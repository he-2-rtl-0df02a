// nttu_allocator: divides the NTTUs between two parallel paths.
//
// In a ModUp the work splits into two paths: the limbs of the decomposed
// group that must be transformed before the basis conversion (path A) and
// the limbs produced by the basis conversion that must be transformed after
// it (path B); with the INTT-resident strategy the split is BConv->NTT
// against plain NTT. The number of limbs on each path changes with the
// ciphertext level. On `req` the allocator divides NUM_NTTU units into
// NHALF equal halves (ping-pong sets for consecutive groups) and, inside each
// half, gives path A
//     n_a = round(H * work_a / (work_a + work_b)),  clamped to [1, H-1]
// units (all units to one path if the other has no work), path B the rest.
// It reports per unit the path (role: 0 = A, 1 = B), the half and the index
// within its path, one cycle after `req` (`valid`).
// The paper states the allocator's purpose only; the proportional rule and
// the ping-pong halves are this design's own.
//
// Lint: the loop variable `w` is an int; only its low bits are used.
module nttu_allocator #(
  parameter int NUM_NTTU = 96,
  parameter int NHALF    = 2,
  parameter int WW       = 8,
  localparam int UW      = $clog2(NUM_NTTU + 1)
)(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          req,
  input  logic [WW-1:0] work_a,
  input  logic [WW-1:0] work_b,
  output logic          valid,
  output logic [UW-1:0] n_a,
  output logic [UW-1:0] n_b,
  output logic          role [NUM_NTTU],
  output logic [UW-1:0] idx  [NUM_NTTU],
  output logic [UW-1:0] half [NUM_NTTU]
);
  localparam int H = NUM_NTTU / NHALF;

  logic [UW-1:0] na_c;
  always_comb begin
    logic [WW+UW:0] num;
    logic [WW:0]    den;
    den = {1'b0, work_a} + {1'b0, work_b};
    num = (WW+UW+1)'(H) * (WW+UW+1)'(work_a) + (WW+UW+1)'(den >> 1);
    if (work_b == 0)      na_c = UW'(H);
    else if (work_a == 0) na_c = '0;
    else begin
      na_c = UW'(num / (WW+UW+1)'(den));
      if (na_c < 1)            na_c = 1;
      if (na_c > UW'(H - 1))   na_c = UW'(H - 1);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= 1'b0; n_a <= '0; n_b <= '0;
      for (int u = 0; u < NUM_NTTU; u++) begin
        role[u] <= 1'b0; idx[u] <= '0; half[u] <= '0;
      end
    end else begin
      valid <= req;
      if (req) begin
        n_a <= na_c;
        n_b <= UW'(H) - na_c;
        for (int u = 0; u < NUM_NTTU; u++) begin
          automatic int unsigned w = u % H;
          half[u] <= UW'(u / H);
          role[u] <= (UW'(w) >= na_c);
          idx[u]  <= (UW'(w) >= na_c) ? UW'(w) - na_c : UW'(w);
        end
      end
    end
  end
endmodule
