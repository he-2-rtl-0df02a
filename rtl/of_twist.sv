// of_twist: on-the-fly twiddle factor generator.
//
// Returns psi^e mod q for any exponent e in [0, 2^LOGE) without a full
// twiddle table. Two small power tables are kept:
//   lo[i] = psi^i                 for i < 2^LO
//   hi[j] = psi^(j * 2^LO)        for j < 2^(LOGE-LO)
// and psi^e = lo[e mod 2^LO] * hi[e >> LO] mod q, one modular
// multiplication per lookup. After `init` the tables are filled by repeated
// multiplication, one entry per cycle (2^LO + 2^(LOGE-LO) cycles), then
// `ready` rises; the tables must be regenerated whenever the limb (q, psi)
// changes. Lookups are combinational, NLOOK per cycle.
// The paper integrates the OF-Twist unit of ARK without describing it; this
// two-table split is the simplest form of that idea and is this design's own.
module of_twist
  import he2_pkg::*;
#(
  parameter int LOGE  = 17,          // exponents 0 .. 2N-1 for N = 2^16
  parameter int LO    = 8,
  parameter int NLOOK = 64
)(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            init,
  input  modulus_t        m,
  input  word_t           psi,
  output logic            ready,
  input  logic [LOGE-1:0] exp_i [NLOOK],
  output word_t           tw_o  [NLOOK]
);
  localparam int HI = LOGE - LO;

  word_t lo_tab [2**LO];
  word_t hi_tab [2**HI];

  typedef enum logic [1:0] {IDLE, FILL_LO, FILL_HI} st_t;
  st_t         st;
  logic [HI:0] idx;
  word_t       acc, step;
  modulus_t    mr;
  word_t       psir;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st    <= IDLE;
      ready <= 1'b0;
      idx   <= '0;
      acc   <= '0;
      step  <= '0;
      mr    <= '0;
      psir  <= '0;
    end else begin
      case (st)
        IDLE: if (init) begin
          st    <= FILL_LO;
          ready <= 1'b0;
          idx   <= '0;
          acc   <= word_t'(1);
          mr    <= m;
          psir  <= psi;
        end
        FILL_LO: begin
          lo_tab[idx[LO-1:0]] <= acc;
          acc <= mod_mul(acc, psir, mr);
          if (idx == (HI+1)'(2**LO - 1)) begin
            st   <= FILL_HI;
            idx  <= '0;
            // acc * psi = psi^(2^LO) is the step of the high table
            step <= mod_mul(acc, psir, mr);
            acc  <= word_t'(1);
          end else idx <= idx + 1'b1;
        end
        FILL_HI: begin
          hi_tab[idx[HI-1:0]] <= acc;
          acc <= mod_mul(acc, step, mr);
          if (idx == (HI+1)'(2**HI - 1)) begin
            st    <= IDLE;
            ready <= 1'b1;
          end else idx <= idx + 1'b1;
        end
        default: st <= IDLE;
      endcase
    end
  end

  always_comb
    for (int k = 0; k < NLOOK; k++)
      tw_o[k] = mod_mul(lo_tab[exp_i[k][LO-1:0]], hi_tab[exp_i[k][LOGE-1:LO]], mr);
endmodule
