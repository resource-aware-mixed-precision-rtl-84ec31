// qsoftmax: integer softmax over each row of the N x N attention-score
// matrix, used inside the self-attention block.
//
// Per row r: (1) read the N scores and find their maximum; (2) read them
// again, look up e_j = EXP[max - s_j] in a 2^BITS-entry table of 16-bit
// unsigned values and sum them; (3) write
//   A[r][j] = min(round(e_j * 2^(BITS-1) / sum), 2^(BITS-1) - 1)
// i.e. probabilities in signed BITS-bit integers with scale 2^-(BITS-1) and
// zero point 0.  Subtracting the maximum makes the table index non-negative
// and bounded, so the table (exp(-d * score_scale) * 65535, rounded) is
// loaded by the host through the prm bus (prm.sel == SEL) to match the
// trained score scale.  The paper does not say how its integer-only softmax
// is computed; this table-and-divide method is this design's own.
//
// Interface: pulse 'start'; scores come from a synchronous memory (one cycle
// latency); results are written one per cycle in phase (3); 'done' pulses
// with the last write.  Latency N*(3N + 2) + 2 cycles from start to done.
module qsoftmax
  import tf_pkg::*;
#(
  parameter int       BITS = 8,
  parameter int       N    = 12,
  parameter prm_sel_e SEL  = PRM_EXP,
  localparam int      AW   = clog2_1(N * N),
  localparam int      SUMW = 16 + clog2_1(N) + 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  prm_wr_t                prm,
  input  logic                   start,
  output logic                   busy,
  output logic                   done,
  output logic [AW-1:0]          s_addr,
  input  logic signed [BITS-1:0] s_data,
  output logic                   y_we,
  output logic [AW-1:0]          y_addr,
  output logic signed [BITS-1:0] y_data
);

  typedef enum logic [1:0] {S_IDLE, S_MAX, S_EXP, S_DIV} st_e;

  logic [15:0] lut [2**BITS];

  always_ff @(posedge clk) begin
    if (prm.en && prm.sel == SEL && int'(prm.addr) < 2**BITS)
      lut[BITS'(prm.addr)] <= prm.data[15:0];
  end

  st_e                   st;
  logic                  iss, v1, first1, last1;
  int unsigned           r, j, j1;
  logic signed [BITS-1:0] mx;
  logic [15:0]           e_arr [N];
  logic [SUMW-1:0]       sum;
  logic [BITS-1:0]       diff;
  logic [15:0]           e_now;
  logic signed [BITS-1:0] a_now;

  assign s_addr = AW'(r * N + j);
  assign busy   = (st != S_IDLE) | y_we;
  assign diff   = BITS'(mx - s_data);
  assign e_now  = lut[diff];

  always_comb begin
    logic [SUMW+BITS-1:0] num, q;
    num = ((SUMW+BITS)'(e_arr[j]) << (BITS - 1)) + (SUMW+BITS)'(sum >> 1);
    q   = (sum == '0) ? '0 : num / (SUMW+BITS)'(sum);
    if (q > (SUMW+BITS)'(2**(BITS-1) - 1)) a_now = BITS'(2**(BITS-1) - 1);
    else a_now = BITS'(q);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= S_IDLE;
      iss    <= 1'b0;
      r      <= 0;
      j      <= 0;
      j1     <= 0;
      v1     <= 1'b0;
      first1 <= 1'b0;
      last1  <= 1'b0;
      mx     <= '0;
      sum    <= '0;
      y_we   <= 1'b0;
      y_addr <= '0;
      y_data <= '0;
      done   <= 1'b0;
    end else begin
      v1     <= iss;
      first1 <= (j == 0);
      last1  <= (j == N - 1);
      j1     <= j;
      y_we   <= 1'b0;
      done   <= 1'b0;
      if (iss) begin
        if (j == N - 1) iss <= 1'b0;
        else j <= j + 1;
      end
      unique case (st)
        S_IDLE: if (start) begin
          st  <= S_MAX;
          r   <= 0;
          j   <= 0;
          iss <= 1'b1;
        end
        S_MAX: if (v1) begin
          if (first1 || s_data > mx) mx <= s_data;
          if (last1) begin
            st  <= S_EXP;
            j   <= 0;
            iss <= 1'b1;
          end
        end
        S_EXP: if (v1) begin
          e_arr[j1] <= e_now;
          sum       <= (first1 ? '0 : sum) + SUMW'(e_now);
          if (last1) begin
            st <= S_DIV;
            j  <= 0;
          end
        end
        S_DIV: begin
          y_we   <= 1'b1;
          y_addr <= AW'(r * N + j);
          y_data <= a_now;
          if (j == N - 1) begin
            j <= 0;
            if (r == N - 1) begin
              st   <= S_IDLE;
              r    <= 0;
              done <= 1'b1;
            end else begin
              r   <= r + 1;
              st  <= S_MAX;
              iss <= 1'b1;
            end
          end else begin
            j <= j + 1;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
