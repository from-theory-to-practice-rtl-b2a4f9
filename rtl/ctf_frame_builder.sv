// ctf_frame_builder: frame construction of the CTF block, eq. (28).
//
// Accumulates the m x m correlation matrix Q = sum_n y[n] y[n]^T over N_CTF
// sample vectors. Since every entry of y[n] is real, Q is real and symmetric.
// The paper then factors Q = V V^H to obtain a frame V; this design instead
// hands Q itself to the solver, because the columns of Q span the same space
// as any such V and the solver only needs that space (no eigendecomposition).
//
// Operation: a start pulse clears Q and arms the block. Each vector offered
// with in_valid while in_ready is high is captured; the block then spends
// M_CH*M_CH clocks adding y_i*y_j into entry (i,j), one multiply-accumulate
// per clock, and raises in_ready again. After N_CTF vectors it pulses done.
// The solver reads any entry through (rd_row, rd_col) -> rd_data,
// combinationally. One MAC per clock is this design's choice.
module ctf_frame_builder #(
  parameter int unsigned M_CH  = mwc_pkg::M_CH,
  parameter int unsigned N_CTF = mwc_pkg::N_CTF,
  parameter int unsigned SW    = mwc_pkg::SW,
  parameter int unsigned QW    = 2*SW + $clog2(N_CTF) + 1,
  localparam int unsigned CW = (M_CH > 1) ? $clog2(M_CH) : 1,
  localparam int unsigned NW = $clog2(N_CTF + 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [M_CH-1:0][SW-1:0]  in_vec,
  output logic                     busy,
  output logic                     done,
  input  logic [CW-1:0]            rd_row,
  input  logic [CW-1:0]            rd_col,
  output logic signed [QW-1:0]     rd_data
);

  typedef enum logic [1:0] {F_IDLE, F_CLEAR, F_WAIT, F_MAC} fstate_t;
  fstate_t st;

  logic signed [QW-1:0] q [M_CH*M_CH];
  logic [M_CH-1:0][SW-1:0] yv;
  logic [CW-1:0] i, j;
  logic [NW-1:0] nvec;

  assign in_ready = (st == F_WAIT);
  assign busy     = (st != F_IDLE);
  assign rd_data  = q[int'(rd_row) * M_CH + int'(rd_col)];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= F_IDLE;
      i    <= '0;
      j    <= '0;
      nvec <= '0;
      done <= 1'b0;
      yv   <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        F_IDLE: if (start) begin st <= F_CLEAR; i <= '0; j <= '0; end
        F_CLEAR: begin
          // one entry per clock
          q[int'(i) * M_CH + int'(j)] <= '0;
          if (j == CW'(M_CH-1)) begin
            j <= '0;
            if (i == CW'(M_CH-1)) begin i <= '0; st <= F_WAIT; nvec <= '0; end
            else i <= i + 1'b1;
          end else j <= j + 1'b1;
        end
        F_WAIT: if (in_valid) begin yv <= in_vec; st <= F_MAC; i <= '0; j <= '0; end
        F_MAC: begin
          q[int'(i) * M_CH + int'(j)] <= q[int'(i) * M_CH + int'(j)]
              + QW'($signed(yv[i]) * $signed(yv[j]));
          if (j == CW'(M_CH-1)) begin
            j <= '0;
            if (i == CW'(M_CH-1)) begin
              i <= '0;
              if (nvec == NW'(N_CTF-1)) begin st <= F_IDLE; done <= 1'b1; end
              else begin st <= F_WAIT; nvec <= nvec + 1'b1; end
            end else i <= i + 1'b1;
          end else j <= j + 1'b1;
        end
        default: st <= F_IDLE;
      endcase
    end
  end

endmodule
