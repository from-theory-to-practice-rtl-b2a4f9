// seq_divider: sequential signed-by-positive integer divider.
//
// Helper of the CTF solver. Computes quot = num / den, truncated toward zero,
// for a signed numerator and a positive denominator, one quotient bit per
// clock (restoring division on magnitudes). A start pulse loads the operands;
// done pulses NW clocks later with quot valid and held until the next start.
// A zero denominator gives the largest magnitude of the numerator's sign.
// The quotient variable declared inside the clocked process is a
// combinational temporary, not a register; a synthesis tool may note that it
// has no reset value.
module seq_divider #(
  parameter int unsigned NW = 100,   // numerator and quotient width
  parameter int unsigned DW = 64     // denominator width (unsigned)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic signed [NW-1:0] num,
  input  logic        [DW-1:0] den,
  output logic                 busy,
  output logic                 done,
  output logic signed [NW-1:0] quot
);

  localparam int unsigned CNTW = $clog2(NW + 1);

  logic [NW-1:0] n_mag, q_acc;
  logic [DW:0]   rem;
  logic [DW-1:0] d;
  logic          neg;
  logic [CNTW-1:0] cnt;
  logic [DW:0]   trial;

  always_comb trial = {rem[DW-1:0], n_mag[NW-1]} - {1'b0, d};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; cnt <= '0;
      n_mag <= '0; q_acc <= '0; rem <= '0; d <= '0; neg <= 1'b0; quot <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        n_mag <= num[NW-1] ? NW'(-num) : NW'(num);
        neg   <= num[NW-1];
        d     <= den;
        rem   <= '0;
        q_acc <= '0;
        cnt   <= CNTW'(NW);
        busy  <= 1'b1;
      end else if (busy) begin
        if (!trial[DW]) begin
          rem   <= trial;
          q_acc <= {q_acc[NW-2:0], 1'b1};
        end else begin
          rem   <= {rem[DW-1:0], n_mag[NW-1]};
          q_acc <= {q_acc[NW-2:0], 1'b0};
        end
        n_mag <= {n_mag[NW-2:0], 1'b0};
        cnt   <= cnt - 1'b1;
        if (cnt == CNTW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
          if (d == '0) quot <= neg ? {1'b1, {(NW-1){1'b0}}} : {1'b0, {(NW-1){1'b1}}};
          else begin
            logic [NW-1:0] qf;
            qf = (!trial[DW]) ? {q_acc[NW-2:0], 1'b1} : {q_acc[NW-2:0], 1'b0};
            quot <= neg ? -$signed(qf) : $signed(qf);
          end
        end
      end
    end
  end

endmodule
