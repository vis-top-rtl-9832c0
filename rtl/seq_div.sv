// seq_div: unsigned sequential (restoring) divider.
//
// Computes quotient = dividend / divisor, one quotient bit per cycle, most
// significant bit first. Used where the normalisation units cannot avoid a
// division (the softmax reciprocal, the layer-normalisation mean, second
// moment and inverse standard deviation). A divisor of zero gives an
// all-ones quotient.
//
// Timing: start is accepted when not busy; done pulses W+1 cycles later with
// the quotient valid from then until the next start.
module seq_div #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] dividend,
  input  logic [W-1:0] divisor,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] quotient
);
  logic [W-1:0]   d_q, n_q;
  logic [W:0]     rem;
  logic [$clog2(W+1)-1:0] cnt;
  logic [W:0]     trial;

  assign trial = {rem[W-1:0], n_q[W-1]} - {1'b0, d_q};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; cnt <= '0;
      d_q <= '0; n_q <= '0; rem <= '0; quotient <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        d_q  <= divisor;
        n_q  <= dividend;
        rem  <= '0;
        cnt  <= '0;
      end else if (busy) begin
        if (!trial[W]) begin
          rem      <= trial;
          quotient <= {quotient[W-2:0], 1'b1};
        end else begin
          rem      <= {rem[W-1:0], n_q[W-1]};
          quotient <= {quotient[W-2:0], 1'b0};
        end
        n_q <= {n_q[W-2:0], 1'b0};
        cnt <= cnt + 1'b1;
        if (cnt == ($clog2(W+1))'(W - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
