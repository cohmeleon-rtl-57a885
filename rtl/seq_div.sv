// seq_div: unsigned restoring divider, one quotient bit per cycle.
//
// A 'start' pulse loads dividend and divisor; W cycles later 'done' pulses for
// one cycle with quotient = dividend / divisor (floor). Division by zero gives
// all ones. 'busy' is high from the cycle after start until done. A helper of
// the reward unit; the paper computes its ratios in software.
module seq_div #(
  parameter int unsigned W = 64
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

  logic [W-1:0]   d;
  logic [W:0]     rem;
  logic [W-1:0]   q;
  logic [$clog2(W+1)-1:0] cnt;

  logic [W:0] trial;
  assign trial = {rem[W-1:0], q[W-1]} - {1'b0, d};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; d <= '0; rem <= '0; q <= '0; cnt <= '0; quotient <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1; d <= divisor; rem <= '0; q <= dividend; cnt <= '0;
      end else if (busy) begin
        if (!trial[W]) begin
          rem <= trial;
          q   <= {q[W-2:0], 1'b1};
        end else begin
          rem <= {rem[W-1:0], q[W-1]};
          q   <= {q[W-2:0], 1'b0};
        end
        cnt <= cnt + 1'b1;
        if (int'(cnt) == int'(W) - 1) begin
          busy     <= 1'b0;
          done     <= 1'b1;
          if (d == '0)     quotient <= '1;
          else if (trial[W]) quotient <= {q[W-2:0], 1'b0};
          else             quotient <= {q[W-2:0], 1'b1};
        end
      end
    end
  end

endmodule
