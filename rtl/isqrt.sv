// isqrt: sequential integer square root, one result bit per clock.
//
// start latches the operand (IN_W bits, unsigned); after IN_W/2 clocks done
// pulses for one cycle and root holds floor(sqrt(operand)) until the next
// start. Classic restoring digit-by-digit method on a remainder register.
module isqrt #(
  parameter int IN_W  = 36,
  localparam int OUT_W = (IN_W + 1) / 2
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             start,
  input  logic [IN_W-1:0]  operand,
  output logic             busy,
  output logic             done,
  output logic [OUT_W-1:0] root
);
  localparam int OPW = 2 * OUT_W;
  logic [OPW-1:0]           op;
  logic [OUT_W+1:0]         rem;     // remainder, below 2*q+1
  logic [OUT_W-1:0]         q;
  logic [$clog2(OUT_W+1):0] cnt;

  logic [OUT_W+3:0] trial;
  logic [OUT_W+3:0] rem_sh;
  always_comb begin
    rem_sh = {rem, op[OPW-1 -: 2]};
    trial  = {2'b00, q, 2'b01};
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      op <= '0; rem <= '0; q <= '0; cnt <= '0;
      busy <= 1'b0; done <= 1'b0; root <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        op   <= OPW'(operand);
        rem  <= '0;
        q    <= '0;
        cnt  <= ($bits(cnt))'(OUT_W);
        busy <= 1'b1;
      end else if (busy) begin
        op <= op << 2;
        if (rem_sh >= trial) begin
          rem <= (OUT_W+2)'(rem_sh - trial);
          q   <= {q[OUT_W-2:0], 1'b1};
        end else begin
          rem <= (OUT_W+2)'(rem_sh);
          q   <= {q[OUT_W-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
          root <= (rem_sh >= trial) ? {q[OUT_W-2:0], 1'b1} : {q[OUT_W-2:0], 1'b0};
        end
      end
    end
  end
endmodule
