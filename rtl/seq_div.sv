// seq_div: unsigned restoring divider, one quotient bit per cycle.
//
// start loads num and den; NW cycles later done pulses for one cycle and quo
// holds floor(num/den). Division by zero gives an all-ones quotient. busy is
// high while dividing. A helper of the colour constancy node, which uses it
// to turn frame sums into channel gains between frames; the divider itself is
// a textbook structure chosen for this design (one subtract-and-shift step
// per cycle).
module seq_div #(
  parameter int unsigned NW = 36,
  parameter int unsigned DW = 29
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [NW-1:0] num,
  input  logic [DW-1:0] den,
  output logic          busy,
  output logic          done,
  output logic [NW-1:0] quo
);

  localparam int unsigned IW = $clog2(NW + 1);

  logic [DW-1:0] rem;            // partial remainder, always below d_q
  logic [DW-1:0] d_q;
  logic [IW-1:0] n_left;
  logic [DW+1:0] trial;          // {0, rem, next bit} - d_q; MSB set if negative

  assign trial = {1'b0, rem, quo[NW-1]} - {2'b00, d_q};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rem    <= '0;
      d_q    <= '0;
      quo    <= '0;
      n_left <= '0;
      busy   <= 1'b0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        rem    <= '0;
        d_q    <= den;
        quo    <= num;          // dividend shifts out of the top, quotient in
        n_left <= IW'(NW);
        busy   <= 1'b1;
      end else if (busy) begin
        if (!trial[DW+1]) begin
          rem <= trial[DW-1:0];
          quo <= {quo[NW-2:0], 1'b1};
        end else begin
          rem <= {rem[DW-2:0], quo[NW-1]};
          quo <= {quo[NW-2:0], 1'b0};
        end
        n_left <= n_left - 1'b1;
        if (n_left == IW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
