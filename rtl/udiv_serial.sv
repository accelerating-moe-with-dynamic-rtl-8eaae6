// udiv_serial: unsigned restoring divider, one quotient bit per cycle.
//
// Used by the hub memory manager to split a multimem offset into the
// algebraic block index (quotient) and the offset inside the block
// (remainder); the block size is a runtime value and need not be a power of
// two. start loads the operands; done pulses W cycles later with quotient
// and remainder valid until the next start. A zero divisor gives an
// all-ones quotient.
module udiv_serial #(
  parameter int unsigned W = 48
)(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] dividend,
  input  logic [W-1:0] divisor,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] quotient,
  output logic [W-1:0] remainder
);
  logic [$clog2(W+1)-1:0] n;
  logic [W-1:0]           d;
  logic [W:0]             trial;

  assign trial = {remainder, quotient[W-1]} - {1'b0, d};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; n <= '0; d <= '0; quotient <= '0; remainder <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy      <= 1'b1;
        n         <= ($clog2(W+1))'(W);
        d         <= divisor;
        quotient  <= dividend;
        remainder <= '0;
      end else if (busy) begin
        if (!trial[W]) begin
          remainder <= trial[W-1:0];
          quotient  <= {quotient[W-2:0], 1'b1};
        end else begin
          remainder <= {remainder[W-2:0], quotient[W-1]};
          quotient  <= {quotient[W-2:0], 1'b0};
        end
        n <= n - 1'b1;
        if (n == 1) begin busy <= 1'b0; done <= 1'b1; end
      end
    end
  end
endmodule
