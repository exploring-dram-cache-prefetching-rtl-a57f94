// seq_divider: unsigned restoring divider, one quotient bit per clock.
// Pulse start (while busy is low) with dividend and divisor; done pulses W
// cycles later with the quotient held until the next start. A zero divisor
// returns an all-ones quotient. Used by the bandwidth-adaptation block,
// which divides only a few times per sampling period, so a small serial
// divider is enough.
module seq_divider #(
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
  logic [W:0]   rem;
  logic [W-1:0] quo, dvs;
  logic [$clog2(W+1)-1:0] n;
  logic [W:0]   sh;
  logic         fits;
  logic [W-1:0] quo_nx;

  assign sh     = {rem[W-1:0], quo[W-1]};
  assign fits   = (sh >= {1'b0, dvs});
  assign quo_nx = {quo[W-2:0], fits};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; rem <= '0; quo <= '0; dvs <= '0; n <= '0;
      quotient <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1; rem <= '0; quo <= dividend; dvs <= divisor;
        n <= ($clog2(W+1))'(W);
      end else if (busy) begin
        rem <= fits ? (sh - {1'b0, dvs}) : sh;
        quo <= quo_nx;
        n   <= n - 1'b1;
        if (n == 1) begin
          busy     <= 1'b0;
          done     <= 1'b1;
          quotient <= (dvs == '0) ? '1 : quo_nx;
        end
      end
    end
  end
endmodule
