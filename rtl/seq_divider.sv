// seq_divider: unsigned restoring divider, one quotient bit per cycle.
//
// A `start` pulse loads num and den; `done` pulses NW cycles later with
// q = num / den (truncated). Division by zero returns all ones. Used by the
// softmax unit, the score combiner and the token packager to form one
// reciprocal per group, so that per-element division becomes a multiply.
module seq_divider #(
  parameter int unsigned NW = 32,
  parameter int unsigned DW = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [NW-1:0] num,
  input  logic [DW-1:0] den,
  output logic          busy,
  output logic          done,
  output logic [NW-1:0] q
);
  logic [NW-1:0] n_sh;
  logic [DW:0]   rem;
  logic [DW-1:0] d_r;
  logic [$clog2(NW+1)-1:0] cnt;
  logic [DW:0]   trial;

  assign trial = {rem[DW-1:0], n_sh[NW-1]};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; q <= '0; n_sh <= '0; rem <= '0; d_r <= '0; cnt <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1; n_sh <= num; d_r <= den; rem <= '0; q <= '0; cnt <= '0;
      end else if (busy) begin
        n_sh <= n_sh << 1;
        if (d_r != '0 && trial >= {1'b0, d_r}) begin
          rem <= trial - {1'b0, d_r};
          q   <= {q[NW-2:0], 1'b1};
        end else begin
          rem <= (d_r == '0) ? '0 : trial;
          q   <= {q[NW-2:0], (d_r == '0)};
        end
        cnt <= cnt + 1'b1;
        if (cnt == ($clog2(NW+1))'(NW - 1)) begin
          busy <= 1'b0; done <= 1'b1;
        end
      end
    end
  end
endmodule
