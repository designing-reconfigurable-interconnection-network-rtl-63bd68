// kf_fx_div -- sequential fixed-point divider used by the Kalman gain (Eq. 3).
//
// Computes q = (num << FRAC) / den for non-negative fixed-point operands with FRAC
// fractional bits, by restoring division, one quotient bit per clock cycle
// (W+FRAC cycles). `start` loads the operands; `done` pulses for one cycle with q
// valid and q holds until the next start. A quotient that does not fit in W-1
// magnitude bits saturates to the largest positive value. The sequential
// structure is this design's choice: the filter runs once per 1000-cycle epoch,
// so a slow, small divider is sufficient.
module kf_fx_div #(
  parameter int unsigned W    = 32,
  parameter int unsigned FRAC = 16
)(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] num,
  input  logic [W-1:0] den,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] q
);
  localparam int unsigned DW = W + FRAC;          // dividend / quotient width
  localparam int unsigned CW = $clog2(DW + 1);

  logic [DW-1:0] dvd;   // shifts out the dividend, shifts in quotient bits
  logic [W:0]    rem;
  logic [W-1:0]  dsr;
  logic [CW-1:0] cnt;
  logic [W:0]    trial;

  assign trial = {rem[W-1:0], dvd[DW-1]} - {1'b0, dsr};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dvd  <= '0;
      rem  <= '0;
      dsr  <= '0;
      cnt  <= '0;
      busy <= 1'b0;
      done <= 1'b0;
      q    <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        dvd  <= {num, {FRAC{1'b0}}};
        rem  <= '0;
        dsr  <= den;
        cnt  <= CW'(DW);
        busy <= 1'b1;
      end else if (busy) begin
        if (!trial[W]) begin
          rem <= trial;
          dvd <= {dvd[DW-2:0], 1'b1};
        end else begin
          rem <= {rem[W-1:0], dvd[DW-1]};
          dvd <= {dvd[DW-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == CW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
          // final quotient = dvd shifted once more with the last bit
          if ((!trial[W] ? {dvd[DW-2:0], 1'b1} : {dvd[DW-2:0], 1'b0}) >> (W - 1) != '0)
            q <= {1'b0, {(W-1){1'b1}}};
          else
            q <= W'(!trial[W] ? {dvd[DW-2:0], 1'b1} : {dvd[DW-2:0], 1'b0});
        end
      end
    end
  end
endmodule
