// Sequential integer square root: root = floor(sqrt(radicand)).
//
// Classic digit-by-digit (restoring) method, one result bit per clock:
// a start pulse loads the radicand, IN_W/2 cycles later done pulses for one
// cycle and root holds the result until the next start. A start while busy
// restarts the computation. Used by the RMSNorm unit to turn the mean square
// into the RMS value r; the method is this design's choice.
module int_sqrt #(
  parameter int IN_W = 20   // even
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [IN_W-1:0]   radicand,
  output logic              busy,
  output logic              done,
  output logic [IN_W/2-1:0] root
);
  localparam int OUT_W = IN_W / 2;
  localparam int CNT_W = $clog2(OUT_W + 1);

  logic [IN_W-1:0]   rem;   // remaining radicand bits, consumed two at a time
  logic [OUT_W+1:0]  part;  // partial remainder
  logic [CNT_W-1:0]  cnt;

  logic [OUT_W+1:0]  part_n, trial;
  always_comb begin
    part_n = {part[OUT_W-1:0], rem[IN_W-1 -: 2]};
    trial  = {root, 2'b01};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem  <= '0; part <= '0; root <= '0; cnt <= '0;
      busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        rem  <= radicand;
        part <= '0;
        root <= '0;
        cnt  <= CNT_W'(OUT_W);
        busy <= 1'b1;
      end else if (busy) begin
        rem <= rem << 2;
        if (part_n >= trial) begin
          part <= part_n - trial;
          root <= {root[OUT_W-2:0], 1'b1};
        end else begin
          part <= part_n;
          root <= {root[OUT_W-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
