// neuron_accum: the NOUT parallel multiply-accumulate lanes of one layer.
//
// Input neurons are processed one per cycle: when en is high, the activation
// act is multiplied in every lane by that lane's weight (lp_mult: shifter or
// multiplier depending on WBITS) and added to the lane's accumulator. clr
// zeroes all accumulators (it wins over en). acc holds the weighted sums x'
// as signed ACC_W-bit numbers; the default ACC_W cannot overflow for NIN
// inputs. Serial inputs with parallel accumulation follow the paper; the
// widths are this design's choice. One cycle per accumulate, results are
// visible the cycle after en.
module neuron_accum #(
  parameter int unsigned NOUT  = 512,
  parameter int unsigned ABITS = 8,
  parameter int unsigned WBITS = 3,
  parameter int unsigned ACC_W = 22,
  localparam int unsigned PW   = ABITS + WBITS + 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        clr,
  input  logic                        en,
  input  logic [ABITS-1:0]            act,
  input  logic [NOUT*WBITS-1:0]       w,
  input  logic [NOUT-1:0]             wmask,
  output logic signed [ACC_W-1:0]     acc [NOUT]
);

  for (genvar n = 0; n < NOUT; n++) begin : g_lane
    logic signed [PW-1:0] p;

    lp_mult #(.ABITS(ABITS), .WBITS(WBITS)) u_mult (
      .en (wmask[n]),
      .a  (act),
      .w  (w[n*WBITS +: WBITS]),
      .p  (p)
    );

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        acc[n] <= '0;
      end else if (clr) begin
        acc[n] <= '0;
      end else if (en) begin
        acc[n] <= acc[n] + ACC_W'(p);
      end
    end
  end

endmodule
