// neuron_unit (NU): streamlined leaky integrate-and-fire update.
//
// From the previous membrane potential, the number of valid spikes delivered by
// the SPU and the leakage voltage, the unit computes
//     v_leak = max(v_prev - leak, 0)
//     v_int  = min(v_leak + count, 2^NW - 1)
//     spike  = (v_int >= vth),   v_next = spike ? 0 : v_int
// The paper names the three inputs; the order (leak, then integrate), the floor
// at 0, the saturation, the >= compare and the reset to 0 are this design's
// choices. Purely combinational.
module neuron_unit #(
  parameter int unsigned NW = snn_pkg::NW
) (
  input  logic [NW-1:0] v_prev,
  input  logic [NW-1:0] count,
  input  logic [NW-1:0] leak,
  input  logic [NW-1:0] vth,
  output logic [NW-1:0] v_next,
  output logic          spike
);
  logic [NW-1:0] v_leak;
  logic [NW:0]   v_sum;
  logic [NW-1:0] v_int;

  always_comb begin
    v_leak = (v_prev > leak) ? (v_prev - leak) : '0;
    v_sum  = {1'b0, v_leak} + {1'b0, count};
    v_int  = v_sum[NW] ? '1 : v_sum[NW-1:0];
    spike  = (v_int >= vth);
    v_next = spike ? '0 : v_int;
  end
endmodule
