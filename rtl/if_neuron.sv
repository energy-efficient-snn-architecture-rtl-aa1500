// if_neuron: Integrate-and-Fire neuron fed by NB multiport bit lines.
//
// Each cycle the bit lines flagged valid are decoded ('1' -> +1, '0' -> -1),
// summed, and the sum is added to the signed VMEM_W-bit membrane potential.
// When r_empty is high (all input spikes of the inference have been served),
// the updated potential (adder output) is compared with the neuron's own
// signed VTH_W-bit threshold: the spike request r is set if Vmem >= Vth,
// cleared otherwise, and Vmem returns to zero for the next inference. A grant
// g clears r. The threshold register is written with vth_we.
// Timing: one clock from bit lines to Vmem; r is registered. This follows the
// published neuron diagram (R empty drives Vmem's reset and r's enable, g
// drives r's reset, the comparator sits on the adder output). Widths, signed
// encoding and the priority of r_empty over g are this design's choices.
module if_neuron #(
  parameter int unsigned NB     = 4,
  parameter int unsigned VMEM_W = 12,
  parameter int unsigned VTH_W  = 12
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [NB-1:0]            bl,
  input  logic [NB-1:0]            bl_valid,
  input  logic                     r_empty,
  input  logic                     vth_we,
  input  logic signed [VTH_W-1:0]  vth_in,
  input  logic                     g,
  output logic                     r,
  output logic signed [VMEM_W-1:0] vmem
);
  logic signed [VTH_W-1:0]  vth;
  logic signed [VMEM_W-1:0] delta, vmem_sum;
  logic                     fire;

  // Decode & add
  always_comb begin
    delta = '0;
    for (int i = 0; i < NB; i++)
      if (bl_valid[i]) delta = bl[i] ? delta + VMEM_W'(1) : delta - VMEM_W'(1);
  end

  assign vmem_sum = vmem + delta;
  assign fire     = (VMEM_W > VTH_W) ? (vmem_sum >= VMEM_W'(vth)) : (VTH_W'(vmem_sum) >= vth);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vmem <= '0;
      r    <= 1'b0;
      vth  <= '0;
    end else begin
      vmem <= r_empty ? '0 : vmem_sum;
      if (r_empty)  r <= fire;
      else if (g)   r <= 1'b0;
      if (vth_we) vth <= vth_in;
    end
  end
endmodule
