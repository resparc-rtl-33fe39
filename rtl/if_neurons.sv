// if_neurons -- the integrate-and-fire neurons attached to one MCA's columns.
//
// Each neuron keeps a membrane potential. When integ_en is high it adds the
// input current of its column (saturating at the top of VMEM_W bits). When
// fire_en is high every neuron whose potential has reached the threshold
// emits a spike (bit set in spk) and its potential is reset to zero; the
// others keep their potential and emit no spike. clear zeroes all potentials
// (start of a new input). The integrate-and-fire behaviour and the threshold
// follow the architecture; reset-to-zero, saturation and a shared threshold
// register are choices of this implementation.
// Timing: integ_en and fire_en each act on the next clock edge; spk holds
// the result of the last fire until the next one.
module if_neurons
  import resparc_pkg::*;
#(
  parameter int N  = MCA_N,
  parameter int CW = CUR_W,
  parameter int VW = VMEM_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clear,
  input  logic                  integ_en,
  input  logic [N-1:0][CW-1:0]  cur,
  input  logic                  fire_en,
  input  logic [VW-1:0]         vth,
  output logic [N-1:0]          spk,
  output logic [N-1:0][VW-1:0]  vmem
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vmem <= '0;
      spk  <= '0;
    end else if (clear) begin
      vmem <= '0;
      spk  <= '0;
    end else if (integ_en) begin
      for (int i = 0; i < N; i++) begin
        logic [VW:0] s;
        s = {1'b0, vmem[i]} + (VW+1)'(cur[i]);
        vmem[i] <= s[VW] ? '1 : s[VW-1:0];
      end
    end else if (fire_en) begin
      for (int i = 0; i < N; i++) begin
        spk[i] <= (vmem[i] >= vth);
        if (vmem[i] >= vth) vmem[i] <= '0;
      end
    end
  end

endmodule
