// zbt_sram_chip: behavioural model of one external pipelined ZBT SRAM chip.
//
// Not synthesizable logic of this design: it stands for the off-board
// 2 Mbyte memory. Address and control are sampled at a clock edge when
// cen_n is low; two edges later a write takes its data from the bus (dq_i,
// which the controller must be driving, dq_oe high) and a read has driven
// its data on dq_o during the clock before that edge. Words never written
// read as zero. Commands in the first four clocks after power-up are
// ignored, while the controller's pins are still leaving their random state.
// Pin-protocol violations (bus not driven in a write's data phase, bus
// driven during a read's data phase) are printed and counted in `errors`,
// which the testbench adds to its failure count; `phases` counts the data
// phases checked.
module zbt_sram_chip #(
  parameter int unsigned AW = 19
) (
  input  logic          clk,
  input  logic [AW-1:0] addr,
  input  logic          cen_n,
  input  logic          we_n,
  input  logic [31:0]   dq_i,
  input  logic          dq_oe,
  output logic [31:0]   dq_o
);

  logic [31:0] mem [1 << AW];
  logic [AW-1:0] a1 = '0, a2 = '0;
  logic v1 = 0, v2 = 0, w1 = 0, w2 = 0;

  initial for (int i = 0; i < (1 << AW); i++) mem[i] = '0;

  int unsigned age = 0;
  int errors = 0, phases = 0;

  always_ff @(posedge clk) begin
    if (age < 4) age <= age + 1;
    a1 <= addr; v1 <= !cen_n && age >= 4; w1 <= !we_n;
    a2 <= a1;   v2 <= v1;     w2 <= w1;
    if (v2) phases++;
    if (v2 && w2) begin
      if (!dq_oe) begin
        errors++;
        if (errors < 5) $display("zbt_sram_chip: write data phase with bus not driven");
      end
      mem[a2] <= dq_i;
    end
    if (v2 && !w2 && dq_oe) begin
      errors++;
      if (errors < 5) $display("zbt_sram_chip: bus contention on a read");
    end
  end

  assign dq_o = (v2 && !w2) ? mem[a2] : 32'hDEAD_BEEF;

endmodule
