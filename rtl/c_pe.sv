// c_pe: Combination PE of the Combination Unit.
//
// N_BSE Bit-Serial Engines, an adder tree and a Shifter-Acc. Each BSE is an AND
// of one feature bit with one 4-bit signed weight and holds three registers:
// the weight, the feature bit and its result. In the cycle a bit-plane is
// accepted (in_valid) the bits, the shift amount and, when load_w is set, new
// weights are registered. In the next cycle the BSE products are summed by the
// adder tree, shifted left by the plane's shift amount and added to the
// accumulator. On the plane marked last, result carries the finished dot
// product (done pulses) and the accumulator restarts from zero. The weights
// stay in the BSEs until load_w, so one weight serves every bit of a value.
//
// The registered bits and control are also outputs (fwd_*), so that a
// neighbouring C-PE group can receive the same bits one cycle later.
module c_pe
  import mega_pkg::*;
#(
  parameter int unsigned N_BSE = 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic [N_BSE-1:0]              in_bits,
  input  logic [2:0]                    in_shift,
  input  logic                          in_last,
  input  logic                          load_w,
  input  logic [N_BSE-1:0][W_BITS-1:0]  w_in,
  output logic                          done,
  output logic signed [ACC_W-1:0]       result
);
  logic [N_BSE-1:0][W_BITS-1:0] w_r;     // BSE weight registers
  logic [N_BSE-1:0]             bit_r;   // BSE feature-bit registers
  logic [2:0]                   shift_r;
  logic                         v_r, last_r;
  logic signed [ACC_W-1:0]      acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_r     <= '0;
      bit_r   <= '0;
      shift_r <= '0;
      v_r     <= 1'b0;
      last_r  <= 1'b0;
    end else begin
      v_r <= in_valid;
      if (in_valid) begin
        bit_r   <= in_bits;
        shift_r <= in_shift;
        last_r  <= in_last;
      end
      if (load_w) w_r <= w_in;
    end
  end

  // BSE AND units and adder tree.
  logic signed [W_BITS+$clog2(N_BSE):0] tree;
  always_comb begin
    tree = '0;
    for (int j = 0; j < N_BSE; j++)
      if (bit_r[j]) tree = tree + (W_BITS+$clog2(N_BSE)+1)'(signed'(w_r[j]));
  end

  // Shifter-Acc.
  logic signed [ACC_W-1:0] acc_next;
  assign acc_next = acc + (ACC_W'(tree) <<< shift_r);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acc <= '0;
    else if (v_r) acc <= last_r ? '0 : acc_next;
  end

  assign done   = v_r && last_r;
  assign result = acc_next;
endmodule
