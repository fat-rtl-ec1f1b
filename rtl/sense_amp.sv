// sense_amp -- the bank of per-column sense amplifiers (SAs) of one CMA.
//
// Each column's SA follows the paper's four-stage signal flow:
//  * sensing / comparing: two comparators (OpAmps) compare the Source-Line
//    level with references. OpAmp 1 uses the AND reference when EN_AND is set
//    and gives AND. OpAmp 2 uses the OR reference (EN_OR) or the single-cell
//    read reference (EN_READ) and gives OR and its complement NOR. A comparator
//    with no reference enabled outputs 1, because any conducting column has a
//    voltage above zero (the paper uses this for NAND). The analog levels come
//    from mram_array as the thermometer pair sl_ge1/sl_ge2.
//  * combining: XOR = AND nor NOR; SUM = XOR xor Cin;
//    Cout = (OR and Cin) or AND  (the paper's equations 11-13).
//  * carry latch: holds Cin; carry_load presets it to carry_init (0 for ADD,
//    1 for the second half of SUB), carry_en stores Cout so the next bit of a
//    bit-serial addition uses it. The paper draws a D-latch; here it is a
//    clocked register updated once per bit step.
//  * selecting: {Sel1,Sel2} = 00 AND, 01 OR, 10 XOR, 11 SUM drives OUT.
// With one word line raised and EN_READ, the OR port carries the cell value
// (READ). NOT is XOR with the all-ones row; NAND is AND nor 0.
//
// Timing: OUT is combinational from the sensed levels and control; the carry
// updates at the rising clock edge. Reset clears the carries.
module sense_amp
  import fat_pkg::*;
#(
  parameter int unsigned COLS = fat_pkg::COLS_DEF
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [COLS-1:0] sl_ge1,
  input  logic [COLS-1:0] sl_ge2,
  input  sa_ctrl_t        ctrl,
  input  logic            carry_load,
  input  logic            carry_init,
  input  logic            carry_en,
  output logic [COLS-1:0] out,
  output logic [COLS-1:0] carry_q
);
  logic [COLS-1:0] amp_and, amp_or, amp_nor, g_xor, g_sum, g_cout;

  always_comb begin
    amp_and = ctrl.en_and ? sl_ge2 : '1;
    amp_or  = (ctrl.en_or || ctrl.en_read) ? sl_ge1 : '1;
    amp_nor = ~amp_or;
    g_xor   = ~(amp_and | amp_nor);
    g_sum   = g_xor ^ carry_q;
    g_cout  = (amp_or & carry_q) | amp_and;
    unique case ({ctrl.sel1, ctrl.sel2})
      2'b00:   out = amp_and;
      2'b01:   out = amp_or;
      2'b10:   out = g_xor;
      default: out = g_sum;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          carry_q <= '0;
    else if (carry_load) carry_q <= {COLS{carry_init}};
    else if (carry_en)   carry_q <= g_cout;
  end
endmodule
