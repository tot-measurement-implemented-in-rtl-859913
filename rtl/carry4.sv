// carry4: behavioural model of the Xilinx Virtex-5 CARRY4 carry-chain
// primitive, for simulation only. It is not synthesizable logic; on the FPGA
// the vendor's primitive takes its place.
//
// Each of the four bits has a carry multiplexer (MUXCY) and an XOR gate:
//   carry out  CO[i] = S[i] ? c[i] : DI[i]
//   sum        O[i]  = S[i] ^ c[i]
// where c[0] = CI | CYINIT and c[i] = CO[i-1]. With every select S[i] = 1 the
// cell is a four-stage delay line: a rising edge on the carry input makes
// CO0..CO3 go 0 -> 1 one after the other, and a falling edge makes O0..O3 go
// 0 -> 1 (the XOR inverts the carry because its other input is S = 1).
//
// Timing: each MUXCY stage has its own propagation delay (D_BIT0..D_BIT3, in
// ps) and each XOR adds D_XOR. The first stage is given a longer delay than
// the other three to model the extra multiplexer at the entry of the cell,
// which makes the four bit delays unequal. The delay values are this model's
// own choice; they sum to 78 ps per cell, the per-cell bin width measured on
// the original device. Delays are transport delays on continuous assigns.
`timescale 1ps/1ps
module carry4 #(
  parameter int unsigned D_BIT0 = 30,
  parameter int unsigned D_BIT1 = 16,
  parameter int unsigned D_BIT2 = 16,
  parameter int unsigned D_BIT3 = 16,
  parameter int unsigned D_XOR  = 10
) (
  input  logic       CI,      // carry in from the cell below
  input  logic       CYINIT,  // carry initialisation input (chain entry)
  input  logic [3:0] DI,      // MUXCY data inputs (used when S[i] = 0)
  input  logic [3:0] S,       // MUXCY selects / XOR inputs
  output wire  [3:0] CO,      // carry outputs
  output wire  [3:0] O        // XOR (sum) outputs
);

  wire c0 = CI | CYINIT;

  assign #(D_BIT0) CO[0] = S[0] ? c0    : DI[0];
  assign #(D_BIT1) CO[1] = S[1] ? CO[0] : DI[1];
  assign #(D_BIT2) CO[2] = S[2] ? CO[1] : DI[2];
  assign #(D_BIT3) CO[3] = S[3] ? CO[2] : DI[3];

  assign #(D_XOR) O[0] = S[0] ^ c0;
  assign #(D_XOR) O[1] = S[1] ^ CO[0];
  assign #(D_XOR) O[2] = S[2] ^ CO[1];
  assign #(D_XOR) O[3] = S[3] ^ CO[2];

endmodule
