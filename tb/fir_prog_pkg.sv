// fir_prog_pkg: the tightly-coupled FIR program used by the system testbenches,
// plus the data layout it expects in DMEM.
//
// y[o] = sum_{k<NT} x[o+k] * h[k] for o < NY. The program hands blocks of B
// outputs to the accelerator with BAA (argument array at ARG, pointer to it at
// PTR) while a whole block still fits, then computes the remaining outputs in
// software with a shift-and-add multiply subroutine (RV32I has no multiply) that
// returns with RPA. It finishes by storing 1 to DONE and spinning.
// Parameters are read from DMEM at PARAMS: NY, B, NT, &x, &h, &y, first output.
package fir_prog_pkg;
  import rv_asm_pkg::*;

  localparam int ARG    = 'h40;
  localparam int DONE   = 'h78;
  localparam int PTR    = 'h7C;
  localparam int PARAMS = 'h80;

  function automatic void fir_program(ref logic [31:0] p [$]);
    p = '{
      LW(9, 0, PARAMS + 0),      // 0  NY
      LW(18, 0, PARAMS + 4),     // 1  B
      LW(19, 0, PARAMS + 8),     // 2  NT
      LW(20, 0, PARAMS + 12),    // 3  &x
      LW(21, 0, PARAMS + 16),    // 4  &h
      LW(22, 0, PARAMS + 20),    // 5  &y
      LW(8, 0, PARAMS + 24),     // 6  o = first output (0)
      ADDI(5, 8, 10),            // 7  count = 10 (load-use of x8)
      SW(5, 0, ARG + 0),         // 8
      SW(0, 0, ARG + 4),         // 9  kernel = 0, dot products
      ADDI(6, 0, 1),             // 10
      SW(6, 0, ARG + 12),        // 11 x_ostride = 1
      SW(6, 0, ARG + 16),        // 12 x_istride = 1
      SW(21, 0, ARG + 20),       // 13 h_base
      SW(0, 0, ARG + 24),        // 14 h_ostride = 0
      SW(6, 0, ARG + 28),        // 15 h_istride = 1
      SW(18, 0, ARG + 36),       // 16 n_out = B
      SW(19, 0, ARG + 40),       // 17 n_in = NT
      ADDI(7, 0, ARG),           // 18
      SW(7, 0, PTR),             // 19
      // loop_hw
      ADD(23, 8, 18),            // 20 t = o + B
      BLT(9, 23, 40),            // 21 NY < t -> sw_part (31)
      SLLI(10, 8, 2),            // 22
      ADD(11, 20, 10),           // 23 &x[o]
      SW(11, 0, ARG + 8),        // 24
      ADD(12, 22, 10),           // 25 &y[o]
      SW(12, 0, ARG + 32),       // 26
      LW(13, 0, PTR),            // 27
      BAA(13, 0),                // 28 run the accelerator
      ADD(8, 8, 18),             // 29 o += B
      JAL(0, -40),               // 30 -> loop_hw (20)
      // sw_part
      BGE(8, 9, 76),             // 31 o >= NY -> done (50)
      ADDI(24, 0, 0),            // 32 acc
      ADDI(25, 0, 0),            // 33 k
      SLLI(26, 8, 2),            // 34
      ADD(26, 26, 20),           // 35 &x[o]
      ADD(27, 21, 0),            // 36 &h[0]
      // loop_k
      LW(10, 26, 0),             // 37
      LW(11, 27, 0),             // 38
      JAL(1, 52),                // 39 call mul (52)
      ADD(24, 24, 12),           // 40
      ADDI(26, 26, 4),           // 41
      ADDI(27, 27, 4),           // 42
      ADDI(25, 25, 1),           // 43
      BLT(25, 19, -28),          // 44 -> loop_k (37)
      SLLI(10, 8, 2),            // 45
      ADD(10, 10, 22),           // 46 &y[o]
      SW(24, 10, 0),             // 47
      ADDI(8, 8, 1),             // 48
      JAL(0, -72),               // 49 -> sw_part (31)
      // done
      SW(6, 0, DONE),            // 50
      JAL(0, 0),                 // 51 spin
      // mul: x12 = x10 * x11 (low 32 bits)
      ADDI(12, 0, 0),            // 52
      ANDI(28, 11, 1),           // 53 mloop
      BEQ(28, 0, 8),             // 54 -> 55
      ADD(12, 12, 10),           // 55
      SLLI(10, 10, 1),           // 56
      SRLI(11, 11, 1),           // 57
      BNE(11, 0, -20),           // 58 -> mloop (53)
      RPA(1, 0)                  // 59 return
    };
  endfunction
endpackage
