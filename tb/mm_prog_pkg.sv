// mm_prog_pkg: the tightly-coupled matrix-multiply program used by mm_workload_tb.
//
// C = A * B for N x N matrices of 32-bit words, row-major. For each row i the
// program hands blocks of U columns to the accelerator with BAA (one row of A
// times U columns of B: x_ostride 0, x_istride 1, h_ostride 1, h_istride N), then
// computes the columns left over when N is not a multiple of U in software, with
// a shift-and-add multiply subroutine that returns with RPA. It stores 1 to DONE
// when finished. Parameters are read from DMEM at PARAMS: U, &A, &B, &C, N.
package mm_prog_pkg;
  import rv_asm_pkg::*;

  localparam int ARG    = 'h40;
  localparam int DONE   = 'h78;
  localparam int PTR    = 'h7C;
  localparam int PARAMS = 'h80;

  function automatic void mm_program(ref logic [31:0] p [$]);
    p = '{
      LW(18, 0, PARAMS + 0),     // 0  U
      LW(20, 0, PARAMS + 4),     // 1  &A
      LW(21, 0, PARAMS + 8),     // 2  &B
      LW(22, 0, PARAMS + 12),    // 3  &C
      LW(9, 0, PARAMS + 16),     // 4  N
      SLLI(19, 9, 2),            // 5  row size in bytes (load-use of x9)
      ADDI(5, 0, 10),            // 6
      SW(5, 0, ARG + 0),         // 7  count = 10
      SW(0, 0, ARG + 4),         // 8  kernel = 0, dot products
      SW(0, 0, ARG + 12),        // 9  x_ostride = 0
      ADDI(6, 0, 1),             // 10
      SW(6, 0, ARG + 16),        // 11 x_istride = 1
      SW(6, 0, ARG + 24),        // 12 h_ostride = 1
      SW(9, 0, ARG + 28),        // 13 h_istride = N
      SW(18, 0, ARG + 36),       // 14 n_out = U
      SW(9, 0, ARG + 40),        // 15 n_in = N
      ADDI(7, 0, ARG),           // 16
      SW(7, 0, PTR),             // 17
      ADDI(8, 0, 0),             // 18 i = 0
      ADD(24, 20, 0),            // 19 &A[i][0]
      ADD(25, 22, 0),            // 20 &C[i][0]
      // row_loop
      BGE(8, 9, 148),            // 21 -> done (58)
      SW(24, 0, ARG + 8),        // 22 x_base
      ADDI(23, 0, 0),            // 23 j = 0
      // hw_loop
      ADD(26, 23, 18),           // 24 j + U
      BLT(9, 26, 40),            // 25 -> sw_loop (35)
      SLLI(10, 23, 2),           // 26
      ADD(11, 21, 10),           // 27 &B[0][j]
      SW(11, 0, ARG + 20),       // 28
      ADD(12, 25, 10),           // 29 &C[i][j]
      SW(12, 0, ARG + 32),       // 30
      LW(13, 0, PTR),            // 31
      BAA(13, 0),                // 32
      ADD(23, 23, 18),           // 33 j += U
      JAL(0, -40),               // 34 -> hw_loop (24)
      // sw_loop
      BGE(23, 9, 76),            // 35 -> row_next (54)
      ADDI(27, 0, 0),            // 36 acc
      ADD(14, 24, 0),            // 37 &A[i][0]
      SLLI(15, 23, 2),           // 38
      ADD(15, 15, 21),           // 39 &B[0][j]
      ADDI(16, 0, 0),            // 40 k
      // k_loop
      LW(10, 14, 0),             // 41
      LW(11, 15, 0),             // 42
      JAL(1, 68),                // 43 call mul (60)
      ADD(27, 27, 12),           // 44
      ADDI(14, 14, 4),           // 45
      ADD(15, 15, 19),           // 46 next row of B
      ADDI(16, 16, 1),           // 47
      BLT(16, 9, -28),           // 48 -> k_loop (41)
      SLLI(10, 23, 2),           // 49
      ADD(10, 10, 25),           // 50 &C[i][j]
      SW(27, 10, 0),             // 51
      ADDI(23, 23, 1),           // 52
      JAL(0, -72),               // 53 -> sw_loop (35)
      // row_next
      ADD(24, 24, 19),           // 54
      ADD(25, 25, 19),           // 55
      ADDI(8, 8, 1),             // 56
      JAL(0, -144),              // 57 -> row_loop (21)
      // done
      SW(6, 0, DONE),            // 58
      JAL(0, 0),                 // 59 spin
      // mul: x12 = x10 * x11 (low 32 bits)
      ADDI(12, 0, 0),            // 60
      ANDI(28, 11, 1),           // 61
      BEQ(28, 0, 8),             // 62 -> 63
      ADD(12, 12, 10),           // 63
      SLLI(10, 10, 1),           // 64
      SRLI(11, 11, 1),           // 65
      BNE(11, 0, -20),           // 66 -> 60
      RPA(1, 0)                  // 67 return
    };
  endfunction
endpackage
