// mm_prog_pkg: a fork-join matrix multiplication program for one PE, used by
// the PE, cluster, top-level and workload testbenches.
//
// Memory layout (byte addresses in the PE's MEM):
//   0x0000  main thread          0x0080  trampolines, 8 bytes per row
//   0x0100  row thread body      0x0FF8  DMA target address of the result
//   0x0FFC  N                    0x1000  A (N x N words, row major)
//   0x1400  B                    0x1800  C = A * B
// The main thread forks one thread per row with "Activate and Count" (start
// address = trampoline i, which loads the row number and jumps to the body),
// stalls itself through the Stall-set SFR and then also polls its AC
// register; each row thread keeps its row number on its private stack,
// computes its row of C and exits, and the last exit releases the main
// thread (join). The main thread then copies C with the DMA engine to the
// address found at 0x0FF8, waits for the DMA to finish and exits.
package mm_prog_pkg;
  import rv_asm_pkg::*;

  localparam int PROG_WORDS = 99;
  localparam int A_BASE = 'h1000, B_BASE = 'h1400, C_BASE = 'h1800;
  localparam int N_ADDR = 'hFFC, TGT_ADDR = 'hFF8;

  function automatic u32 mm_word(int i);
    if (i >= 32 && i < 64) begin        // trampolines
      int row = (i - 32) / 2;
      if ((i % 2) == 0) return addi(9, 0, row);
      return jal(0, (64 - i) * 4);
    end
    case (i)
      // main thread
      0:  return lui(5, 'hF);
      1:  return lui(8, 1);
      2:  return lw(6, 8, -4);
      3:  return addi(7, 0, 0);
      4:  return addi(9, 0, 128);
      5:  return slli(10, 7, 3);
      6:  return add(10, 10, 9);
      7:  return sw(10, 5, O_AC);
      8:  return addi(7, 7, 1);
      9:  return blt(7, 6, -16);
      10: return lw(12, 5, O_SID);
      11: return addi(11, 0, 1);
      12: return sll(11, 11, 12);
      13: return sw(11, 5, O_STALL_SET);
      14: return lw(17, 5, O_AC);
      15: return bne(17, 0, -4);
      16: return lui(13, 2);
      17: return addi(13, 13, -2048);
      18: return sw(13, 5, O_DMASA);
      19: return mul(14, 6, 6);
      20: return sw(14, 5, O_DMAL);
      21: return lw(15, 8, -8);
      22: return sw(15, 5, O_DMATA);
      23: return lw(16, 5, O_DMABUSY);
      24: return bne(16, 0, -4);
      25: return sw(0, 5, O_EXIT);
      26: return jal(0, 0);
      // row thread body, row number in x9
      64: return lui(8, 1);
      65: return lw(6, 8, -4);
      66: return addi(21, 8, 1024);
      67: return addi(22, 8, 2047);
      68: return addi(22, 22, 1);
      69: return addi(2, 2, -4);
      70: return sw(9, 2, 0);
      71: return mul(23, 9, 6);
      72: return addi(24, 0, 0);
      73: return addi(25, 0, 0);
      74: return addi(26, 0, 0);
      75: return add(27, 23, 25);
      76: return slli(27, 27, 2);
      77: return add(27, 27, 8);
      78: return lw(28, 27, 0);
      79: return mul(29, 25, 6);
      80: return add(29, 29, 24);
      81: return slli(29, 29, 2);
      82: return add(29, 29, 21);
      83: return lw(30, 29, 0);
      84: return mul(31, 28, 30);
      85: return add(26, 26, 31);
      86: return addi(25, 25, 1);
      87: return blt(25, 6, -48);
      88: return lw(9, 2, 0);
      89: return mul(27, 9, 6);
      90: return add(27, 27, 24);
      91: return slli(27, 27, 2);
      92: return add(27, 27, 22);
      93: return sw(26, 27, 0);
      94: return addi(24, 24, 1);
      95: return blt(24, 6, -88);
      96: return lui(5, 'hF);
      97: return sw(0, 5, O_EXIT);
      98: return jal(0, 0);
      default: return nop();
    endcase
  endfunction

  // deterministic matrix elements
  function automatic int a_elem(int seed, int r, int c); return (seed * 7 + r * 3 + c * 5) % 23 - 11; endfunction
  function automatic int b_elem(int seed, int r, int c); return (seed * 5 + r * 11 + c * 2) % 19 - 9; endfunction
  function automatic int c_elem(int seed, int n, int r, int c);
    int s = 0;
    for (int k = 0; k < n; k++) s += a_elem(seed, r, k) * b_elem(seed, k, c);
    return s;
  endfunction
endpackage
