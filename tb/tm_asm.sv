// Tiny two-pass program builder for the testbenches: instructions are
// appended in order, labels are bound to the current position, and branch
// or jump targets written by label are patched by resolve(). Also holds the
// two Tsetlin-machine inference programs (vanilla, T1, and sparse-index,
// T2) and a small binarized-network program used by the system testbenches,
// all written with only the 27 instructions the reduced core executes.
//
// Data-memory layout shared with the testbenches (byte addresses):
//   0x00 number of classes      0x04 clauses per class
//   0x08 clauses with + polarity (first half)   0x0C literals (2 x features)
//   0x10 predicted class        0x14 done flag    0x18 trap count
//   0x1C last mcause            0x20 mcycle at the end
//   0x40 vote sum of each class (one word per class)
//   0x200 literal values, one byte each (0 or 1)
//   0x1000 clause model: T1 - per clause one "useful" byte followed by one
//          include byte per literal; T2 - per clause a halfword count of
//          included literals followed by that many halfword literal indices
// The trap handler lives at byte 0x400 (word 256): it counts the trap,
// records mcause, steps mepc over the trapping instruction and returns.
package tm_asm;
  import rv_asm_pkg::*;

  localparam int HANDLER_WORD = 256;

  class Asm;
    logic [31:0] words[$];
    int          lbl[string];
    int          fix_idx[$];
    string       fix_lbl[$];
    string       fix_kind[$];
    int          fix_r1[$];
    int          fix_r2[$];

    function void emit(logic [31:0] w);
      words.push_back(w);
    endfunction

    function void label(string name);
      lbl[name] = words.size();
    endfunction

    function void br(string kind, int r1, int r2, string target);
      fix_idx.push_back(words.size());
      fix_lbl.push_back(target);
      fix_kind.push_back(kind);
      fix_r1.push_back(r1);
      fix_r2.push_back(r2);
      words.push_back(32'h0);
    endfunction

    function void resolve();
      foreach (fix_idx[n]) begin
        int off = (lbl[fix_lbl[n]] - fix_idx[n]) * 4;
        case (fix_kind[n])
          "beq":   words[fix_idx[n]] = beq(fix_r1[n], fix_r2[n], off);
          "bne":   words[fix_idx[n]] = bne(fix_r1[n], fix_r2[n], off);
          "blt":   words[fix_idx[n]] = blt(fix_r1[n], fix_r2[n], off);
          default: words[fix_idx[n]] = jal(fix_r1[n], off);
        endcase
      end
    endfunction
  endclass

  // Trap handler, placed at word HANDLER_WORD
  function automatic void build_handler(Asm a);
    a.emit(csrrs(16, 12'h341, 0));   // mepc
    a.emit(addi(16, 16, 4));
    a.emit(csrrw(0, 12'h341, 16));
    a.emit(csrrs(17, 12'h342, 0));   // mcause
    a.emit(sw(17, 0, 28));
    a.emit(lw(23, 0, 24));
    a.emit(addi(23, 23, 1));
    a.emit(sw(23, 0, 24));
    a.emit(mret());
    a.resolve();
  endfunction

  // Inference program; t2 selects the sparse-index strategy
  function automatic void build_tm(Asm a, bit t2);
    a.emit(addi(1, 0, HANDLER_WORD * 4));
    a.emit(csrrw(0, 12'h305, 1));    // mtvec
    a.emit(32'h4000_0033);           // sub x0,x0,x0: removed, must trap
    a.emit(ebreak());
    a.emit(lw(2, 0, 0));             // classes
    a.emit(lw(3, 0, 4));             // clauses per class
    a.emit(lw(4, 0, 8));             // positive-polarity clauses
    a.emit(lw(18, 0, 12));           // literals
    a.emit(lui(5, 1));               // model pointer 0x1000
    a.emit(addi(13, 0, 12'h200));    // literal base
    a.emit(addi(6, 0, 0));           // class i
    a.emit(lui(20, 20'h80000));      // best vote = INT_MIN
    a.emit(addi(21, 0, 0));          // best class
    a.emit(addi(22, 0, 12'h40));     // vote pointer
    a.label("class");
    a.emit(add(7, 3, 0));            // votes = clauses per class
    a.emit(addi(8, 0, 0));           // clause j
    a.label("clause");
    if (t2) begin
      a.emit(lhu(9, 5, 0));          // included-literal count
      a.emit(addi(5, 5, 2));
      a.emit(addi(10, 0, 0));
      a.br("beq", 9, 0, "cdone");
      a.emit(addi(10, 0, 1));
      a.label("lit");
      a.emit(lhu(11, 5, 0));         // literal index
      a.emit(addi(5, 5, 2));
      a.emit(add(12, 11, 13));
      a.emit(lbu(12, 12, 0));        // literal value
      a.emit(and_(10, 10, 12));
      a.emit(addi(9, 9, -1));
      a.br("bne", 9, 0, "lit");
    end else begin
      a.emit(lbu(9, 5, 0));          // useful flag
      a.emit(addi(5, 5, 1));
      a.emit(addi(10, 0, 0));
      a.br("beq", 9, 0, "skip");
      a.emit(addi(10, 0, 1));
      a.emit(addi(11, 0, 0));        // literal k
      a.emit(add(19, 13, 0));
      a.label("lit");
      a.emit(lbu(12, 5, 0));         // include flag
      a.emit(addi(5, 5, 1));
      a.emit(lbu(14, 19, 0));        // literal value
      a.emit(addi(19, 19, 1));
      a.emit(xori(12, 12, 1));       // !include
      a.emit(or_(12, 12, 14));       // !include | literal
      a.emit(and_(10, 10, 12));
      a.emit(addi(11, 11, 1));
      a.br("blt", 11, 18, "lit");
      a.br("jal", 0, 0, "cdone");
      a.label("skip");
      a.emit(add(5, 5, 18));
    end
    a.label("cdone");
    a.br("beq", 10, 0, "novote");
    a.br("blt", 8, 4, "pos");
    a.emit(addi(7, 7, -1));
    a.br("jal", 0, 0, "novote");
    a.label("pos");
    a.emit(addi(7, 7, 1));
    a.label("novote");
    a.emit(addi(8, 8, 1));
    a.br("blt", 8, 3, "clause");
    a.emit(sw(7, 22, 0));
    a.emit(addi(22, 22, 4));
    a.br("blt", 20, 7, "best");
    a.br("jal", 0, 0, "next");
    a.label("best");
    a.emit(add(20, 7, 0));
    a.emit(add(21, 6, 0));
    a.label("next");
    a.emit(addi(6, 6, 1));
    a.br("blt", 6, 2, "class");
    a.emit(sw(21, 0, 16));           // predicted class
    a.emit(ecall());
    a.emit(csrrs(14, 12'hB00, 0));   // mcycle
    a.emit(sw(14, 0, 32));
    a.emit(addi(15, 0, 1));
    a.emit(sw(15, 0, 20));           // done
    a.label("halt");
    a.br("jal", 0, 0, "halt");
    a.resolve();
  endfunction

  // Binarized-network inference program (the comparison workload), with the
  // same 27 instructions. Layout: 0x00 input words W, 0x04 hidden neurons H
  // (at most 32), 0x08 classes M, 0x0C hidden threshold; 0x10..0x20 and the
  // score list at 0x40 as for the TM programs; 0x200 input bits packed 32 per
  // word; 0x1000 hidden weights (H x W words) followed by output weights (M
  // words, one bit per hidden neuron). A hidden neuron fires when the number
  // of input bits equal to its weight bits (xnor popcount) reaches the
  // threshold; each class scores the xnor popcount of the 32-bit hidden word
  // with its weights. There is no register xor, so xnor(a, b) is built as
  // (a & b) | ~(a | b), with xori -1 as the inverter; the popcount walks a
  // one-hot mask with and, sltu (set if non-zero) and add.
  function automatic void emit_xnor_popcount(Asm a, int ra, int rb, int rcnt, string tag);
    a.emit(and_(25, ra, rb));
    a.emit(or_(26, ra, rb));
    a.emit(xori(26, 26, -1));
    a.emit(or_(27, 25, 26));         // xnor
    a.emit(addi(12, 0, 1));          // bit mask
    a.label({"pc_", tag});
    a.emit(and_(14, 27, 12));
    a.emit(sltu(14, 0, 14));
    a.emit(add(rcnt, rcnt, 14));
    a.emit(add(12, 12, 12));
    a.br("bne", 12, 0, {"pc_", tag});
  endfunction

  function automatic void build_bnn(Asm a);
    a.emit(addi(1, 0, HANDLER_WORD * 4));
    a.emit(csrrw(0, 12'h305, 1));    // mtvec
    a.emit(lw(2, 0, 0));             // input words
    a.emit(lw(3, 0, 4));             // hidden neurons
    a.emit(lw(4, 0, 8));             // classes
    a.emit(lw(5, 0, 12));            // hidden threshold
    a.emit(lui(6, 1));               // weight pointer 0x1000
    a.emit(addi(7, 0, 0));           // hidden neuron
    a.emit(addi(15, 0, 0));          // hidden activations
    a.emit(addi(18, 0, 1));          // activation bit
    a.label("hneur");
    a.emit(addi(10, 0, 0));          // popcount
    a.emit(addi(8, 0, 0));           // input word
    a.emit(addi(9, 0, 12'h200));
    a.label("hword");
    a.emit(lw(11, 9, 0));
    a.emit(lw(13, 6, 0));
    a.emit(addi(9, 9, 4));
    a.emit(addi(6, 6, 4));
    emit_xnor_popcount(a, 11, 13, 10, "h");
    a.emit(addi(8, 8, 1));
    a.br("blt", 8, 2, "hword");
    a.emit(sltu(14, 10, 5));         // below threshold
    a.br("bne", 14, 0, "hoff");
    a.emit(or_(15, 15, 18));
    a.label("hoff");
    a.emit(add(18, 18, 18));
    a.emit(addi(7, 7, 1));
    a.br("blt", 7, 3, "hneur");
    a.emit(sw(15, 0, 12'h400));      // hidden word, for inspection
    a.emit(addi(24, 0, 0));          // class
    a.emit(lui(19, 20'h80000));      // best score = INT_MIN
    a.emit(addi(20, 0, 0));          // best class
    a.emit(addi(21, 0, 12'h40));     // score pointer
    a.label("oneur");
    a.emit(lw(13, 6, 0));
    a.emit(addi(6, 6, 4));
    a.emit(addi(10, 0, 0));
    emit_xnor_popcount(a, 15, 13, 10, "o");
    a.emit(sw(10, 21, 0));
    a.emit(addi(21, 21, 4));
    a.br("blt", 19, 10, "obest");
    a.br("jal", 0, 0, "onext");
    a.label("obest");
    a.emit(add(19, 10, 0));
    a.emit(add(20, 24, 0));
    a.label("onext");
    a.emit(addi(24, 24, 1));
    a.br("blt", 24, 4, "oneur");
    a.emit(sw(20, 0, 16));           // predicted class
    a.emit(ecall());
    a.emit(csrrs(14, 12'hB00, 0));   // mcycle
    a.emit(sw(14, 0, 32));
    a.emit(addi(1, 0, 1));
    a.emit(sw(1, 0, 20));            // done
    a.label("halt");
    a.br("jal", 0, 0, "halt");
    a.resolve();
  endfunction

endpackage
