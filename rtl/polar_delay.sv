// polar_delay -- enable-gated delay line ("register chain") of an unrolled
// decoder.
//
// An unrolled decoder must keep a node's LLRs (or a left child's estimates)
// alive until the operation that last reads them.  If that is L stages after
// the value was first registered, a partially-pipelined decoder with
// initiation interval I needs ceil(L/I) registers in total, all loaded on the
// same phase enable; the first one belongs to the producer, so this module
// adds DEPTH = ceil(L/I) - 1 more.  q is the value d had DEPTH enables ago
// (q = d when DEPTH = 0).
//
// USE_MEM = 0 builds the chain from registers, as in the paper's
// implementation.  USE_MEM = 1 builds the circular-buffer replacement the
// paper proposes: a DEPTH-word memory and one pointer that advances on every
// enable; each enable writes d at the pointer, and q reads the word the
// pointer will write next, i.e. the oldest one (read address one ahead of the
// last write address).  The memory is an array with an asynchronous read, a
// register-file model of the dual-port SRAM; a real SRAM macro would need its
// read issued one cycle early.
//
// With DEPTH = 0 the module is a wire and clk and en are unused (lint lists
// them as unused signals); keeping the ports lets the callers instantiate it
// the same way whatever depth their schedule needs.
module polar_delay #(
  parameter int unsigned W       = 8,
  parameter int unsigned DEPTH   = 1,
  parameter bit          USE_MEM = 1'b0
) (
  input  logic         clk,
  input  logic         en,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  if (DEPTH == 0) begin : g_wire
    assign q = d;
  end else if (!USE_MEM || DEPTH == 1) begin : g_regs
    logic [W-1:0] r [DEPTH];
    always_ff @(posedge clk) begin
      if (en) begin
        r[0] <= d;
        for (int unsigned k = 1; k < DEPTH; k++) r[k] <= r[k-1];
      end
    end
    assign q = r[DEPTH-1];
  end else begin : g_mem
    localparam int unsigned AW = $clog2(DEPTH);
    logic [W-1:0]  mem [DEPTH];
    logic [AW-1:0] ptr;  // any start value works: the words are all unwritten
    always_ff @(posedge clk) begin
      if (en) begin
        mem[ptr] <= d;
        ptr      <= (32'(ptr) == DEPTH - 1) ? '0 : ptr + 1'b1;
      end
    end
    assign q = mem[ptr];
  end
endmodule
