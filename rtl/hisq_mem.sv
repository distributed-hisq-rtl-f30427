// hisq_mem: program and data memory of one HISQ core.
//
// A single word-addressed array with two synchronous ports, as a true
// dual-port block RAM provides: port A is the read-only instruction fetch
// port, port B the load/store port with per-byte write enables. Reads return
// the word addressed in the previous cycle (one cycle latency); a write on
// port B does not change port B's read data in the same cycle
// (read-first).
//
// The architecture only names "Memory". Holding program and data in one
// dual-port array is this design's choice. The default of 32768 words
// (128 KiB, 32 blocks of 32 Kib) is derived, not given: it is what remains of
// the reported block-RAM budget of both boards (75 and 45 blocks) after their
// event queues (28 and 8 queues of 1.5 blocks), less one block for the sync
// queue.
module hisq_mem #(
  parameter int WORDS = 32768
) (
  input  logic                       clk,
  // port A: instruction fetch
  input  logic [$clog2(WORDS)-1:0]   a_addr,
  output logic [31:0]                a_rdata,
  // port B: data (and program loading)
  input  logic [$clog2(WORDS)-1:0]   b_addr,
  input  logic [3:0]                 b_we,
  input  logic [31:0]                b_wdata,
  output logic [31:0]                b_rdata
);
  logic [31:0] mem [WORDS];

  always_ff @(posedge clk) a_rdata <= mem[a_addr];

  always_ff @(posedge clk) begin
    b_rdata <= mem[b_addr];
    for (int i = 0; i < 4; i++)
      if (b_we[i]) mem[b_addr][8*i +: 8] <= b_wdata[8*i +: 8];
  end
endmodule
