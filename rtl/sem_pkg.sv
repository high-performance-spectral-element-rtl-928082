// sem_pkg: shared constants and types of the spectral-element Ax accelerator.
//
// The accelerator evaluates the local Poisson operator w = D^T G D u of a
// spectral element of polynomial degree N ((N+1)^3 points) in IEEE-754 double
// precision. This package holds what several modules share: the latencies of
// the floating-point units, the 512-bit memory word, and the Avalon-MM request
// and response bundles of one external memory bank.
//
// Memory ports follow the Avalon-MM pipelined convention without bursts: a
// command (read or write) is accepted in a cycle where waitrequest is low; read
// data returns later, in order, flagged by readdatavalid. Addresses count
// 512-bit words. The 512-bit width is the memory-controller width of the
// target board; the latencies are this design's choice.
package sem_pkg;

  localparam int unsigned MUL_LAT   = 2;    // fp64_mul pipeline depth
  localparam int unsigned ADD_LAT   = 3;    // fp64_add pipeline depth
  localparam int unsigned MEM_W     = 512;  // bits per memory word
  localparam int unsigned WORD_DBL  = MEM_W / 64;  // doubles per word
  localparam int unsigned ADDR_W    = 32;   // word address width
  localparam int unsigned NBANK     = 4;    // external memory banks

  typedef logic [63:0] dbl_t;
  typedef logic [1:0]  slot_t;   // slot index of a multi-buffered memory (up to 4 slots)

  // Command from a master to a bank.
  typedef struct packed {
    logic              read;
    logic              write;
    logic [ADDR_W-1:0] address;
    logic [MEM_W-1:0]  writedata;
  } avm_req_t;

  // Answer of a bank to a master.
  typedef struct packed {
    logic              waitrequest;
    logic              readdatavalid;
    logic [MEM_W-1:0]  readdata;
  } avm_rsp_t;

  // State of one slot of a double-buffered element memory.
  typedef enum logic [1:0] {
    SLOT_FREE = 2'd0,   // may be filled
    SLOT_FILL = 2'd1,   // a producer is writing it
    SLOT_FULL = 2'd2,   // holds a complete element
    SLOT_READ = 2'd3    // a consumer is reading it
  } slot_st_e;

  // Depth of a balanced adder tree over n terms.
  function automatic int unsigned tree_depth(input int unsigned n);
    int unsigned d = 0;
    int unsigned m = n;
    while (m > 1) begin
      m = (m + 1) / 2;
      d++;
    end
    return d;
  endfunction

endpackage
