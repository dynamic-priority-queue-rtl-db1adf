// dpq_pkg: types, sizes and helper functions shared by the Dynamic Priority
// Queue (DPQ) memory subsystem.
//
// A master moves whole 32-byte cache lines to and from a shared DDR2 SDRAM.
// With bank interleaving every line is cut into one 64-bit chunk per bank
// (four banks), so a line is LINE_W = 256 bits and one chunk is one word of
// the controller's local interface. The 32-byte line and the four banks
// follow the paper; the 64-bit local word and the 24-bit local address are
// this design's choices (a x16 DDR2 device with burst length 4 delivers
// 64 bits per burst).
//
// The data pattern functions give every local word a value that depends only
// on its address. Traffic generators write that value and check it when they
// read, which exposes a read that is returned to the wrong master.
package dpq_pkg;

  // Geometry of one access.
  localparam int unsigned LINE_BYTES   = 32;              // cache line
  localparam int unsigned N_BANKS      = 4;               // chunks per line
  localparam int unsigned CHUNK_W      = 64;              // local data word
  localparam int unsigned LINE_W       = LINE_BYTES * 8;  // 256
  localparam int unsigned BANK_W       = $clog2(N_BANKS);
  localparam int unsigned LOCAL_ADDR_W = 24;              // word address
  localparam int unsigned LINE_ADDR_W  = LOCAL_ADDR_W - BANK_W;

  typedef enum logic {
    ACC_READ  = 1'b0,
    ACC_WRITE = 1'b1
  } acc_kind_e;

  // One cache-line access as a master presents it.
  typedef struct packed {
    acc_kind_e               kind;
    logic [LINE_ADDR_W-1:0]  line_addr;
    logic [LINE_W-1:0]       wdata;
  } line_req_t;

  // Equation (1): Rp = ceil((WcRdCmdWd + WcWrCmdWd) / 2) * sum(Budget).
  function automatic int unsigned rp_cycles(int unsigned wc_rd_cmd_wd,
                                            int unsigned wc_wr_cmd_wd,
                                            int unsigned budget_sum);
    return ((wc_rd_cmd_wd + wc_wr_cmd_wd + 1) / 2) * budget_sum;
  endfunction

  // Reference content of one local word, a function of its address only.
  function automatic logic [CHUNK_W-1:0] word_pattern(logic [LOCAL_ADDR_W-1:0] a);
    return {8'hA5, a, 8'h5A, a ^ 24'hC3C3C3};
  endfunction

  // Reference content of one cache line: chunk b lives in bank b.
  function automatic logic [LINE_W-1:0] line_pattern(logic [LINE_ADDR_W-1:0] la);
    logic [LINE_W-1:0] l;
    for (int b = 0; b < N_BANKS; b++)
      l[b*CHUNK_W +: CHUNK_W] = word_pattern({la, BANK_W'(b)});
    return l;
  endfunction

endpackage
