// wb_pkg: types and helper functions shared by the intra-set write-balancing LLC.
//
// The LLC geometry (2048 sets x 16 ways), the 32 sampled sets, the blocking threshold
// of 29 writes per interval, the history depth k = 8 and the 64-bit instruction
// pointer with a signed integer value per IP all follow the paper. The interval
// length, counter width, PC-table size, line size and the XOR-fold hash are this
// design's own choices; every module takes them as parameters.
package wb_pkg;

  // Request kinds seen by the LLC.
  typedef enum logic {
    REQ_READ  = 1'b0,   // load / RFO from the upper level
    REQ_WRITE = 1'b1    // writeback of a dirty line from the upper level
  } req_kind_e;

  // XOR-fold an instruction pointer down to a PC-table index of IDX_W bits.
  function automatic logic [31:0] ip_fold(input logic [63:0] ip, input int unsigned idx_w);
    logic [31:0] acc;
    acc = '0;
    for (int b = 0; b < 64; b++) begin
      acc[(b % idx_w)] = acc[(b % idx_w)] ^ ip[b];
    end
    return acc;
  endfunction

endpackage
