// soc_pkg: types and constants shared by the blocks of the memristor computing SoC.
// The chip joins a 32-bit RISC-V, seven memristor computing arrays (CAs) and a chip
// bridge over one 32-bit network on chip (NoC). The 32-bit word width, the seven CAs and
// their kinds (three CiM, two CaM, two SNN) follow the architecture; node numbering,
// flit sideband fields, the CA command encoding and the register map are this design's own.
package soc_pkg;

  localparam int unsigned NOC_W     = 32;  // NoC data width (architecture)
  localparam int unsigned NUM_CA    = 7;   // computing arrays (architecture)
  localparam int unsigned NODE_W    = 4;   // node id width (own choice)
  localparam int unsigned NUM_NODES = 9;   // RISC-V, seven CAs, chip bridge

  typedef logic [NODE_W-1:0] node_t;

  localparam node_t NODE_RISCV  = 4'd0;
  localparam node_t NODE_CA0    = 4'd1;    // CAs are nodes 1..7
  localparam node_t NODE_BRIDGE = 4'd8;

  // One NoC flit: 32 data bits plus routing sideband. A packet is a run of flits
  // from one source to one destination, closed by last.
  typedef struct packed {
    node_t             dest;
    node_t             src;
    logic              last;
    logic [NOC_W-1:0]  data;
  } flit_t;

  localparam int unsigned FLIT_W = $bits(flit_t);

  // Computing array kinds.
  typedef enum logic [1:0] {CA_CIM = 2'd0, CA_CAM = 2'd1, CA_SNN = 2'd2} ca_kind_e;

  // Command word carried in the first flit of a packet to a CA:
  // [31:28] opcode, [27:15] field A, [14:2] field B, [1:0] zero.
  typedef enum logic [3:0] {
    OP_NOP   = 4'd0,
    OP_WRITE = 4'd1,  // A = first word address, following flits are data
    OP_READ  = 4'd2,  // A = first word address, B = word count; reply goes to src
    OP_PROG  = 4'd3,  // A = address of the conductance image; program the crossbar
    OP_RUN   = 4'd4,  // A = input vector address, B = result address; one crossbar evaluation
    OP_DONE  = 4'd5   // reply to PROG and RUN; [0] set when an address overflowed
  } ca_op_e;

  localparam int unsigned ADDR_FLD_W = 13;

  function automatic logic [NOC_W-1:0] ca_cmd(ca_op_e op, logic [ADDR_FLD_W-1:0] a,
                                              logic [ADDR_FLD_W-1:0] b);
    return {op, a, b, 2'b00};
  endfunction

  // Configuration register map (word addresses within a bank).
  localparam int unsigned CFG_NREG  = 8;
  localparam int unsigned CFG_CTRL  = 0;  // [0] bridge mode 0=monitor 1=link, [1] MBIST start, [14:8] CA enable
  localparam int unsigned CFG_IRQEN = 1;  // interrupt enable per event
  localparam int unsigned CFG_IRQCL = 2;  // write-1-to-clear of the interrupt status

  // Interrupt events.
  localparam int unsigned NUM_EVT   = 4;
  localparam int unsigned EVT_READY = 0;  // a CA finished a PROG or RUN
  localparam int unsigned EVT_CBOVF = 1;  // chip bridge monitor FIFO overflowed
  localparam int unsigned EVT_MEMOVF= 2;  // a CA access ran past its local memory
  localparam int unsigned EVT_ROUTE = 3;  // a flit named a node that does not exist

endpackage
