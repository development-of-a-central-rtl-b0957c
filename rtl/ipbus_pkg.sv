// ipbus_pkg: the IPBus slave-side bus, as used between the IPBus protocol core and its slaves.
//
// An IPBus transaction is one 32-bit word read or write. The master drives the write bus
// (address, write data, strobe, write) and holds it, strobe high, until the addressed slave
// answers on the read bus with ack (done) or err (refused) for one cycle, with the read data.
// The signal names follow the IPBus firmware convention. The widths (32-bit address and data)
// are the figure's "A/D 32b + signaling".
package ipbus_pkg;

  typedef struct packed {
    logic [31:0] ipb_addr;
    logic [31:0] ipb_wdata;
    logic        ipb_strobe;
    logic        ipb_write;
  } ipb_wbus_t;

  typedef struct packed {
    logic [31:0] ipb_rdata;
    logic        ipb_ack;
    logic        ipb_err;
  } ipb_rbus_t;

  localparam ipb_rbus_t IPB_RBUS_NULL = '{ipb_rdata: '0, ipb_ack: 1'b0, ipb_err: 1'b0};

  // Register map of the TDSCAN test firmware (word addresses).
  // addr[7:6] selects the slave, addr[5:0] the register inside it.
  localparam int unsigned SLV_IN_VECTOR = 0;
  localparam int unsigned SLV_READ_FIFO = 1;
  localparam int unsigned SLV_COUNTER   = 2;
  localparam int unsigned N_SLAVES      = 3;

  // Frame words occupy local addresses 0 .. 35 (36 x 32 = 1152 >= 1141 bits).
  localparam logic [5:0] REG_PUSH   = 6'd36;  // in-vector: write pushes the frame, wdata[0] = last
  localparam logic [5:0] REG_CTRL   = 6'd37;  // in-vector: [0] run, [15:8] minPts
  localparam logic [5:0] REG_STATUS = 6'd38;  // in-vector: input FIFO fill level
  localparam logic [5:0] REG_POP    = 6'd36;  // read-fifo: write pops, read gives status
  localparam logic [5:0] REG_COUNT  = 6'd0;   // counter: read latency count, write clears
  localparam logic [5:0] REG_FRAMES = 6'd1;   // counter: read number of frames out of TDSCAN

endpackage
