// reconros_pkg: types and constants shared by the programmable-logic side of the
// ReconROS executor design.
//
// Memory traffic uses one simple request/response convention everywhere (thread
// MEMIF ports, the arbiter, the reconfiguration DMA): a request is a packed struct
// (write enable, byte address, write data) qualified by valid/ready; read data
// returns in request order on rsp_valid/rsp_data, one 32-bit word per read. This
// convention, the OSIF command codes and the callback identifiers are choices of
// this design; the paper names the interfaces but not their signals.
package reconros_pkg;

  localparam int unsigned DATA_W = 32;
  localparam int unsigned ADDR_W = 32;

  typedef struct packed {
    logic              we;
    logic [ADDR_W-1:0] addr;   // byte address, word aligned
    logic [DATA_W-1:0] wdata;
  } mem_req_t;

  // Which hardware callback a reconfigurable slot currently holds. CB_NONE is
  // the state of a slot that holds no (or a blank) partial bitstream.
  typedef enum logic [2:0] {
    CB_NONE  = 3'd0,
    CB_SOBEL = 3'd1,
    CB_SORT  = 3'd2,
    CB_HASH  = 3'd3
  } cb_id_t;

  // Words a hardware thread sends to the host over its OSIF (hw -> sw FIFO).
  // The upper byte carries the command, the rest an argument.
  localparam logic [7:0] OSIF_CMD_PUBLISH = 8'h01;
  localparam logic [7:0] OSIF_CMD_EXIT    = 8'hFF;

  // Sizes from the paper's evaluation.
  localparam int unsigned SOBEL_W   = 640;       // image width  (Sec. V-A)
  localparam int unsigned SOBEL_H   = 480;       // image height (Sec. V-A)
  localparam int unsigned SORT_N    = 2048;      // numbers per sort request
  localparam int unsigned HASH_BYTES = 1920 * 1080 * 3; // 24-bit 1920x1080 image
  localparam int unsigned NUM_RS    = 4;         // slots in the evaluated setup

endpackage
