// caram_pkg: types and constants shared by the content-aware hybrid
// DRAM/PCM memory controller.
//
// Line geometry (256-byte lines, 4-byte line addresses, 4-byte fingerprints,
// 2-byte reference counts) follows the entry sizes the design is specified
// with. Opcodes, response codes and the device command encoding are this
// implementation's own choices.
package caram_pkg;

  localparam int LINE_BYTES = 256;
  localparam int LINE_BITS  = LINE_BYTES * 8;
  localparam int LLA_W      = 32;   // logical line address, 4 B
  localparam int PLA_W      = 32;   // physical line address, 4 B
  localparam int LFP_W      = 32;   // line fingerprint (SuperFastHash), 4 B
  localparam int REF_W      = 16;   // reference count, 2 B

  typedef logic [LINE_BITS-1:0] line_t;
  typedef logic [LLA_W-1:0]     lla_t;
  typedef logic [PLA_W-1:0]     pla_t;
  typedef logic [LFP_W-1:0]     lfp_t;
  typedef logic [REF_W-1:0]     ref_t;

  // Host request opcode
  typedef enum logic { OP_READ = 1'b0, OP_WRITE = 1'b1 } op_e;

  // Outcome reported with every host response
  typedef enum logic [2:0] {
    ST_RD_HIT   = 3'd0,  // read: LLA mapped, data returned
    ST_RD_MISS  = 3'd1,  // read: LLA not resident (would go to the storage pool)
    ST_WR_NEW   = 3'd2,  // write: unique line stored, new LLA mapping
    ST_WR_UPD   = 3'd3,  // write: unique line stored, LLA remapped (line update)
    ST_WR_SHARE = 3'd4,  // write: duplicate content, LLA now shares an existing line
    ST_WR_DROP  = 3'd5,  // write: LLA already maps to identical content, dropped
    ST_WR_FULL  = 3'd6   // write: no free physical line, not stored
  } status_e;

  // Host request as held in the request queue
  typedef struct packed {
    op_e   op;
    lla_t  lla;
    line_t data;
  } host_req_t;

  // Host response as held in the response queue
  typedef struct packed {
    status_e status;
    lla_t    lla;
    line_t   data;
  } host_rsp_t;

  // Device command bus of a DRAM or PCM channel
  typedef enum logic [2:0] {
    CMD_NOP = 3'd0,
    CMD_ACT = 3'd1,
    CMD_RD  = 3'd2,
    CMD_WR  = 3'd3,
    CMD_PRE = 3'd4
  } dev_cmd_e;

  // LFI commands
  typedef enum logic [1:0] {
    LFI_LOOKUP = 2'd0,
    LFI_INSERT = 2'd1,
    LFI_INCREF = 2'd2,
    LFI_DECREF = 2'd3
  } lfi_op_e;

endpackage
