// midir_pkg -- types, address map and register offsets shared by the T2H2
// (trusted-trustworthy hardware hybrid) blocks of the Midir distributed SoC.
//
// Every tile reaches the rest of the chip only through its T2H2 unit. All
// traffic on the network-on-chip (NoC) is a single-word read or write
// (noc_req_t / noc_rsp_t). A request carries the replica label that the
// sender's T2H2 took from the invoked capability, and a "vote" flag that is
// set only when a vote capability was invoked; a tile cannot forge either.
//
// Global address map (this design's own choice; the paper gives none):
//   0x0xxx_xxxx              shared on-chip memory (syscall log, error log,
//                            shared state such as capability spaces)
//   0x1T00_Vooo              voter V of the T2H2 of tile T, register offset ooo
//   0x2000_0000 | idx<<4 | field<<2
//                            capability configuration space; it is not
//                            routed by the NoC at all and is reached only
//                            through the local configuration voter
package midir_pkg;

  localparam int unsigned ADDR_W  = 32;
  localparam int unsigned DATA_W  = 32;
  localparam int unsigned RID_W   = 3;   // replica label: up to 8 replicas (n_max = 7 for f_max = 3)
  localparam int unsigned SEQ_W   = 16;  // voter sequence number width
  localparam int unsigned NODE_W  = 4;   // NoC source node id
  localparam int unsigned CIDX_W  = 8;   // capability index width at the tile interface

  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [DATA_W-1:0] data_t;
  typedef logic [RID_W-1:0]  rid_t;
  typedef logic [SEQ_W-1:0]  seq_t;

  // ------------------------------------------------------------------ NoC
  typedef struct packed {
    logic              we;     // 1 = write, 0 = read
    addr_t             addr;
    data_t             wdata;
    logic              vote;   // request was issued through a vote capability
    rid_t              label;  // replica identifier inserted by the sender's T2H2
    logic [NODE_W-1:0] src;    // issuing node
  } noc_req_t;

  typedef struct packed {
    data_t rdata;
    logic  err;                // refused (decode error, rights, voter rule)
  } noc_rsp_t;

  localparam logic [3:0] REGION_MEM  = 4'h0;
  localparam logic [3:0] REGION_T2H2 = 4'h1;
  localparam logic [3:0] REGION_CFG  = 4'h2;

  function automatic addr_t voter_base(input int unsigned tile, input int unsigned voter);
    addr_t a;
    a = '0;
    a[31:28] = REGION_T2H2;
    a[27:24] = tile[3:0];
    a[15:12] = voter[3:0];
    return a;
  endfunction

  // ------------------------------------------------------- voter registers
  // Byte offsets inside one voter window (4 KiB).
  localparam logic [11:0] VR_SEQ     = 12'h000; // R  : sequence number
  localparam logic [11:0] VR_STATUS  = 12'h004; // R  : see status bits below
  localparam logic [11:0] VR_RESET   = 12'h008; // W  : vote for reset, wdata = seq ; R : reset vector
  localparam logic [11:0] VR_COMMIT  = 12'h00C; // W  : mark proposal complete, wdata = {size[7:0], seq}
  localparam logic [11:0] VR_AGREE   = 12'h010; // W  : single-buffer only, wdata = {value[1:0], seq}
  localparam logic [11:0] VR_AGRVEC  = 12'h014; // R  : agreement vector (2 bit per replica) / committed mask
  localparam logic [11:0] VR_LEADER  = 12'h018; // R  : {size[7:0], leader id}
  localparam logic [11:0] VR_SIZE    = 12'h080; // R  : +4*r, size of buffer r (n-buffer voter)
  localparam logic [11:0] VR_BUF     = 12'h400; // RW : +0x40*r + 4*w, buffer r word w

  // STATUS bits
  localparam int unsigned ST_SUSP_BIT    = 0;  // voting suspended after a divergence
  localparam int unsigned ST_APPLY_BIT   = 1;  // operation being applied
  localparam int unsigned ST_APPLIED_BIT = 2;  // operation of the current vote was applied
  localparam int unsigned ST_OUT_LSB     = 4;  // outcome, 2 bits (vote_outcome_e)
  localparam int unsigned ST_F_LSB       = 8;  // fault threshold f, 4 bits

  typedef enum logic [1:0] {
    OUT_NONE     = 2'd0,
    OUT_AGREED   = 2'd1,   // f+1 matching proposals / agreements
    OUT_REJECTED = 2'd2,   // f+1 disagreements (single-buffer) or no majority among n (n-buffer)
    OUT_TIMEOUT  = 2'd3    // f+1 timeouts (single-buffer)
  } vote_outcome_e;

  // Agreement vector cell of the single-buffer voter.
  typedef enum logic [1:0] {
    AGR_EMPTY    = 2'd0,
    AGR_AGREE    = 2'd1,
    AGR_DISAGREE = 2'd2,
    AGR_TIMEOUT  = 2'd3
  } agr_e;

  typedef enum logic [1:0] {
    V_VOTE  = 2'd0,   // collecting proposals
    V_APPLY = 2'd1,   // writing out the agreed operation
    V_SUSP  = 2'd2    // suspended, proposals frozen for diagnosis
  } vstate_e;

  // ----------------------------------------------------------- capabilities
  typedef struct packed {
    logic  valid;
    logic  r;        // read right
    logic  w;        // write right
    logic  vote;     // vote capability: accesses are marked as votes
    rid_t  label;    // replica identifier conveyed with every access
    addr_t base;     // p
    addr_t size;     // s
  } cap_t;

  // Configuration space fields (word offset inside one capability's slot).
  localparam logic [1:0] CF_BASE  = 2'd0;
  localparam logic [1:0] CF_SIZE  = 2'd1;
  localparam logic [1:0] CF_FLAGS = 2'd2;  // {label[6:4], vote[3], w[2], r[1], valid[0]}
  localparam logic [7:0] CF_TILE_CTRL_IDX = 8'hFF; // slot FF field 0 bit 0: tile reset

  function automatic addr_t cfg_address(input int unsigned idx, input logic [1:0] field);
    addr_t a;
    a = '0;
    a[31:28] = REGION_CFG;
    a[11:4]  = idx[7:0];
    a[3:2]   = field;
    return a;
  endfunction

  // ----------------------------------------------------------- tile side
  typedef struct packed {
    logic [CIDX_W-1:0] cap;    // capability register invoked
    logic              we;
    addr_t             addr;
    data_t             wdata;
  } tile_req_t;

  typedef struct packed {
    data_t rdata;
    logic  err;                // denied by the capability check, or refused downstream
  } tile_rsp_t;

endpackage
