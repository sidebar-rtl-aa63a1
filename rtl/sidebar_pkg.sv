// sidebar_pkg: types and constants shared by the Sidebar, the accelerator
// pool and their testbenches.
//
// Data elements are 16-bit signed fixed point with 8 fraction bits (Q8.8);
// this format is a choice of this design. A Sidebar word is 32 bits wide and
// carries one element, sign extended, or one argument word.
//
// The Sidebar port bundle is a pair of packed structs: sb_req_t travels from
// a requester to the Sidebar, sb_rsp_t back. A request is held until gnt is
// seen; read data returns with rvalid in the cycle after the grant.
//
// Address map of the Sidebar (DEPTH words): words 0..DEPTH-6 hold data, the
// four words below the top hold the arguments of a host call, and the top
// word is the flag, i.e. the ownership register (0: accelerator side owns,
// 1: host owns).
package sidebar_pkg;

  localparam int ELEM_W   = 16;
  localparam int FRAC     = 8;
  localparam int SB_DW    = 32;
  localparam int SB_AW    = 16;   // Sidebar address field (covers DEPTH up to 65536)
  localparam int PM_AW    = 20;   // private-memory address field in descriptors
  localparam int DIM_W    = 12;   // layer dimension field

  // offsets of the argument words and the flag, counted down from DEPTH
  localparam int ARG_FUNC_OFS = 5;  // function id (stands for a host function pointer)
  localparam int ARG_PTR_OFS  = 4;  // Sidebar address of the data
  localparam int ARG_LEN_OFS  = 3;  // number of elements
  localparam int ARG_SRC_OFS  = 2;  // id of the calling accelerator
  localparam int FLAG_OFS     = 1;

  typedef logic signed [ELEM_W-1:0] elem_t;

  typedef struct packed {
    logic             req;
    logic             we;
    logic [SB_AW-1:0] addr;
    logic [SB_DW-1:0] wdata;
  } sb_req_t;

  typedef struct packed {
    logic             gnt;
    logic             rvalid;
    logic [SB_DW-1:0] rdata;
  } sb_rsp_t;

  typedef enum logic [0:0] {OP_CONV = 1'b0, OP_POOL = 1'b1} layer_op_e;

  // One layer stage. Fully connected = OP_CONV with in_h=in_w=k=1.
  // Pooling uses a k x k window with the given stride and out_ch = in_ch.
  typedef struct packed {
    layer_op_e        op;
    logic [DIM_W-1:0] in_ch;
    logic [DIM_W-1:0] in_h;
    logic [DIM_W-1:0] in_w;
    logic [DIM_W-1:0] out_ch;
    logic [DIM_W-1:0] out_h;
    logic [DIM_W-1:0] out_w;
    logic [3:0]       k;
    logic [3:0]       stride;
    logic [PM_AW-1:0] in_base;
    logic [PM_AW-1:0] w_base;
    logic [PM_AW-1:0] b_base;
    logic [PM_AW-1:0] out_base;
  } stage_cfg_t;

  // Descriptor one accelerator primitive receives from the host driver.
  typedef struct packed {
    logic             two_stages;  // run stage[1] after stage[0]
    stage_cfg_t [1:0] stage;
    logic             sb_in;       // fetch input from the Sidebar first
    logic [SB_AW-1:0] sb_in_addr;
    logic [PM_AW-1:0] pm_in_base;
    logic [PM_AW-1:0] in_len;
    logic             sb_out;      // hand the result to the host through the Sidebar
    logic [SB_AW-1:0] sb_out_addr;
    logic [PM_AW-1:0] pm_out_base;
    logic [PM_AW-1:0] out_len;
    logic [7:0]       func_id;     // host function to apply
  } acc_cfg_t;

endpackage
