// sf_pkg: types and constants shared by the COT generation accelerator.
//
// The accelerator works on 128-bit blocks (GGM tree nodes, correlation
// vector elements) and talks to off-chip memory over a 512-bit data bus that
// carries four 128-bit blocks per beat; both widths follow the paper. The
// memory request/response structs below are this design's own simple
// valid/ready protocol: a request is accepted in a cycle where both valid
// and ready are high; read data returns later, in request order, with
// rvalid. Addresses count 512-bit words.
package sf_pkg;

  localparam int unsigned BLK_W  = 128;           // block (node/element) width
  localparam int unsigned BUS_W  = 512;           // memory data bus width
  localparam int unsigned LANES  = BUS_W / BLK_W; // blocks per bus word (4)
  localparam int unsigned ADDR_W = 32;            // memory word address width
  localparam int unsigned NRK    = 11;            // round keys per AES-128 key

  typedef logic [BLK_W-1:0] blk_t;
  typedef logic [BUS_W-1:0] bus_t;
  typedef logic [ADDR_W-1:0] addr_t;

  typedef struct packed {
    logic  valid;
    logic  we;
    addr_t addr;
    bus_t  wdata;
  } mem_req_t;

  typedef struct packed {
    logic ready;
    logic rvalid;
    bus_t rdata;
  } mem_rsp_t;

  // Which side of the COT the accelerator is generating.
  typedef enum logic {
    ROLE_SENDER   = 1'b0,
    ROLE_RECEIVER = 1'b1
  } role_e;

  // GF(2^8) multiply by x modulo x^8+x^4+x^3+x+1.
  function automatic logic [7:0] xtime(input logic [7:0] a);
    return {a[6:0], 1'b0} ^ (a[7] ? 8'h1b : 8'h00);
  endfunction

  // GF(2^8) multiply.
  function automatic logic [7:0] gmul(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] p, x;
    p = '0;
    x = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p = p ^ x;
      x = xtime(x);
    end
    return p;
  endfunction

  // AES S-box entry: multiplicative inverse in GF(2^8) (a^254) followed by
  // the affine map b ^ rotl(b,1) ^ rotl(b,2) ^ rotl(b,3) ^ rotl(b,4) ^ 0x63.
  function automatic logic [7:0] sbox_calc(input logic [7:0] a);
    logic [7:0] inv, sq, b;
    inv = 8'h01;
    sq  = a;
    // a^254 = a^(2+4+8+16+32+64+128)
    for (int i = 1; i < 8; i++) begin
      sq  = gmul(sq, sq);
      inv = gmul(inv, sq);
    end
    if (a == 8'h00) inv = 8'h00;
    b = inv;
    return b ^ {b[6:0], b[7]} ^ {b[5:0], b[7:6]} ^ {b[4:0], b[7:5]}
             ^ {b[3:0], b[7:4]} ^ 8'h63;
  endfunction

  function automatic logic [255:0][7:0] build_sbox();
    logic [255:0][7:0] t;
    for (int i = 0; i < 256; i++) t[i] = sbox_calc(8'(i));
    return t;
  endfunction

  // The S-box as a table, computed once at elaboration.
  localparam logic [255:0][7:0] SBOX = build_sbox();

endpackage
