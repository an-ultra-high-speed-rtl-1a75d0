// digitizer_pkg: sizes, constants and helper functions shared by the
// waveform digitizer FPGA design.
//
// The ADC has four cores (channels) of 10 bits at 1.25 Gsps; every sample
// bit travels on its own LVDS lane, so there are 4 x 10 = 40 lanes at
// 1.25 Gb/s (50 Gb/s in total). Each lane is deserialized 1:8, so the
// fabric sees, per lane and per word clock (156.25 MHz), one bit of eight
// consecutive samples. Channel count, resolution and lane rate follow the
// paper; the 1:8 ratio, the 32-tap delay line and the training word are
// choices of this design.
//
// The Ethernet side carries 1024-byte UDP payloads (from the paper) in
// IPv4/Ethernet II frames. CRC-32 here is the reflected IEEE 802.3
// polynomial 0xEDB88320, initial value 0xFFFFFFFF.
package digitizer_pkg;

  // ---- ADC / LVDS receiver -------------------------------------------
  localparam int unsigned N_CH      = 4;            // ADC cores
  localparam int unsigned ADC_BITS  = 10;           // bits per sample
  localparam int unsigned N_LANES   = N_CH * ADC_BITS;
  localparam int unsigned DESER     = 8;            // ISERDES ratio
  localparam int unsigned TAP_W     = 5;            // IODELAY tap value width (32 taps)
  localparam logic [DESER-1:0] TRAIN_WORD = 8'h0F;  // per-lane training word, oldest bit = MSB

  // One word clock of all four channels: DESER samples x N_CH channels.
  localparam int unsigned FRAME_W   = DESER * N_CH * ADC_BITS;   // 320 bits

  // ---- DDR3 (memory controller user interface) -------------------------
  localparam int unsigned APP_DATA_W = 512;         // 64-bit DDR3, burst of 8
  localparam int unsigned APP_ADDR_W = 29;          // 4 GB / 8 bytes per address
  localparam int unsigned ADDR_STEP  = 8;           // addresses per APP_DATA_W word
  localparam int unsigned WORD_BYTES = APP_DATA_W / 8;

  typedef enum logic [2:0] {
    APP_CMD_WRITE = 3'b000,
    APP_CMD_READ  = 3'b001
  } app_cmd_e;

  // ---- Ethernet / UDP --------------------------------------------------
  localparam int unsigned PAYLOAD_BYTES = 1024;                   // user data per packet
  localparam int unsigned PKT_WORDS     = PAYLOAD_BYTES / WORD_BYTES;  // 16 memory words
  localparam int unsigned HDR_BYTES     = 42;                     // Ethernet 14 + IPv4 20 + UDP 8
  localparam logic [15:0] ETHERTYPE_IPV4 = 16'h0800;
  localparam logic [7:0]  IP_PROTO_UDP   = 8'd17;
  localparam int unsigned MAX_PKT_WIDTH  = 23;                    // capture length in packets (4 GB / 1 KB = 2^22)

  // Host commands: first payload byte is the opcode, next four bytes a
  // big-endian argument.
  typedef enum logic [7:0] {
    OP_ARM      = 8'h01,   // arm capture, argument = number of 1024-byte packets
    OP_NET_TEST = 8'h02    // network test, argument = number of packets (1..256)
  } opcode_e;

  typedef struct packed {
    logic [47:0] mac;
    logic [31:0] ip;
    logic [15:0] port;
  } endpoint_t;

  // One CRC-32 step over a byte (reflected, LSB first).
  function automatic logic [31:0] crc32_byte(input logic [31:0] crc, input logic [7:0] d);
    logic [31:0] c;
    c = crc;
    for (int i = 0; i < 8; i++) begin
      if (c[0] ^ d[i]) c = (c >> 1) ^ 32'hEDB88320;
      else             c = c >> 1;
    end
    return c;
  endfunction

  // Residue of the CRC register after a frame and its own FCS went through.
  localparam logic [31:0] CRC_RESIDUE = 32'hDEBB20E3;

endpackage
