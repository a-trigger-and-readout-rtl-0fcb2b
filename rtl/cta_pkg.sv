// cta_pkg: constants, types and the Ethernet CRC-32 shared by the camera
// front-end readout. The frame formats, EtherTypes and register map below are
// this design's own choices: the readout scheme asks for raw layer-2 Ethernet
// frames tagged with an event number and a time stamp, but fixes no layout.
// Camera-level numbers that do follow the scheme: 16 pixels per front-end
// FPGA, 30 bytes per pixel and event (15 words of 16 bits), a ~1 GHz local
// clock re-synchronised by a 1 MHz central pulse.
package cta_pkg;

  // Front-end geometry
  localparam int unsigned NUM_PIXELS_DEF      = 16;  // pixels per front-end FPGA
  localparam int unsigned WORDS_PER_PIXEL_DEF = 15;  // 30 bytes per pixel and event
  localparam int unsigned SAMPLE_W            = 16;  // one ADC word

  // Raw-Ethernet framing (IEEE local experimental EtherTypes)
  localparam logic [15:0] ETHERTYPE_DAQ  = 16'h88B5; // front-end -> camera computer
  localparam logic [15:0] ETHERTYPE_CTRL = 16'h88B6; // camera computer -> front-end
  localparam logic [7:0]  MSG_EVENT      = 8'h01;    // pixel data of one event
  localparam logic [7:0]  MSG_TSTAMP     = 8'h02;    // time stamp of one trigger
  localparam logic [7:0]  FORMAT_VERSION = 8'h01;
  localparam logic [23:0] MAC_PREFIX     = 24'h02_43_54; // locally administered
  localparam int unsigned EVENT_HDR_BYTES  = 16;
  localparam int unsigned TSTAMP_PAYLOAD_BYTES = 21;
  localparam int unsigned MIN_PAYLOAD = 46;
  localparam int unsigned IFG_BYTES   = 12;

  // Control commands (payload of an ETHERTYPE_CTRL frame)
  localparam int unsigned CMD_BYTES = 6;             // opcode, address, 32-bit data
  localparam logic [7:0]  CMD_WRITE = 8'h01;

  // Register map of config_regs
  localparam int unsigned NUM_REGS     = 16;
  localparam int unsigned REG_CTRL     = 0;  // bit 0: run enable (accept triggers)
  localparam int unsigned REG_DMAC_HI  = 1;  // destination MAC [47:32]
  localparam int unsigned REG_DMAC_LO  = 2;  // destination MAC [31:0]
  localparam int unsigned REG_CMDCOUNT = 3;  // read-only: accepted commands
  localparam int unsigned REG_SETTINGS = 4;  // 4..15: HV, trigger and digitisation settings

  // Time stamp: microsecond pulses counted, nanoseconds since the last pulse
  typedef struct packed {
    logic [47:0] usec;
    logic [15:0] nsec;
  } timestamp_t;

  typedef struct packed {
    logic [31:0] evnum;
    timestamp_t  ts;
    logic [15:0] missed;  // triggers that could not be time-stamped so far
    logic        busy;    // camera busy when the trigger came
  } ts_record_t;

  // Ethernet CRC-32 (reflected polynomial 0xEDB88320), one byte, LSB first
  localparam logic [31:0] CRC_INIT    = 32'hFFFF_FFFF;
  localparam logic [31:0] CRC_RESIDUE = 32'hDEBB_20E3;

  function automatic logic [31:0] crc32_update(input logic [31:0] crc, input logic [7:0] d);
    logic [31:0] c;
    c = crc ^ {24'h0, d};
    for (int i = 0; i < 8; i++)
      c = c[0] ? ((c >> 1) ^ 32'hEDB8_8320) : (c >> 1);
    return c;
  endfunction

endpackage
