// device_pkg -- sizes, command and status encodings shared by the device
// security subsystem (control unit, PUF system, top level).
//
// Sizes from the paper: 256-bit PUF-derived key, 48-bit device ID, 720 bytes
// of SRAM for the PUF.  The repetition factor of the error-correcting code,
// the 32-bit word width of the SRAM and of the external interface, and the
// command/status encodings and the NVM word map are this design's own
// choices.  The NVM holds what the protocol variants need to keep on the
// device: PK_TTP (A), Cert_ID (D), or both (B); variant C needs none.
package device_pkg;

  localparam int WORD_W     = 32;
  localparam int KEY_BITS   = 256;              // x, PUF-based secret key
  localparam int ID_BITS    = 48;               // device ID (MAC-address size)
  localparam int SRAM_WORDS = 720 * 8 / WORD_W; // 720 bytes of PUF SRAM = 180 words
  localparam int REP        = 21;               // repetition-code length per key bit
  localparam int HD_BITS    = KEY_BITS * REP;   // 5376 bits
  localparam int HD_WORDS   = HD_BITS / WORD_W; // 168 words = 672 bytes
  localparam int KEY_WORDS  = KEY_BITS / WORD_W;
  localparam int ID_WORDS   = (ID_BITS + WORD_W - 1) / WORD_W;

  // Non-volatile memory map.  Each area is followed by one word that
  // write-protects it once it holds NVM_LOCK_MAGIC.
  //   0 .. 7      PK_TTP                 (variants A and B)
  //   8           PK_TTP lock
  //   9 .. 194    Cert_ID = ID | HD | PK_ID | sigma   (variants B and D)
  //   195         Cert_ID lock
  localparam int          CERT_WORDS     = ID_WORDS + HD_WORDS + 2 * KEY_WORDS; // 186
  localparam int          NVM_LOCK_ADDR  = KEY_WORDS;
  localparam int          NVM_CERT_ADDR  = KEY_WORDS + 1;
  localparam int          NVM_CERT_HD    = NVM_CERT_ADDR + ID_WORDS;
  localparam int          NVM_CERT_LOCK  = NVM_CERT_ADDR + CERT_WORDS;
  localparam int          NVM_WORDS      = NVM_CERT_LOCK + 1;                    // 196
  localparam int          NVM_AW         = 8;
  localparam logic [31:0] NVM_LOCK_MAGIC = 32'hA5A5_5A5A;

  // Commands accepted by the control unit.
  typedef enum logic [2:0] {
    CMD_ENROLL      = 3'd1,  // PUF-enroll, DH KGen, send ID | HD | PK_ID
    CMD_AGREE       = 3'd2,  // verify server certificate, reconstruct x, w = x * PK_server
    CMD_AGREE_NOVF  = 3'd3,  // as CMD_AGREE without certificate verification (variant C)
    CMD_STORE_PKTTP = 3'd4,  // store PK_TTP in NVM once and write-protect it
    CMD_STORE_CERT  = 3'd5,  // store Cert_ID in NVM once and write-protect it
    CMD_SEND_CERT   = 3'd6,  // send the stored Cert_ID
    CMD_AGREE_CERT  = 3'd7   // as CMD_AGREE, HD taken from the stored Cert_ID;
                             // verifies only if a PK_TTP is stored (B: yes, D: no)
  } cmd_e;

  typedef enum logic [2:0] {
    ST_IDLE       = 3'd0,
    ST_BUSY       = 3'd1,
    ST_DONE       = 3'd2,
    ST_ERR_VERIFY = 3'd3,    // certificate rejected, or no PK_TTP stored
    ST_ERR_LOCKED = 3'd4,    // area already written; store refused
    ST_ERR_EMPTY  = 3'd5     // no Cert_ID stored
  } status_e;

endpackage
