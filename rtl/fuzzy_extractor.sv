// fuzzy_extractor -- code-offset fuzzy extractor turning the noisy SRAM start-up
// pattern into a stable KEY_BITS-bit secret.
//
// Enrollment: the secret S (from the PRNG) is encoded with a repetition code,
// each key bit repeated REP times, into the codeword C, and the helper data is
// HD = R xor C, where R is the SRAM start-up response.  HD is streamed out,
// WIDTH bits per word; it reveals nothing of S as long as R is random.
// Reconstruction: HD is streamed back in, the fresh, noisy response R' is read
// and C' = R' xor HD = C xor noise.  Each group of REP bits is decoded by
// majority vote, which corrects up to (REP-1)/2 flipped bits per key bit.
//
// Key bit i is protected by response bits i*REP .. i*REP+REP-1, and response
// bit j is bit j%WIDTH of SRAM word j/WIDTH.  One response bit is handled per
// clock, so either operation takes about HD_WORDS*(WIDTH+3) cycles.
//
// From the paper: the code-offset construction (HD = R xor Encode(S),
// S = Decode(R' xor HD)) and the 256-bit key.  The repetition code, its length
// and the bit ordering are this design's own choices; the paper uses a
// commercial extractor (752 bytes of HD for 720 bytes of SRAM) whose code it
// does not give, and no entropy-extraction step is applied here.
//
// Interface: `enroll` (pulse, with key_in valid) or `reconstruct` (pulse) start
// an operation while idle.  SRAM reads use sram_en/sram_addr with data on
// sram_rdata one cycle later.  HD words leave on hd_out_* and enter on hd_in_*,
// both valid/ready handshakes.  `done` pulses at the end; after a
// reconstruction key_out holds the decoded key and n_corrected the number of
// response bits that disagreed with their group's majority.
module fuzzy_extractor #(
  parameter int KEY_BITS = 256,
  parameter int REP      = 21,
  parameter int WIDTH    = 32,
  parameter int AW       = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                enroll,
  input  logic                reconstruct,
  input  logic [KEY_BITS-1:0] key_in,
  output logic                busy,
  output logic                done,
  output logic [KEY_BITS-1:0] key_out,
  output logic [15:0]         n_corrected,
  // SRAM read port
  output logic                sram_en,
  output logic [AW-1:0]       sram_addr,
  input  logic [WIDTH-1:0]    sram_rdata,
  // helper data out (enrollment)
  output logic                hd_out_valid,
  input  logic                hd_out_ready,
  output logic [WIDTH-1:0]    hd_out_data,
  // helper data in (reconstruction)
  input  logic                hd_in_valid,
  output logic                hd_in_ready,
  input  logic [WIDTH-1:0]    hd_in_data
);
  localparam int HD_BITS  = KEY_BITS * REP;
  localparam int HD_WORDS = HD_BITS / WIDTH;
  localparam int GW       = $clog2(KEY_BITS);
  localparam int RW       = $clog2(REP + 1);
  localparam int BW       = $clog2(WIDTH);

  typedef enum logic [2:0] {F_IDLE, F_HDIN, F_READ, F_CAP, F_BITS, F_OUT} fstate_e;
  fstate_e st;
  logic    mode_enroll;

  logic [AW-1:0]       word_idx;
  logic [BW-1:0]       bit_idx;
  logic [GW-1:0]       grp;
  logic [RW-1:0]       rep_cnt;
  logic [RW-1:0]       ones;
  logic [WIDTH-1:0]    hd_q;     // helper-data word received (reconstruction)
  logic [WIDTH-1:0]    work;     // R word (enrollment) or C' word (reconstruction)
  logic [WIDTH-1:0]    hd_word;  // helper-data word built (enrollment)
  logic [KEY_BITS-1:0] key_q;

  // Per-bit datapath.
  logic          cbit;
  logic [RW-1:0] ones_now;
  logic          last_in_grp, maj;
  always_comb begin
    cbit        = work[bit_idx];
    ones_now    = ones + RW'(cbit);
    last_in_grp = (rep_cnt == RW'(REP - 1));
    maj         = (ones_now > RW'(REP / 2));
  end

  assign sram_en      = (st == F_READ);
  assign sram_addr    = word_idx;
  assign hd_out_valid = (st == F_OUT);
  assign hd_out_data  = hd_word;
  assign hd_in_ready  = (st == F_HDIN);
  assign key_out      = key_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= F_IDLE;
      mode_enroll <= 1'b0;
      busy        <= 1'b0;
      done        <= 1'b0;
      word_idx    <= '0;
      bit_idx     <= '0;
      grp         <= '0;
      rep_cnt     <= '0;
      ones        <= '0;
      hd_q        <= '0;
      work        <= '0;
      hd_word     <= '0;
      key_q       <= '0;
      n_corrected <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        F_IDLE: begin
          word_idx <= '0;
          bit_idx  <= '0;
          grp      <= '0;
          rep_cnt  <= '0;
          ones     <= '0;
          if (enroll) begin
            mode_enroll <= 1'b1;
            key_q       <= key_in;
            busy        <= 1'b1;
            st          <= F_READ;
          end else if (reconstruct) begin
            mode_enroll <= 1'b0;
            key_q       <= '0;
            n_corrected <= '0;
            busy        <= 1'b1;
            st          <= F_HDIN;
          end
        end
        F_HDIN: if (hd_in_valid) begin
          hd_q <= hd_in_data;
          st   <= F_READ;
        end
        F_READ: st <= F_CAP;
        F_CAP: begin
          work <= mode_enroll ? sram_rdata : (sram_rdata ^ hd_q);
          st   <= F_BITS;
        end
        F_BITS: begin
          if (mode_enroll) begin
            // HD bit = R bit xor codeword bit (= key bit of this group)
            hd_word[bit_idx] <= cbit ^ key_q[grp];
          end
          if (last_in_grp) begin
            rep_cnt <= '0;
            ones    <= '0;
            grp     <= grp + 1'b1;
            if (!mode_enroll) begin
              key_q[grp]  <= maj;
              n_corrected <= n_corrected + {{(16-RW){1'b0}}, (maj ? (RW'(REP) - ones_now) : ones_now)};
            end
          end else begin
            rep_cnt <= rep_cnt + 1'b1;
            ones    <= ones_now;
          end
          bit_idx <= bit_idx + 1'b1;
          if (bit_idx == BW'(WIDTH - 1)) begin
            if (mode_enroll) st <= F_OUT;
            else if (word_idx == AW'(HD_WORDS - 1)) begin
              st   <= F_IDLE;
              busy <= 1'b0;
              done <= 1'b1;
            end else begin
              word_idx <= word_idx + 1'b1;
              st       <= F_HDIN;
            end
          end
        end
        F_OUT: if (hd_out_ready) begin
          if (word_idx == AW'(HD_WORDS - 1)) begin
            st    <= F_IDLE;
            busy  <= 1'b0;
            done  <= 1'b1;
            key_q <= '0;       // do not keep the enrolled secret around
          end else begin
            word_idx <= word_idx + 1'b1;
            st       <= F_READ;
          end
        end
        default: st <= F_IDLE;
      endcase
    end
  end

  initial assert (HD_BITS % WIDTH == 0 && REP % 2 == 1)
    else $error("REP must be odd and KEY_BITS*REP a multiple of WIDTH");

  assert property (@(posedge clk) disable iff (!rst_n) hd_out_valid && !hd_out_ready |=> hd_out_valid && $stable(hd_out_data));

endmodule
