// Instruction cache, direct mapped, between the processor's fetch port and
// the SD controller that loads programs from the SD card.
//
// SIZE_BYTES of data in lines of LINE_WORDS 32-bit words (defaults: 16 KB,
// 4-word lines, 1024 lines), a tag and a valid bit per line. A fetch that
// hits returns its word with `if_valid` on the next clock. A miss requests
// the line from the refill port (`rf_req` with the line's byte address, held
// until the line is complete), takes LINE_WORDS words in order on
// `rf_valid`, writes them into the line, and then answers the fetch. `flush`
// clears all valid bits (e.g. after a new program was loaded).
//
// Interface and timing: the fetch port takes a new address in any cycle in
// which `if_ready` is high. The paper gives the size (16 KB) and the place of
// the cache; organisation, line size and refill protocol are this design's.
//
// Lint note: fetch addresses are word aligned, so the two byte-offset
// bits of the registered address are unused.
module icache #(
  parameter int unsigned SIZE_BYTES = 16384,
  parameter int unsigned LINE_WORDS = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        flush,
  // fetch port
  input  logic        if_req,
  input  logic [31:0] if_addr,
  output logic        if_ready,
  output logic        if_valid,
  output logic [31:0] if_instr,
  // refill port (towards the SD controller)
  output logic        rf_req,
  output logic [31:0] rf_addr,
  input  logic        rf_valid,
  input  logic [31:0] rf_data,
  // event counters
  output logic [31:0] n_hit,
  output logic [31:0] n_miss
);
  localparam int unsigned WORDS  = SIZE_BYTES / 4;
  localparam int unsigned LINES  = WORDS / LINE_WORDS;
  localparam int unsigned OFF_W  = $clog2(LINE_WORDS);
  localparam int unsigned IDX_W  = $clog2(LINES);
  localparam int unsigned TAG_W  = 32 - 2 - OFF_W - IDX_W;

  logic [31:0]      data [WORDS];
  logic [TAG_W-1:0] tags [LINES];
  logic [LINES-1:0] valid;

  typedef enum logic [1:0] {S_IDLE, S_LOOKUP, S_REFILL, S_REPLY} state_e;
  state_e state;
  logic [31:0] addr_q;
  logic [OFF_W-1:0] rf_cnt;
  logic [31:0] word_q;

  logic [IDX_W-1:0] idx_q;
  logic [TAG_W-1:0] tag_q;
  assign idx_q = addr_q[2 + OFF_W +: IDX_W];
  assign tag_q = addr_q[31 -: TAG_W];

  logic hit;
  assign hit = valid[idx_q] && tags[idx_q] == tag_q;

  always_ff @(posedge clk) begin
    if (if_req && if_ready)  word_q <= data[if_addr[2 +: OFF_W + IDX_W]];
    else if (state == S_REPLY) word_q <= data[addr_q[2 +: OFF_W + IDX_W]];
    if (state == S_REFILL && rf_valid) data[{idx_q, rf_cnt}] <= rf_data;
    if (state == S_REFILL && rf_valid && rf_cnt == OFF_W'(LINE_WORDS - 1)) tags[idx_q] <= tag_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; addr_q <= '0; rf_cnt <= '0; valid <= '0;
      n_hit <= '0; n_miss <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (if_req) begin addr_q <= if_addr; state <= S_LOOKUP; end
        S_LOOKUP: begin
          if (hit) begin
            n_hit <= n_hit + 1'b1;
            if (if_req) addr_q <= if_addr;
            else        state  <= S_IDLE;
          end else begin
            n_miss <= n_miss + 1'b1;
            rf_cnt <= '0;
            state  <= S_REFILL;
          end
        end
        S_REFILL: if (rf_valid) begin
          rf_cnt <= rf_cnt + 1'b1;
          if (rf_cnt == OFF_W'(LINE_WORDS - 1)) begin
            valid[idx_q] <= 1'b1;
            state <= S_REPLY;
          end
        end
        default: begin  // S_REPLY: word is re-read from the filled line
          state <= S_LOOKUP;
        end
      endcase
      if (flush) valid <= '0;
    end
  end

  assign if_ready = (state == S_IDLE) || (state == S_LOOKUP && hit);
  assign if_valid = (state == S_LOOKUP && hit);
  assign if_instr = word_q;
  assign rf_req   = (state == S_REFILL);
  assign rf_addr  = {addr_q[31:2 + OFF_W], {(OFF_W + 2){1'b0}}};

endmodule
