// msg_buffer: on-NIC SRAM for decoded request messages.
//
// Each of NUM_SLOTS slots holds one request as it will be shown to a CPU
// core: the control line followed by AUX_LINES auxiliary lines (128 bytes
// each), plus the reply header the transmit path needs to answer it. A slot
// is taken when the RPC decoder writes a message (wr_en) and stays taken
// while the request waits in a scheduler queue, while a core handles it and
// until the transmit path has sent the response (free_en).
//
// alloc_valid/alloc_slot name the lowest free slot, combinationally. The
// write port stores a whole message and its reply header in one cycle. Two
// combinational read ports serve the home agent (one line of a slot) and the
// transmit path (a reply header). Memories are plain arrays. The paper
// states that decoded data is kept in SRAM; slot count, layout and the free
// list are this design's own choices.
module msg_buffer
  import lh_pkg::*;
#(
  parameter int unsigned NUM_SLOTS = 64,
  parameter int unsigned AUX_LINES = 2,
  localparam int unsigned SW = $clog2(NUM_SLOTS),
  localparam int unsigned LINES = 1 + AUX_LINES,
  localparam int unsigned LW = $clog2(LINES)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // allocation and write (RPC decoder)
  output logic                   alloc_valid,
  output logic [SW-1:0]          alloc_slot,
  input  logic                   wr_en,
  input  logic [SW-1:0]          wr_slot,
  input  logic [LINES*CL_BITS-1:0] wr_msg,
  input  reply_hdr_t             wr_reply,
  // line read (home agent)
  input  logic [SW-1:0]          rd_slot,
  input  logic [LW-1:0]          rd_line,
  output line_t                  rd_data,
  // reply header read (transmit path)
  input  logic [SW-1:0]          rep_slot,
  output reply_hdr_t             rep_hdr,
  // release (transmit path)
  input  logic                   free_en,
  input  logic [SW-1:0]          free_slot,
  output logic [SW:0]            free_count
);
  line_t      mem [NUM_SLOTS][LINES];
  reply_hdr_t rep [NUM_SLOTS];
  logic [NUM_SLOTS-1:0] busy;

  always_comb begin
    alloc_valid = 1'b0;
    alloc_slot  = '0;
    for (int s = NUM_SLOTS - 1; s >= 0; s--) begin
      if (!busy[s]) begin
        alloc_valid = 1'b1;
        alloc_slot  = SW'(s);
      end
    end
  end

  always_comb begin
    free_count = '0;
    for (int s = 0; s < NUM_SLOTS; s++) free_count += (SW+1)'(!busy[s]);
  end

  assign rd_data = (32'(rd_line) < LINES) ? mem[rd_slot][rd_line] : '0;
  assign rep_hdr = rep[rep_slot];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) busy <= '0;
    else begin
      if (free_en) busy[free_slot] <= 1'b0;
      if (wr_en)   busy[wr_slot]   <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int l = 0; l < LINES; l++) mem[wr_slot][l] <= wr_msg[l*CL_BITS +: CL_BITS];
      rep[wr_slot] <= wr_reply;
    end
  end

  // A slot is written only when free and released only when taken.
  a_wr_free: assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> !busy[wr_slot]);
  a_free_busy: assert property (@(posedge clk) disable iff (!rst_n)
                                free_en && !(wr_en && wr_slot == free_slot) |-> busy[free_slot]);

endmodule
