// dist_map: the distribution map of registered destination ports.
//
// Each entry binds one destination port to the queue of the process that
// bound it. The host writes entries when a socket is bound or freed ("set
// mapping"). A lookup compares the port of a frame against every valid entry
// in parallel; the lowest-index match gives the queue. A miss means the frame
// has no receiving process and is dropped before it can cause an interrupt.
// Port-based mapping and the map's purpose follow the source design; the table
// size, its fully associative organisation and first-match priority are this
// design's choices.
//
// Timing: writes take effect on the next clock edge; lookups are
// combinational. cfg_rd_idx/cfg_rd_entry give the host read-back.
module dist_map
  import nic_pkg::*;
#(
  parameter int unsigned MAP_ENTRIES = 8,
  parameter int unsigned NUM_QUEUES  = 4,
  localparam int unsigned IW = (MAP_ENTRIES > 1) ? $clog2(MAP_ENTRIES) : 1,
  localparam int unsigned QW = (NUM_QUEUES > 1) ? $clog2(NUM_QUEUES) : 1
)(
  input  logic          clk,
  input  logic          rst_n,
  // configuration
  input  logic          cfg_we,
  input  logic [IW-1:0] cfg_idx,
  input  logic          cfg_valid,
  input  logic [QW-1:0] cfg_queue,
  input  logic [15:0]   cfg_port,
  input  logic [IW-1:0] cfg_rd_idx,
  output logic [31:0]   cfg_rd_entry,   // [31] valid, [23:16] queue, [15:0] port
  // lookup
  input  logic [15:0]   lk_port,
  output logic          lk_hit,
  output logic [QW-1:0] lk_queue
);

  typedef struct packed {
    logic          valid;
    logic [QW-1:0] qid;
    logic [15:0]   port;
  } entry_t;

  entry_t tbl [MAP_ENTRIES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < MAP_ENTRIES; i++) tbl[i] <= '0;
    end else if (cfg_we && 32'(cfg_idx) < MAP_ENTRIES) begin
      tbl[cfg_idx] <= '{valid: cfg_valid, qid: cfg_queue, port: cfg_port};
    end
  end

  always_comb begin
    lk_hit   = 1'b0;
    lk_queue = '0;
    for (int i = MAP_ENTRIES - 1; i >= 0; i--) begin
      if (tbl[i].valid && tbl[i].port == lk_port) begin
        lk_hit   = 1'b1;
        lk_queue = tbl[i].qid;
      end
    end
  end

  always_comb begin
    cfg_rd_entry = '0;
    if (32'(cfg_rd_idx) < MAP_ENTRIES) begin
      cfg_rd_entry[31]    = tbl[cfg_rd_idx].valid;
      cfg_rd_entry[23:16] = 8'(tbl[cfg_rd_idx].qid);
      cfg_rd_entry[15:0]  = tbl[cfg_rd_idx].port;
    end
  end

endmodule
