// memory_controller: DRAM-to-global-buffer transfer engine (prefetcher).
//
// The top scheduler hands it jobs: copy `job_count` KV pairs starting at pair
// address `job_dram_addr` in external DRAM to global-buffer word
// `job_gb_addr` onwards.  A pair is W bits and is read as BEATS = W/DRAM_W
// beats; beat b of pair a is at DRAM beat address a*BEATS + b and lands in
// bits b*DRAM_W +: DRAM_W of the buffer word.  Requests are issued back to
// back (valid/ready), responses return in order (resp_valid, no
// back-pressure); every completed pair is written to the buffer in the clock
// after its last beat arrives.  `job_done` pulses when the last pair of a job
// has been written.  The controller runs independently of the engines, so the
// scheduler can keep the next tiles coming while the current one is in use.
//
// The paper states only that the controller interfaces with DRAM and
// prefetches asynchronously; the job and DRAM interfaces are this design's
// own.
module memory_controller #(
  parameter int unsigned W        = 2048,
  parameter int unsigned DRAM_W   = 512,
  parameter int unsigned GB_DEPTH = 4096,
  parameter int unsigned AW       = 32
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // job interface
  input  logic                        job_valid,
  output logic                        job_ready,
  input  logic [AW-1:0]               job_dram_addr,
  input  logic [$clog2(GB_DEPTH)-1:0] job_gb_addr,
  input  logic [15:0]                 job_count,
  output logic                        job_done,
  // DRAM read interface
  output logic                        req_valid,
  input  logic                        req_ready,
  output logic [AW-1:0]               req_addr,
  input  logic                        resp_valid,
  input  logic [DRAM_W-1:0]           resp_data,
  // global buffer write port
  output logic                        gb_wr_en,
  output logic [$clog2(GB_DEPTH)-1:0] gb_wr_addr,
  output logic [W-1:0]                gb_wr_data
);
  localparam int unsigned BEATS = W / DRAM_W;
  localparam int unsigned BW    = (BEATS > 1) ? $clog2(BEATS) : 1;

  if (W % DRAM_W != 0 || DRAM_W > W) begin : g_bad_width
    $error("memory_controller: W must be a multiple of DRAM_W");
  end

  logic                        busy;
  logic [AW-1:0]               req_left, resp_left;
  logic [BW-1:0]               beat;
  logic [$clog2(GB_DEPTH)-1:0] gb_ptr;
  logic [W-1:0]                asm_word;

  assign job_ready = !busy;
  assign req_valid = busy && (req_left != '0);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      req_left  <= '0;
      resp_left <= '0;
      beat      <= '0;
      gb_wr_en  <= 1'b0;
      job_done  <= 1'b0;
    end else begin
      gb_wr_en <= 1'b0;
      job_done <= 1'b0;
      if (job_valid && job_ready) begin
        busy      <= (job_count != '0);
        job_done  <= (job_count == '0);
        req_addr  <= job_dram_addr * AW'(BEATS);
        req_left  <= AW'(job_count) * AW'(BEATS);
        resp_left <= AW'(job_count) * AW'(BEATS);
        gb_ptr    <= job_gb_addr;
        beat      <= '0;
      end else begin
        if (req_valid && req_ready) begin
          req_addr <= req_addr + 1'b1;
          req_left <= req_left - 1'b1;
        end
        if (busy && resp_valid) begin
          asm_word <= {resp_data, asm_word[W-1:DRAM_W]};   // beat 0 ends lowest
          resp_left <= resp_left - 1'b1;
          if (beat == BW'(BEATS - 1)) begin
            beat       <= '0;
            gb_wr_en   <= 1'b1;
            gb_wr_addr <= gb_ptr;
            gb_ptr     <= gb_ptr + 1'b1;
          end else begin
            beat <= beat + 1'b1;
          end
          if (resp_left == AW'(1)) begin
            busy     <= 1'b0;
            job_done <= 1'b1;
          end
        end
      end
    end
  end

  // the assembled word is complete one clock after its last beat
  assign gb_wr_data = asm_word;

  a_resp_expected: assert property (@(posedge clk) disable iff (!rst_n) resp_valid |-> busy);
endmodule
