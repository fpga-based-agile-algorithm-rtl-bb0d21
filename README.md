# Algorithm-on-demand co-processor on a partially reconfigurable FPGA

A fixed-function co-processor can only speed up the computations its designers
anticipated. This co-processor keeps a bank of hardware functions (algorithms)
as compressed partial configuration bit-streams and loads one into a
partially reconfigurable FPGA only when the host asks for it. Functions already
on the FPGA keep running untouched; if there is no room, the function that has
gone unused the longest is thrown out to make space. The host therefore sees
one accelerator that can run any function of the bank, paying for
reconfiguration only on a miss, much as a cache pays for a refill.

The RTL follows the architecture of R. Pradeep, S. Vinay, S. Burman and
V. Kamakoti, "FPGA based Agile Algorithm-On-Demand Co-Processor" (IIT Madras).
That paper describes the blocks and their duties but gives no sizes, no bus
formats, no compression scheme and no controller program; everything of that
kind here is this design's own choice and is marked as such below and in each
file's opening comment.

## Blocks

```
            +-------------------------------+          +------------------- FPGA -------------+
 host  ---> | agile_controller              |--------->| configuration port (vendor, outside) |
 (PCI core, |  (the "microcontroller")      | cfg_*    |   frames 0..NUM_FRAMES-1             |
  outside)  |   |        |         |        |          |                                      |
            | config_rom local_ram frame_mgr|          |  common_io_wrapper                   |
            |                               |          |   input buffer  --> function f       |
            | configuration_module ---------+          |   output buffer <-- function f       |
            | data_input_module    ---------+--------->|                                      |
            | output_collection_module <----+----------|  f_* ports: functions (outside)      |
            +-------------------------------+          +--------------------------------------+
```

| module | role |
|---|---|
| `agile_pkg` | shared sizes, host command/response structs, record layout, token format |
| `agile_coprocessor` | top level: wires everything below |
| `agile_controller` | carries out host commands; sequences an EXEC |
| `config_rom` | bit-streams (from address 0 up) and function records (from the top down) |
| `local_ram` | inputs and results of functions |
| `frame_manager` | free frame list, frame replacement table, least-recently-used eviction |
| `configuration_module` | run-length decoder; writes the FPGA one frame ("window") at a time |
| `data_input_module` | fills the FPGA input buffer, starts the function |
| `output_collection_module` | drains the FPGA output buffer after the function is done |
| `common_io_wrapper` | static FPGA logic: input/output buffers shared by all functions |
| `sdp_buffer` | simple dual-port buffer used twice by the wrapper |

The PCI core, the FPGA's configuration logic and fabric, and the functions
themselves are not part of the RTL. Their signals are ports of
`agile_coprocessor`: `host_*` (command bus behind the PCI core), `cfg_*`
(configuration bus) and `f_*` (one port set per function number).

## What happens on an EXEC

The host command `EXEC f, in, out` runs function `f` on the words at
`RAM[in ..]` and leaves its results at `RAM[out ..]`:

1. **Record.** The controller reads the four record words of `f` from the top
   of the ROM. A record with compressed size 0 means "no such function"
   (`ST_NO_RECORD`); input or output counts above the buffer depth give
   `ST_SIZE_ERR`.
2. **Frames.** The frame manager is asked for `f` with the frame count from the
   record. If `f` is resident it answers *hit* and refreshes `f`'s time stamp.
   Otherwise it grants free frames, evicting the resident function with the
   oldest time stamp, one per cycle, until enough are free. A count of 0 or
   more than the FPGA has gives `ST_NO_FRAMES`.
3. **Configuration (miss only).** The controller streams the compressed words
   from the ROM into the configuration module, which decodes them and writes
   window after window to the granted frames, lowest frame number first. If the
   decoded stream does not fill exactly those frames the command ends with
   `ST_CFG_ERR` and the frames are handed back to the free list.
4. **Inputs.** The controller streams the input words from the RAM to the data
   input module, which writes them into the wrapper's input buffer over the
   fixed-width bus (address lines = word index) and then pulses `fn_start`
   with the function number.
5. **Run.** The wrapper raises `f_start[f]` and gives `f` sole use of both
   buffers until `f_done[f]`; it then raises `fn_done`.
6. **Results.** The output collection module reads the output count from the
   output buffer and the controller writes the words to `RAM[out ..]`.
7. **Response.** `resp.status = ST_OK`, `resp.data[0]` = 1 if `f` was already
   resident (no configuration was needed).

An EXEC that hits costs roughly `in + out` cycles plus about twenty cycles of
handshakes on top of the function's own run time (measured: 61 cycles from
command to response for 8 inputs and 8 outputs with the testbench's function
model, which itself needs 27). A miss adds about one cycle per decoded word
plus one per token header and run payload word (62 more cycles for a 3-frame
function of 48 words); evictions add a cycle each.

## The ROM: bit-streams at one end, records at the other

The host downloads the ROM word by word (`ROM_WR`). By convention the
compressed bit-streams are packed from address 0 upward and the record table
grows downward from the last address, so both can grow until they meet.
Record `f` occupies the four words ending at `ROM_DEPTH - f*4 - 1`:

| word | contents |
|---|---|
| `ROM_DEPTH - 4(f+1) + 0` | start address of the compressed bit-stream |
| `+ 1` | compressed size in words (0 = empty record) |
| `+ 2` | `[31:16]` output words, `[15:0]` input words |
| `+ 3` | number of frames the function occupies |

Start address, size and input/output sizes are the fields the source names.
The frame count is added here: the source says the frames a function uses are
fixed when the function is compiled, but not where that number is kept.

## Frames and who gets them

The reconfigurable area is `NUM_FRAMES` frames (a frame is a fixed group of
logic and routing blocks; here it is `FRAME_WORDS` configuration words). The
frame manager holds:

* the **free frame list**, one bit per frame (`free_frames` on the top);
* the **frame replacement table**: the owning function of every frame and,
  per function, a resident flag and the time stamp of its last access;
* a request counter that provides the time stamps.

Requests are served in a two-state machine. In the check state, in priority
order: illegal count → error; resident → hit; enough free frames → allocate the
lowest-numbered free frames; else evict the least recently used resident
function and check again next cycle. `done` therefore comes two cycles after
the request plus one per eviction. Eviction only updates the tables; the
evicted function's frames are simply overwritten by the next configuration.

Two points are interpretations. The source once calls the victim the
"frequently least used" function but then says the function with the oldest
time stamp gives up its frames; the design implements the time-stamp rule
(LRU). And the source says a function's frames are predetermined when it is
compiled, yet also that a new function may be fitted into whatever frames are
free; the design takes the second reading and treats bit-streams as
relocatable frame by frame, so only the number of frames is fixed per function.

## Compressed bit-streams

The source requires compression and decoding "window by window" but leaves the
scheme open. The design uses the simplest one that suits configuration data,
which is dominated by long runs of identical words: run-length tokens of 32-bit
words.

| header word | payload | meaning |
|---|---|---|
| bit 31 = 1, bits 15:0 = N | 1 word | that word N times |
| bit 31 = 0, bits 15:0 = N | N words | copied as they are |
| bits 15:0 = 0 | none | ignored |

Tokens may cross window boundaries. The decoder emits one word per cycle
(literal words pass combinationally from the input stream to the configuration
bus) and tags each with `cfg_frame`, `cfg_offset` and `cfg_last` (last word of
the window). `cfg_valid`/`cfg_ready` let the FPGA's configuration logic stall
it at any word. Changing the scheme only touches `configuration_module` and the
`TOK_*` constants.

## Moving data through the common buffers

The wrapper's buffers are shared by every function, so only one function can
use them at a time. The data input module writes inputs at addresses 0, 1, …
and pulses `fn_start`/`fn_sel`; the wrapper latches the function number,
pulses that function's `f_start` and routes its `f_in_addr`, `f_out_we`,
`f_out_addr`, `f_out_data` to the buffers. A function reads its inputs with
one cycle of latency (address in cycle *t*, `f_in_data` in *t+1*), writes its
results at any addresses and pulses `f_done` once. `fn_done` then stays high
until the next start, so the output collection module cannot miss it. The
output collection module reads through the buffer's own read register, giving
one word per cycle after a two-cycle start and holding a word for as long as
the controller stalls.

Transfers are whole 32-bit words, as many as the record says.

## Host commands

`host_cmd` is a `host_cmd_t {op, func[7:0], addr[15:0], data[31:0]}`, taken on
`host_cmd_valid && host_cmd_ready`; the design takes one command at a time and
answers with a one-cycle `host_resp_valid` and `host_resp_t {status, data}`.

| op | effect | response data |
|---|---|---|
| `CMD_ROM_WR` | `ROM[addr] = data` | 0 |
| `CMD_ROM_RD` | | `ROM[addr]` |
| `CMD_RAM_WR` | `RAM[addr] = data` | 0 |
| `CMD_RAM_RD` | | `RAM[addr]` |
| `CMD_EXEC` | run `func`, inputs at `RAM[addr]`, results to `RAM[data[15:0]]` | bit 0: was resident |

This command set is the design's own; the source only says the host operates
the co-processor by issuing instructions to its microcontroller over PCI.

## Sizes

All sizes are defaults in `agile_pkg` and parameters of the modules; none
comes from the source, which gives no numbers.

| parameter | default | meaning |
|---|---|---|
| `DATA_W` | 32 | every data path (a 32-bit PCI bus) |
| `ROM_AW` | 12 | ROM of 4096 words |
| `RAM_AW` | 12 | local RAM of 4096 words |
| `NUM_FUNCS` | 8 | records and function ports |
| `NUM_FRAMES` | 16 | reconfigurable frames |
| `FRAME_WORDS` | 16 | configuration words per frame (one window) |
| `BUF_AW` | 8 | input and output buffers of 256 words |
| `TS_W` | 32 | time-stamp width |

Real Virtex-II frames are much longer and a device has hundreds or
thousands of them; the defaults are kept small for simulation and can be raised
through the parameters. The frame manager's allocation and victim search are
combinational over all frames and functions, so its depth grows with both.

## Departures from the source

* The microcontroller and its "mini OS" are replaced by a hard-wired state
  machine doing the same duties; the free frame list and replacement table,
  software in the source, are hardware here.
* The compression scheme, the record's frame-count field, relocatable frame
  placement and the LRU reading of the replacement policy are choices, as
  explained above.
* The common I/O wrapper sits in the same top module as the rest; on a real
  board it would be the static part of the FPGA design, and the buses between
  it and the data modules would cross chips.
* Commands are served one at a time, so a function cannot run while another
  is being configured. The source points out that partial reconfiguration
  leaves functions in the untouched frames usable during a reconfiguration;
  the frame-level bookkeeping here would allow that, but the controller does
  not overlap the two.
* The source's proof of concept used a Stratix PCI board and a Virtex-II; no
  vendor primitive is used here, and the PCI core and the configuration port
  are represented only by the `host_*` and `cfg_*` ports.

## Verification

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`; each has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_config_rom`, `tb_local_ram` | random writes/reads against a reference array, latency, read data held |
| `tb_frame_manager` | reference model of the tables: hits, allocations, LRU evictions in order, releases, latency |
| `tb_configuration_module` | own run-length encoder; frame/offset/data/last of every word under random stalls; cycle count; short and long streams flagged |
| `tb_data_input_module` | buffer writes, single start, rate, oversize refusal |
| `tb_output_collection_module` | no read before done, order, stalls, rate |
| `tb_common_io_wrapper` | four function models, buffer sharing, start/done handling |
| `tb_agile_controller` | real ROM/RAM, scripted neighbours; streams, masks, RAM results, error paths |
| `tb_agile_coprocessor` | whole design at default sizes (below) |

`tb_agile_coprocessor` acts as host, as the FPGA configuration logic (storing
each frame's words, stalling at random) and, through `tb/function_model.sv`, as
eight functions. It downloads seven compressed functions, runs about fifty
EXECs and checks every response, every evicted function against a reference
LRU model, every configured frame against the uncompressed bit-stream, that no
function starts unless its frames hold its configuration, and every result.
It counts misses, hits, evictions, run and literal tokens, configuration
stalls and each error response, and fails if any never happened.

To run one with Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb rtl/agile_pkg.sv \
    tb/tb_agile_coprocessor.sv --top-module tb_agile_coprocessor
./obj_dir/Vtb_agile_coprocessor
```

Replace the testbench name for the others. The full-design run takes well
under a second of wall-clock time on a desktop.

What is not verified: timing closure and area on an actual FPGA, interaction
with a real PCI core or a real Virtex-II configuration port, and functions
other than the behavioural model.
