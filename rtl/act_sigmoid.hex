40 42 44 46 48 4a 4c 4e 50 52 53 55 57 59 5a 5c
5e 5f 61 62 63 65 66 67 69 6a 6b 6c 6d 6e 6f 70
71 72 72 73 74 74 75 76 76 77 77 78 78 79 79 7a
7a 7a 7b 7b 7b 7c 7c 7c 7c 7c 7d 7d 7d 7d 7d 7e
7e 7e 7e 7e 7e 7e 7e 7f 7f 7f 7f 7f 7f 7f 7f 7f
7f 7f 7f 7f 7f 7f 7f 7f 7f 7f 7f 7f 7f 7f 7f 7f
7f 7f 7f 7f 7f 7f 7f 7f 7f 7f 7f 7f 7f 7f 7f 7f
7f 7f 7f 7f 7f 7f 7f 7f 7f 7f 7f 7f 7f 7f 7f 7f
00 00 00 00 00 00 00 00 00 00 00 00 00 00 00 00
00 00 00 00 00 00 00 00 00 00 00 00 00 00 00 00
00 00 00 00 00 00 00 00 01 01 01 01 01 01 01 01
01 01 01 01 01 01 01 01 01 01 02 02 02 02 02 02
02 02 03 03 03 03 03 04 04 04 04 04 05 05 05 06
06 06 07 07 08 08 09 09 0a 0a 0b 0c 0c 0d 0e 0e
0f 10 11 12 13 14 15 16 17 19 1a 1b 1d 1e 1f 21
22 24 26 27 29 2b 2d 2e 30 32 34 36 38 3a 3c 3e
