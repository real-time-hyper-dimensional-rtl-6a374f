00 08 10 18 1f 27 2e 35 3b 41 47 4c 51 56 5a 5e
61 65 68 6a 6d 6f 71 72 74 75 76 78 78 79 7a 7b
7b 7c 7c 7d 7d 7e 7e 7e 7e 7e 7f 7f 7f 7f 7f 7f
7f 7f 7f 7f 7f 7f 7f 7f 7f 7f 7f 7f 7f 7f 7f 7f
7f 7f 7f 7f 7f 7f 7f 7f 7f 7f 7f 7f 7f 7f 7f 7f
7f 7f 7f 7f 7f 7f 7f 7f 7f 7f 7f 7f 7f 7f 7f 7f
7f 7f 7f 7f 7f 7f 7f 7f 7f 7f 7f 7f 7f 7f 7f 7f
7f 7f 7f 7f 7f 7f 7f 7f 7f 7f 7f 7f 7f 7f 7f 7f
80 80 80 80 80 80 80 80 80 80 80 80 80 80 80 80
80 80 80 80 80 80 80 80 80 80 80 80 80 80 80 80
80 80 80 80 80 80 80 80 80 80 80 80 80 80 80 80
80 80 80 80 80 80 80 80 80 80 80 80 80 80 80 80
80 80 80 80 80 80 80 80 80 80 80 80 80 80 80 81
81 81 81 81 81 81 81 82 82 82 82 82 83 83 84 84
85 85 86 87 88 88 8a 8b 8c 8e 8f 91 93 96 98 9b
9f a2 a6 aa af b4 b9 bf c5 cb d2 d9 e1 e8 f0 f8
