0065
012e
01f7
02c0
0389
0452
051b
05e3
06ac
0775
083e
0906
09cf
0a97
0b5f
0c28
0cf0
0db8
0e80
0f47
100f
10d6
119d
1264
132b
13f2
14b9
157f
1645
170b
17d0
1896
195b
1a20
1ae5
1ba9
1c6d
1d31
1df5
1eb8
1f7b
203e
2100
21c2
2284
2346
2407
24c8
2588
2648
2708
27c7
2886
2944
2a02
2ac0
2b7d
2c3a
2cf7
2db3
2e6e
2f2a
2fe4
309e
3158
3211
32ca
3383
343a
34f2
35a8
365f
3715
37ca
387e
3933
39e6
3a99
3b4c
3bfe
3caf
3d60
3e10
3ebf
3f6e
401d
40ca
4177
4224
42d0
437b
4425
44cf
4578
4621
46c9
4770
4816
48bc
4961
4a06
4aa9
4b4c
4bee
4c90
4d31
4dd1
4e70
4f0e
4fac
5049
50e5
5181
521b
52b5
534e
53e7
547e
5515
55aa
563f
56d3
5767
57f9
588b
591c
59ac
5a3b
5ac9
5b56
5be2
5c6e
5cf9
5d82
5e0b
5e93
5f1a
5fa0
6025
60aa
612d
61af
6231
62b1
6331
63af
642d
64aa
6525
65a0
661a
6693
670a
6781
67f7
686c
68e0
6952
69c4
6a35
6aa4
6b13
6b81
6bed
6c59
6cc3
6d2d
6d95
6dfd
6e63
6ec8
6f2c
6f90
6ff2
7053
70b2
7111
716f
71cb
7227
7281
72db
7333
738a
73e0
7435
7488
74db
752d
757d
75cc
761a
7667
76b3
76fe
7747
778f
77d7
781d
7862
78a5
78e8
7929
796a
79a9
79e6
7a23
7a5f
7a99
7ad2
7b0a
7b41
7b77
7bab
7bde
7c10
7c41
7c71
7c9f
7ccd
7cf9
7d24
7d4d
7d76
7d9d
7dc3
7de8
7e0b
7e2e
7e4f
7e6f
7e8d
7eab
7ec7
7ee2
7efc
7f15
7f2c
7f42
7f57
7f6b
7f7d
7f8f
7f9f
7fad
7fbb
7fc7
7fd2
7fdc
7fe5
7fec
7ff3
7ff7
7ffb
7ffe
7fff
