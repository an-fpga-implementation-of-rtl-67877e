3f
3f
3f
3f
3f
3f
3f
3f
3f
3f
3f
3f
3f
3f
3f
3f
3f
3f
3f
3f
